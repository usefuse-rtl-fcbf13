// tb_olm: self-checking testbench of the serial-parallel online multiplier.
// Random unsigned activations (MSDF bit stream) times random signed weights;
// the N output digits are collected from the cycle the unit flags with
// start_o, which must be exactly 2 cycles (the online delay) after start.
// Checks: result equals the reference recurrence, and |Z - x*Y| <= 2^-(n+1).
// Also checks that `en` low freezes the unit mid-operation.
`timescale 1ns/1ps
module tb_olm;
  import usefuse_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8;
  logic clk = 0, rst_n = 0, en = 1, start = 0, start_o;
  sd_digit_t x, z;
  logic signed [N-1:0] y;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  olm #(.N_BITS(N)) dut (.clk, .rst_n, .en, .start, .x, .y, .z, .start_o);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input int unsigned xu, input int yv, input bit pause);
    int zint, ref_v, cyc, first;
    real err;
    zint  = 0;
    first = -1;
    y     = N'(yv);
    for (cyc = 0; cyc < N + 2; cyc++) begin
      start = (cyc == 0);
      x     = SD_ZERO;
      x.p   = (cyc < N) ? xu[N-1-cyc] : 1'b0;
      if (pause && cyc == 4) begin
        // freeze for three cycles: nothing may change
        en = 0;
        repeat (3) @(posedge clk);
        #1;
        en = 1;
      end
      #1;
      if (start_o && first < 0) first = cyc;
      if (cyc >= 2) zint = zint * 2 + (int'(z.p) - int'(z.n));
      @(posedge clk);
      #1;
    end
    start = 0;
    ref_v = olm_ref(xu, yv, N);
    checks++;
    if (zint != ref_v) begin
      failures++;
      $display("FAIL olm x=%0d y=%0d got %0d ref %0d", xu, yv, zint, ref_v);
    end
    err = real'(zint) - real'(xu) * real'(yv) / real'(1 << (N - 1));
    checks++;
    if (err > 0.5 || err < -0.5) begin
      failures++;
      $display("FAIL olm bound x=%0d y=%0d got %0d exact %f", xu, yv, zint,
               real'(xu) * real'(yv) / real'(1 << (N - 1)));
    end
    checks++;
    if (first != DELTA_OLM) begin
      failures++;
      $display("FAIL olm start_o at cycle %0d", first);
    end
  endtask

  initial begin
    x = SD_ZERO;
    y = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1;
    run_one(255, 127, 0);
    run_one(255, -128, 0);
    run_one(0, 77, 0);
    run_one(128, -1, 0);
    for (int i = 0; i < 300; i++)
      run_one($urandom_range(0, 255), int'($urandom_range(0, 255)) - 128, (i % 7) == 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
