// tb_ola: self-checking testbench of the online adder.
// Two random signed-digit streams of M digits go in MSDF; the M+1 output
// digits, taken from the cycle flagged by start_o (2 cycles after start, the
// online delay), must represent exactly (A + B) / 2.
`timescale 1ns/1ps
module tb_ola;
  import usefuse_pkg::*;

  localparam int M = 10;
  logic clk = 0, rst_n = 0, en = 1, start = 0, start_o;
  sd_digit_t a, b, z;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ola dut (.clk, .rst_n, .en, .start, .a, .b, .z, .start_o);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sd_digit_t rnd_digit(input int mode);
    int r;
    sd_digit_t d;
    r = (mode == 1) ? 1 : (mode == 2) ? -1 : int'($urandom_range(0, 2)) - 1;
    d = (r > 0) ? SD_POS : (r < 0) ? SD_NEG : SD_ZERO;
    return d;
  endfunction

  task automatic run_one(input int mode);
    sd_digit_t da [M], db [M];
    longint av, bv, zv;
    int first;
    av = 0; bv = 0; zv = 0; first = -1;
    for (int i = 0; i < M; i++) begin
      da[i] = rnd_digit(mode);
      db[i] = rnd_digit(mode);
      av = av * 2 + (int'(da[i].p) - int'(da[i].n));
      bv = bv * 2 + (int'(db[i].p) - int'(db[i].n));
    end
    for (int cyc = 0; cyc < M + 3; cyc++) begin
      start = (cyc == 0);
      a = (cyc < M) ? da[cyc] : SD_ZERO;
      b = (cyc < M) ? db[cyc] : SD_ZERO;
      #1;
      if (start_o && first < 0) first = cyc;
      if (cyc >= 2) zv = zv * 2 + (int'(z.p) - int'(z.n));
      @(posedge clk);
      #1;
    end
    start = 0;
    // zv has M+1 digits: value zv * 2^-(M+1) must equal (A+B)/2 * 2^-M
    checks++;
    if (zv != av + bv) begin
      failures++;
      $display("FAIL ola a=%0d b=%0d got %0d", av, bv, zv);
    end
    checks++;
    if (first != DELTA_OLA) begin
      failures++;
      $display("FAIL ola start_o at %0d", first);
    end
  endtask

  initial begin
    a = SD_ZERO; b = SD_ZERO;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    run_one(1);
    run_one(2);
    for (int i = 0; i < 400; i++) run_one(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
