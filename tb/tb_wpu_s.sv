// tb_wpu_s: self-checking testbench of the spatial window processing unit.
// A 3x3 window of random unsigned activations and signed weights; the N+4
// output digits (from start_o, expected 2 + 2*4 = 10 cycles after start)
// must equal the sum of the nine online products exactly, and the sum must
// lie within 9 * 2^-(n+1) of the exact inner product.
`timescale 1ns/1ps
module tb_wpu_s;
  import usefuse_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8, K = 3, KK = 9, S = 4;
  logic clk = 0, rst_n = 0, en = 1, start = 0, start_o;
  sd_digit_t x [KK];
  logic signed [N-1:0] w [KK];
  sd_digit_t z;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  wpu_s #(.N_BITS(N), .K(K)) dut (.clk, .rst_n, .en, .start, .x, .w, .z, .start_o);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one();
    int unsigned xa [KK];
    int wa [KK];
    longint sum_ref, zv;
    real exact;
    int first;
    sum_ref = 0; zv = 0; first = -1; exact = 0.0;
    for (int i = 0; i < KK; i++) begin
      xa[i] = $urandom_range(0, 255);
      wa[i] = int'($urandom_range(0, 255)) - 128;
      w[i]  = N'(wa[i]);
      sum_ref += olm_ref(xa[i], wa[i], N);
      exact   += real'(xa[i]) * real'(wa[i]) / 128.0;
    end
    for (int cyc = 0; cyc < 2 + 2 * S + N + S; cyc++) begin
      start = (cyc == 0);
      for (int i = 0; i < KK; i++) begin
        x[i] = SD_ZERO;
        x[i].p = (cyc < N) ? xa[i][N-1-cyc] : 1'b0;
      end
      #1;
      if (start_o && first < 0) first = cyc;
      if (cyc >= 2 + 2 * S) zv = zv * 2 + (int'(z.p) - int'(z.n));
      @(posedge clk); #1;
    end
    start = 0;
    checks++;
    if (zv != sum_ref) begin failures++; $display("FAIL wpu_s got %0d ref %0d", zv, sum_ref); end
    checks++;
    if (real'(zv) - exact > 4.5 || exact - real'(zv) > 4.5) begin
      failures++; $display("FAIL wpu_s bound got %0d exact %f", zv, exact);
    end
    checks++;
    if (first != 2 + 2 * S) begin failures++; $display("FAIL wpu_s latency %0d", first); end
  endtask

  initial begin
    for (int i = 0; i < KK; i++) begin x[i] = SD_ZERO; w[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 200; i++) run_one();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
