// tb_wpu_t: self-checking testbench of the temporal window processing unit.
// Same 3x3 window check as for WPU-S: the N+4 output digits must equal the
// sum of the nine online products exactly. Timing: every product takes
// N + 2 cycles (online delay 2 + N digits, the (delta + (n-1) + Acc) of the
// paper's DS-2 formula with a one-cycle accumulate), so the first output
// digit must come 9*(N+2) + 3 cycles after start (one cycle to leave idle,
// the last accumulate, and the output register).
`timescale 1ns/1ps
module tb_wpu_t;
  import usefuse_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8, K = 3, KK = 9, S = 4;
  localparam int LAT = KK * (N + 2) + 3;
  logic clk = 0, rst_n = 0, en = 1, start = 0, start_o, busy;
  logic [N-1:0] x [KK];
  logic signed [N-1:0] w [KK];
  sd_digit_t z;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  wpu_t #(.N_BITS(N), .K(K)) dut (.clk, .rst_n, .en, .start, .x, .w, .z, .start_o, .busy);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one();
    longint sum_ref, zv;
    int first, wa;
    sum_ref = 0; zv = 0; first = -1;
    for (int i = 0; i < KK; i++) begin
      x[i] = N'($urandom_range(0, 255));
      wa   = int'($urandom_range(0, 255)) - 128;
      w[i] = N'(wa);
      sum_ref += olm_ref(x[i], wa, N);
    end
    for (int cyc = 0; cyc < LAT + N + S + 2; cyc++) begin
      start = (cyc == 0);
      #1;
      if (start_o && first < 0) first = cyc;
      if (first >= 0 && cyc < first + N + S) zv = zv * 2 + (int'(z.p) - int'(z.n));
      @(posedge clk); #1;
    end
    start = 0;
    checks++;
    if (zv != sum_ref) begin failures++; $display("FAIL wpu_t got %0d ref %0d", zv, sum_ref); end
    checks++;
    if (first != LAT) begin failures++; $display("FAIL wpu_t latency %0d expected %0d", first, LAT); end
    checks++;
    if (busy) begin failures++; $display("FAIL wpu_t still busy"); end
  endtask

  initial begin
    for (int i = 0; i < KK; i++) begin x[i] = '0; w[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 100; i++) run_one();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
