// tb_ppu: self-checking testbench of the pixel processing unit.
// Two PPUs (K=3, two input channels) see the same random windows: a DS-1
// PPU with spatial WPUs fed by activation digit streams and a DS-2 PPU with
// temporal WPUs fed by parallel activations. Weights are biased negative
// half of the time so that early termination is exercised. For both:
//   * `terminated` must be set exactly when the sum of the 18 online
//     products is negative, and `value` must be max(0, sum) exactly;
//   * `valid` must rise at the PPU latency (DS-1: ppu_latency(), DS-2:
//     9*(n+2)+3 cycles of WPU-T, one adder stage and D digits) unless the
//     result terminated early, in which case it must rise earlier.
// Early terminations of both PPUs are counted and must occur.
`timescale 1ns/1ps
module tb_ppu;
  import usefuse_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8, K = 3, KK = 9, NCH = 2;
  localparam int S = clog2u(KK) + clog2u(NCH);
  localparam int D = N + S;
  localparam int LAT1 = ppu_latency(N, KK, NCH);
  localparam int LAT2 = KK * (N + 2) + 3 + DELTA_OLA * clog2u(NCH) + D;

  logic clk = 0, rst_n = 0, start = 0;
  sd_digit_t x_dig [NCH][KK];
  logic [N-1:0] x_val [NCH][KK];
  logic signed [N-1:0] w [NCH][KK];
  logic valid1, term1, act1, valid2, term2, act2;
  logic [D-1:0] value1, value2;
  int checks = 0, failures = 0, early1 = 0, early2 = 0, nneg = 0;

  always #5 clk = ~clk;

  ppu #(.N_BITS(N), .K(K), .NCH(NCH), .TEMPORAL(1'b0)) dut1 (
    .clk, .rst_n, .start, .x_dig, .x_val, .w,
    .valid(valid1), .terminated(term1), .active(act1), .value(value1));
  ppu #(.N_BITS(N), .K(K), .NCH(NCH), .TEMPORAL(1'b1)) dut2 (
    .clk, .rst_n, .start, .x_dig, .x_val, .w,
    .valid(valid2), .terminated(term2), .active(act2), .value(value2));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(string nm, int lat, int first, logic term, logic [D-1:0] val,
                           longint sum_ref, ref int early);
    checks++;
    if (term != (sum_ref < 0)) begin
      failures++; $display("FAIL %s terminated=%0b sum=%0d", nm, term, sum_ref);
    end
    checks++;
    if (longint'(val) != ((sum_ref < 0) ? 0 : sum_ref)) begin
      failures++; $display("FAIL %s value %0d sum %0d", nm, val, sum_ref);
    end
    checks++;
    if (sum_ref >= 0 && first != lat) begin
      failures++; $display("FAIL %s latency %0d expected %0d", nm, first, lat);
    end
    if (sum_ref < 0) begin
      checks++;
      if (first < 0 || first > lat) begin
        failures++; $display("FAIL %s late termination %0d", nm, first);
      end
      if (first < lat) early++;
    end
  endtask

  task automatic run_one();
    longint sum_ref;
    int wa, f1, f2, bias;
    sum_ref = 0; f1 = -1; f2 = -1;
    bias = $urandom_range(0, 1);
    for (int c = 0; c < NCH; c++)
      for (int i = 0; i < KK; i++) begin
        x_val[c][i] = N'($urandom_range(0, 255));
        wa = bias ? int'($urandom_range(0, 150)) - 128 : int'($urandom_range(0, 255)) - 128;
        w[c][i] = N'(wa);
        sum_ref += olm_ref(x_val[c][i], wa, N);
      end
    if (sum_ref < 0) nneg++;
    for (int cyc = 0; cyc <= LAT2 + 1; cyc++) begin
      start = (cyc == 0);
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < KK; i++) begin
          x_dig[c][i] = SD_ZERO;
          x_dig[c][i].p = (cyc < N) ? x_val[c][i][N-1-cyc] : 1'b0;
        end
      #1;
      if (cyc > 0 && valid1 && f1 < 0) f1 = cyc;
      if (cyc > 0 && valid2 && f2 < 0) f2 = cyc;
      @(posedge clk); #1;
    end
    start = 0;
    check_one("ds1", LAT1, f1, term1, value1, sum_ref, early1);
    check_one("ds2", LAT2, f2, term2, value2, sum_ref, early2);
  endtask

  initial begin
    for (int c = 0; c < NCH; c++)
      for (int i = 0; i < KK; i++) begin x_dig[c][i] = SD_ZERO; x_val[c][i] = '0; w[c][i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 150; i++) run_one();
    checks++;
    if (early1 == 0 || early2 == 0) begin
      failures++; $display("FAIL ppu no early terminations %0d %0d", early1, early2);
    end
    $display("ppu: %0d negative windows, early terminations ds1=%0d ds2=%0d", nneg, early1, early2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
