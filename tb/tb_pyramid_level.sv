// tb_pyramid_level: self-checking testbench of one pyramid level.
// Small level: 5x5 tile, two input channels, two output maps, K=3, stride 1
// (3x3 outputs, 18 PPUs). Two instances run the same random tiles and
// filters: DS-1 (spatial WPUs, requantisation shift 0) and DS-2 (temporal
// WPUs, shift 1). Tiles are loaded alternately pixel by pixel and as a
// whole tile, filters word by word. For every run:
//   * each stored activation must equal min(255, max(0, sum) >> shift),
//     where sum is the exact sum of the 18 online products of its window;
//   * `neg_count` must equal the number of negative sums;
//   * `done` must pulse ppu_latency + 1 cycles (DS-1) or the DS-2 PPU
//     latency + 1 cycles after `start` (the cycle after the results were
//     stored), or earlier when every PPU of the level terminated early.
// Runs with negative sums (early terminations) must occur.
`timescale 1ns/1ps
module tb_pyramid_level;
  import usefuse_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8, H = 5, NCH = 2, M = 2, K = 3, S = 1, KK = K * K;
  localparam int R = (H - K) / S + 1, P = R * R;
  localparam int D = N + clog2u(KK) + clog2u(NCH);
  localparam int LAT1 = ppu_latency(N, KK, NCH) + 1;
  localparam int LAT2 = KK * (N + 2) + 3 + DELTA_OLA * clog2u(NCH) + D + 1;
  localparam int NW = $clog2(P * M + 1);

  logic clk = 0, rst_n = 0;
  logic in_wr_en = 0, in_load_all = 0, kw_en = 0, start = 0;
  logic [2:0] in_wr_row = '0, in_wr_col = '0;
  logic [0:0] in_wr_ch = '0, kw_col = '0;
  logic [4:0] kw_idx = '0;
  logic [N-1:0] in_wr_data = '0, kw_data = '0;
  logic [N-1:0] in_tile [H][H][NCH];
  logic done1, done2;
  logic [N-1:0] act1 [R][R][M], act2 [R][R][M];
  logic [NW-1:0] neg1, neg2;
  logic [31:0] ac1, ac2;
  logic [N-1:0] img [H][H][NCH];
  int wgt [M][NCH][KK];
  int checks = 0, failures = 0, total_neg = 0, all_neg_early = 0;

  always #5 clk = ~clk;

  pyramid_level #(.N_BITS(N), .H(H), .NCH(NCH), .M(M), .K(K), .S(S), .RQ_SHIFT(0), .TEMPORAL(1'b0)) dut1 (
    .clk, .rst_n, .in_wr_en, .in_wr_row, .in_wr_col, .in_wr_ch, .in_wr_data, .in_load_all, .in_tile,
    .kw_en, .kw_col, .kw_idx, .kw_data, .start, .done(done1), .act_out(act1), .neg_count(neg1),
    .active_cycles(ac1));
  pyramid_level #(.N_BITS(N), .H(H), .NCH(NCH), .M(M), .K(K), .S(S), .RQ_SHIFT(1), .TEMPORAL(1'b1)) dut2 (
    .clk, .rst_n, .in_wr_en, .in_wr_row, .in_wr_col, .in_wr_ch, .in_wr_data, .in_load_all, .in_tile,
    .kw_en, .kw_col, .kw_idx, .kw_data, .start, .done(done2), .act_out(act2), .neg_count(neg2),
    .active_cycles(ac2));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(int it);
    longint sum;
    int nneg, f1, f2, bias;
    logic [N-1:0] e1, e2;
    bias = $urandom_range(0, 1);
    for (int i = 0; i < H; i++) for (int j = 0; j < H; j++) for (int c = 0; c < NCH; c++)
      img[i][j][c] = N'($urandom);
    for (int m = 0; m < M; m++) for (int c = 0; c < NCH; c++) for (int e = 0; e < KK; e++)
      wgt[m][c][e] = bias ? int'($urandom_range(0, 170)) - 128 : int'($urandom_range(0, 255)) - 128;
    // filters, one word per cycle
    for (int m = 0; m < M; m++) for (int c = 0; c < NCH; c++) for (int e = 0; e < KK; e++) begin
      kw_en = 1; kw_col = 1'(m); kw_idx = 5'(c * KK + e); kw_data = N'(wgt[m][c][e]);
      @(posedge clk); #1;
    end
    kw_en = 0;
    // tile
    if (it % 2 == 0) begin
      for (int i = 0; i < H; i++) for (int j = 0; j < H; j++) for (int c = 0; c < NCH; c++) begin
        in_wr_en = 1; in_wr_row = 3'(i); in_wr_col = 3'(j); in_wr_ch = 1'(c); in_wr_data = img[i][j][c];
        @(posedge clk); #1;
      end
      in_wr_en = 0;
    end else begin
      in_tile = img; in_load_all = 1;
      @(posedge clk); #1;
      in_load_all = 0;
    end
    start = 1;
    f1 = -1; f2 = -1;
    for (int cyc = 0; cyc <= LAT2 + 1; cyc++) begin
      #1;
      if (done1 && f1 < 0) f1 = cyc;
      if (done2 && f2 < 0) f2 = cyc;
      @(posedge clk); #1;
      start = 0;
    end
    nneg = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < R; c++) for (int m = 0; m < M; m++) begin
      sum = 0;
      for (int ch = 0; ch < NCH; ch++) for (int ki = 0; ki < K; ki++) for (int kj = 0; kj < K; kj++)
        sum += olm_ref(img[r*S+ki][c*S+kj][ch], wgt[m][ch][ki*K+kj], N);
      if (sum < 0) begin nneg++; sum = 0; end
      e1 = (sum > 255) ? 8'hFF : N'(sum);
      e2 = ((sum >> 1) > 255) ? 8'hFF : N'(sum >> 1);
      checks++;
      if (act1[r][c][m] != e1 || act2[r][c][m] != e2) begin
        failures++;
        $display("FAIL pyramid_level [%0d][%0d][%0d] %0d/%0d expected %0d/%0d", r, c, m,
                 act1[r][c][m], act2[r][c][m], e1, e2);
      end
    end
    total_neg += nneg;
    // a level whose PPUs all terminated early finishes early
    checks++;
    if ((nneg < P * M) ? (f1 != LAT1 || f2 != LAT2) : (f1 < 0 || f1 > LAT1 || f2 < 0 || f2 > LAT2)) begin
      failures++; $display("FAIL pyramid_level done at %0d/%0d expected %0d/%0d", f1, f2, LAT1, LAT2);
    end
    if (nneg == P * M && f1 < LAT1) all_neg_early++;
    checks++;
    if (int'(neg1) != nneg || int'(neg2) != nneg) begin
      failures++; $display("FAIL pyramid_level neg_count %0d/%0d expected %0d", neg1, neg2, nneg);
    end
  endtask

  initial begin
    for (int i = 0; i < H; i++) for (int j = 0; j < H; j++) for (int c = 0; c < NCH; c++)
      in_tile[i][j][c] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int it = 0; it < 40; it++) run_one(it);
    checks++;
    if (total_neg == 0) begin failures++; $display("FAIL pyramid_level no negative sums"); end
    $display("pyramid_level: %0d terminated PPU runs, active PPU-cycles ds1=%0d ds2=%0d", total_neg, ac1, ac2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
