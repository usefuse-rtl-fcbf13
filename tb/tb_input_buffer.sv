// tb_input_buffer: self-checking testbench of the tile input buffer.
// H=6, two channels, K=3, stride 1 (16 windows) and a strided instance
// (H=7, K=3, S=2, 9 windows). A reference tile array is updated alongside:
// random single-pixel writes, whole-tile loads and MSB-first shifts. After
// every cycle each window element (value and leading digit) of each window
// position must match the reference, and load_all must win over shift and
// shift over a write in the same cycle.
`timescale 1ns/1ps
module tb_input_buffer;
  import usefuse_pkg::*;

  localparam int N = 8, NCH = 2, K = 3, KK = 9;
  localparam int H0 = 6, S0 = 1, R0 = (H0 - K) / S0 + 1;
  localparam int H1 = 7, S1 = 2, R1 = (H1 - K) / S1 + 1;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Instance 0 (stride 1)
  logic wr0, ld0, sh0;
  logic [2:0] wrow0, wcol0;
  logic [0:0] wch0;
  logic [N-1:0] wd0;
  logic [N-1:0] tin0 [H0][H0][NCH];
  sd_digit_t dig0 [R0*R0][NCH][KK];
  logic [N-1:0] val0 [R0*R0][NCH][KK];
  logic [N-1:0] ref0 [H0][H0][NCH];
  input_buffer #(.N_BITS(N), .H(H0), .NCH(NCH), .K(K), .S(S0)) dut0 (
    .clk, .rst_n, .wr_en(wr0), .wr_row(wrow0), .wr_col(wcol0), .wr_ch(wch0), .wr_data(wd0),
    .load_all(ld0), .tile_in(tin0), .shift(sh0), .win_dig(dig0), .win_val(val0));

  // Instance 1 (stride 2)
  logic wr1, ld1, sh1;
  logic [2:0] wrow1, wcol1;
  logic [0:0] wch1;
  logic [N-1:0] wd1;
  logic [N-1:0] tin1 [H1][H1][NCH];
  sd_digit_t dig1 [R1*R1][NCH][KK];
  logic [N-1:0] val1 [R1*R1][NCH][KK];
  logic [N-1:0] ref1 [H1][H1][NCH];
  input_buffer #(.N_BITS(N), .H(H1), .NCH(NCH), .K(K), .S(S1)) dut1 (
    .clk, .rst_n, .wr_en(wr1), .wr_row(wrow1), .wr_col(wcol1), .wr_ch(wch1), .wr_data(wd1),
    .load_all(ld1), .tile_in(tin1), .shift(sh1), .win_dig(dig1), .win_val(val1));

  task automatic compare();
    int bad;
    bad = 0;
    for (int r = 0; r < R0; r++)
      for (int c = 0; c < R0; c++)
        for (int ch = 0; ch < NCH; ch++)
          for (int ki = 0; ki < K; ki++)
            for (int kj = 0; kj < K; kj++) begin
              if (val0[r*R0+c][ch][ki*K+kj] != ref0[r*S0+ki][c*S0+kj][ch]) bad++;
              if (dig0[r*R0+c][ch][ki*K+kj] != {ref0[r*S0+ki][c*S0+kj][ch][N-1], 1'b0}) bad++;
            end
    for (int r = 0; r < R1; r++)
      for (int c = 0; c < R1; c++)
        for (int ch = 0; ch < NCH; ch++)
          for (int ki = 0; ki < K; ki++)
            for (int kj = 0; kj < K; kj++) begin
              if (val1[r*R1+c][ch][ki*K+kj] != ref1[r*S1+ki][c*S1+kj][ch]) bad++;
              if (dig1[r*R1+c][ch][ki*K+kj] != {ref1[r*S1+ki][c*S1+kj][ch][N-1], 1'b0}) bad++;
            end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL input_buffer %0d mismatches", bad); end
  endtask

  initial begin
    for (int i = 0; i < H0; i++) for (int j = 0; j < H0; j++) for (int c = 0; c < NCH; c++) begin
      ref0[i][j][c] = '0; tin0[i][j][c] = '0;
    end
    for (int i = 0; i < H1; i++) for (int j = 0; j < H1; j++) for (int c = 0; c < NCH; c++) begin
      ref1[i][j][c] = '0; tin1[i][j][c] = '0;
    end
    {wr0, ld0, sh0, wr1, ld1, sh1} = '0;
    {wrow0, wcol0, wch0, wd0, wrow1, wcol1, wch1, wd1} = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      // random stimulus for both instances (same control pattern)
      wr0 = ($urandom_range(0, 2) != 0); ld0 = ($urandom_range(0, 15) == 0);
      sh0 = ($urandom_range(0, 3) == 0);
      wrow0 = 3'($urandom_range(0, H0 - 1)); wcol0 = 3'($urandom_range(0, H0 - 1));
      wch0 = 1'($urandom_range(0, 1)); wd0 = N'($urandom);
      wr1 = wr0; ld1 = ld0; sh1 = sh0;
      wrow1 = 3'($urandom_range(0, H1 - 1)); wcol1 = 3'($urandom_range(0, H1 - 1));
      wch1 = 1'($urandom_range(0, 1)); wd1 = N'($urandom);
      for (int i = 0; i < H0; i++) for (int j = 0; j < H0; j++) for (int c = 0; c < NCH; c++)
        tin0[i][j][c] = N'($urandom);
      for (int i = 0; i < H1; i++) for (int j = 0; j < H1; j++) for (int c = 0; c < NCH; c++)
        tin1[i][j][c] = N'($urandom);
      @(posedge clk); #1;
      if (ld0) ref0 = tin0;
      else if (sh0) begin
        for (int i = 0; i < H0; i++) for (int j = 0; j < H0; j++) for (int c = 0; c < NCH; c++)
          ref0[i][j][c] = ref0[i][j][c] << 1;
      end else if (wr0) ref0[wrow0][wcol0][wch0] = wd0;
      if (ld1) ref1 = tin1;
      else if (sh1) begin
        for (int i = 0; i < H1; i++) for (int j = 0; j < H1; j++) for (int c = 0; c < NCH; c++)
          ref1[i][j][c] = ref1[i][j][c] << 1;
      end else if (wr1) ref1[wrow1][wcol1][wch1] = wd1;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
