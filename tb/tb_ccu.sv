// tb_ccu: self-checking testbench of the central control unit.
// Small pyramid: 10x10 input with 2 channels, level-1 tile 6x6 (K1=3, two
// maps, tile stride 4), level 2 with K2=1 and three maps, 2x2 pooling after
// each level: ALPHA = 2 movements per axis, a 1x1x3 output tile per
// position and a 2x2x3 output map. The CCU drives the real DRAM interface
// and a behavioural memory that is busy 25% of the time; the two levels are
// replaced by stubs that answer `start` with a pooled-result pulse after a
// random delay and random output values. Checks:
//   * every weight of both layers is delivered exactly once to the right
//     kernel-buffer column/index with the value stored at its address;
//   * before each level-1 start exactly the H1*H1*C1 pixels of the current
//     tile position (row-major positions) have been delivered, each with the
//     image value at (ar*ST1 + row, ac*ST1 + col, ch);
//   * level 2 starts only after level 1's result, and after each level-2
//     result the stub's values reach the output map at the right place;
//   * ALPHA^2 tiles are processed, `done` rises and `tiles_done` matches.
`timescale 1ns/1ps
module tb_ccu;
  localparam int N = 8, AW = 10, IFM = 10, C1 = 2, H1 = 6, K1 = 3, S1 = 1, M1 = 2, ST1 = 4;
  localparam int K2 = 1, S2 = 1, M2 = 3, POOL = 2;
  localparam int KK1 = K1 * K1, KK2 = K2 * K2, R1 = (H1 - K1) / S1 + 1, H2 = R1 / POOL, C2 = M1;
  localparam int R2 = (H2 - K2) / S2 + 1, OT = R2 / POOL, ALPHA = (IFM - H1) / ST1 + 1;
  localparam int OST = ST1 / (S1 * POOL * S2 * POOL), OFM = (ALPHA - 1) * OST + OT;
  localparam int IMG_BASE = 0, W1_BASE = IFM * IFM * C1, W2_BASE = W1_BASE + M1 * C1 * KK1;
  localparam int OUT_BASE = W2_BASE + M2 * C2 * KK2;
  localparam int H1W = $clog2(H1), C1W = 1, M1W = 1, M2W = 2, I1W = $clog2(C1 * KK1), I2W = $clog2(C2 * KK2);

  logic clk = 0, rst_n = 0, go = 0, done;
  logic [15:0] tiles_done;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready, idle;
  logic [AW-1:0] rd_req_addr, wr_req_addr;
  logic [31:0] rd_req_tag, rd_rsp_tag;
  logic [N-1:0] rd_rsp_data, wr_req_data;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [N-1:0] mem_req_wdata, mem_rsp_data;
  logic l1_in_wr_en, l1_kw_en, l1_start, mp1_valid = 0, l2_kw_en, l2_start, mp2_valid = 0;
  logic [H1W-1:0] l1_in_wr_row, l1_in_wr_col;
  logic [C1W-1:0] l1_in_wr_ch;
  logic [N-1:0] l1_in_wr_data, l1_kw_data, l2_kw_data;
  logic [M1W-1:0] l1_kw_col;
  logic [I1W-1:0] l1_kw_idx;
  logic [M2W-1:0] l2_kw_col;
  logic [I2W-1:0] l2_kw_idx;
  logic [N-1:0] mp2_out [OT][OT][M2];

  int checks = 0, failures = 0;
  int w1_seen [M1][C1*KK1], w2_seen [M2][C2*KK2];
  int pix_seen [H1][H1][C1];
  int n_l1 = 0, n_l2 = 0, l1_pending = 0, l2_pending = 0;
  logic [N-1:0] out_ref [OFM][OFM][M2];

  always #5 clk = ~clk;

  ccu #(.N_BITS(N), .AW(AW), .IFM(IFM), .C1(C1), .H1(H1), .K1(K1), .S1(S1), .M1(M1), .ST1(ST1),
        .K2(K2), .S2(S2), .M2(M2), .POOL(POOL), .IMG_BASE(IMG_BASE), .W1_BASE(W1_BASE),
        .W2_BASE(W2_BASE), .OUT_BASE(OUT_BASE)) dut (.*);

  dram_interface #(.AW(AW), .DW(N), .TW(32), .DEPTH(8)) u_dif (.*);

  tb_mem_model #(.AW(AW), .DW(N), .BUSY_PCT(25), .MAX_LAT(5)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor: kernel and pixel deliveries, level starts.
  always @(posedge clk) if (rst_n) begin
    if (l1_kw_en) begin
      checks++;
      if (l1_kw_data != u_mem.mem[W1_BASE + l1_kw_col * C1 * KK1 + l1_kw_idx]) begin
        failures++; $display("FAIL ccu l1 weight [%0d][%0d]", l1_kw_col, l1_kw_idx);
      end
      w1_seen[l1_kw_col][l1_kw_idx]++;
    end
    if (l2_kw_en) begin
      checks++;
      if (l2_kw_data != u_mem.mem[W2_BASE + l2_kw_col * C2 * KK2 + l2_kw_idx]) begin
        failures++; $display("FAIL ccu l2 weight [%0d][%0d]", l2_kw_col, l2_kw_idx);
      end
      w2_seen[l2_kw_col][l2_kw_idx]++;
    end
    if (l1_in_wr_en) begin
      int ar, ac;
      ar = n_l1 / ALPHA; ac = n_l1 % ALPHA;
      checks++;
      if (l1_in_wr_data != u_mem.mem[IMG_BASE + ((ar * ST1 + l1_in_wr_row) * IFM + ac * ST1 + l1_in_wr_col) * C1 + l1_in_wr_ch]) begin
        failures++; $display("FAIL ccu pixel (%0d,%0d,%0d) of tile %0d", l1_in_wr_row, l1_in_wr_col, l1_in_wr_ch, n_l1);
      end
      pix_seen[l1_in_wr_row][l1_in_wr_col][l1_in_wr_ch]++;
    end
    if (l1_start) begin
      int bad;
      bad = 0;
      for (int i = 0; i < H1; i++) for (int j = 0; j < H1; j++) for (int c = 0; c < C1; c++) begin
        if (pix_seen[i][j][c] != 1) bad++;
        pix_seen[i][j][c] = 0;
      end
      checks++;
      if (bad != 0 || l1_pending != 0 || l2_pending != 0) begin
        failures++; $display("FAIL ccu level-1 start with %0d missing pixels", bad);
      end
      for (int m = 0; m < M1; m++) for (int e = 0; e < C1 * KK1; e++) begin
        checks++;
        if (w1_seen[m][e] != 1) begin failures++; $display("FAIL ccu l1 weight count [%0d][%0d]", m, e); end
      end
      for (int m = 0; m < M2; m++) for (int e = 0; e < C2 * KK2; e++) begin
        checks++;
        if (w2_seen[m][e] != 1) begin failures++; $display("FAIL ccu l2 weight count [%0d][%0d]", m, e); end
      end
      n_l1++;
      l1_pending = 1;
    end
    if (l2_start) begin
      checks++;
      if (l1_pending != 2) begin failures++; $display("FAIL ccu level-2 start before level-1 result"); end
      l1_pending = 0;
      n_l2++;
      l2_pending = 1;
    end
  end

  // Level stubs: pooled-result pulses after random delays.
  initial begin
    forever begin
      @(posedge clk); #1;
      if (l1_pending == 1) begin
        repeat ($urandom_range(2, 12)) @(posedge clk);
        #1 mp1_valid = 1; l1_pending = 2;
        @(posedge clk); #1 mp1_valid = 0;
      end else if (l2_pending == 1) begin
        repeat ($urandom_range(2, 12)) @(posedge clk);
        #1;
        for (int i = 0; i < OT; i++) for (int j = 0; j < OT; j++) for (int m = 0; m < M2; m++) begin
          mp2_out[i][j][m] = N'($urandom);
          out_ref[((n_l2 - 1) / ALPHA) * OST + i][((n_l2 - 1) % ALPHA) * OST + j][m] = mp2_out[i][j][m];
        end
        mp2_valid = 1; l2_pending = 0;
        @(posedge clk); #1 mp2_valid = 0;
      end
    end
  end

  initial begin
    for (int i = 0; i < 2**AW; i++) u_mem.mem[i] = N'($urandom);
    for (int m = 0; m < M1; m++) for (int e = 0; e < C1 * KK1; e++) w1_seen[m][e] = 0;
    for (int m = 0; m < M2; m++) for (int e = 0; e < C2 * KK2; e++) w2_seen[m][e] = 0;
    for (int i = 0; i < H1; i++) for (int j = 0; j < H1; j++) for (int c = 0; c < C1; c++) pix_seen[i][j][c] = 0;
    for (int i = 0; i < OT; i++) for (int j = 0; j < OT; j++) for (int m = 0; m < M2; m++) mp2_out[i][j][m] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 go = 1;
    @(posedge clk); #1 go = 0;
    wait (done === 1'b1);
    repeat (10) @(posedge clk);
    #1;
    checks++;
    if (n_l1 != ALPHA * ALPHA || n_l2 != ALPHA * ALPHA || tiles_done != 16'(ALPHA * ALPHA)) begin
      failures++; $display("FAIL ccu tiles l1=%0d l2=%0d tiles_done=%0d", n_l1, n_l2, tiles_done);
    end
    for (int i = 0; i < OFM; i++) for (int j = 0; j < OFM; j++) for (int m = 0; m < M2; m++) begin
      checks++;
      if (u_mem.mem[OUT_BASE + (i * OFM + j) * M2 + m] != out_ref[i][j][m]) begin
        failures++; $display("FAIL ccu output (%0d,%0d,%0d)", i, j, m);
      end
    end
    checks++;
    if (u_mem.stalls == 0) begin failures++; $display("FAIL ccu memory never stalled"); end
    $display("ccu: %0d tiles, %0d memory stalls", n_l1, u_mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
