// tb_usefuse_top_ds2: reduced end-to-end testbench of the accelerator with DS-2 (temporal) PPUs.
//
// Same checks and mechanism counters as the full-size test (see
// tb_usefuse_top): an 18x18 image, CONV1 with 2 maps of 3x3, CONV2 with 3
// maps of 3x3, 2x2 max pooling after each, level-1 tile 10x10, level-2
// tile 4x4, tile strides 4 and 2, so 3 x 3 pyramid positions give a 3x3x3
// output. The whole inference is compared bit for bit with a reference
// model, and early terminations, fused level-to-level transfers, single
// filter reads, pooling results and memory stalls are counted.
`timescale 1ns/1ps
module tb_usefuse_top_ds2;
  import usefuse_pkg::*;
  import tb_ref_pkg::*;

  // configuration under test (reduced)
  localparam int N = 8, AW = 16, IFM = 18, K1 = 3, M1 = 2, K2 = 3, M2 = 3, ST1 = 4;
  localparam bit TEMPORAL = 1'b1;
  // derived geometry (one pooled level-2 output per position, 2x2 pooling)
  localparam int C1 = 1, C2 = M1, KK1 = K1 * K1, KK2 = K2 * K2;
  localparam int R2 = 2, H2 = R2 - 1 + K2, R1 = 2 * H2, H1 = R1 - 1 + K1;
  localparam int ALPHA = (IFM - H1) / ST1 + 1, ST2 = ST1 / 2;
  localparam int O1 = IFM - K1 + 1, P1O = O1 / 2, O2 = P1O - K2 + 1, P2O = O2 / 2;
  localparam int IMG_BASE = 0, W1_BASE = IFM * IFM * C1, W2_BASE = W1_BASE + M1 * C1 * KK1;
  localparam int OUT_BASE = W2_BASE + M2 * C2 * KK2, OUT_END = OUT_BASE + P2O * P2O * M2;
  // cycles from a level's start to its last PPU result (DS-1 or DS-2 PPUs)
  localparam int LAT1 = TEMPORAL ? KK1 * (N + 2) + 3 + 2 * clog2u(C1) + N + clog2u(KK1) + clog2u(C1)
                                 : ppu_latency(N, KK1, C1);
  localparam int LAT2 = TEMPORAL ? KK2 * (N + 2) + 3 + 2 * clog2u(C2) + N + clog2u(KK2) + clog2u(C2)
                                 : ppu_latency(N, KK2, C2);

  logic clk = 0, rst_n = 0, go = 0, done;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [N-1:0] mem_req_wdata, mem_rsp_data;
  logic [31:0] neg_terminations, l1_active_cycles, l2_active_cycles;
  logic [15:0] tiles_done;

  int checks = 0, failures = 0;
  int img [IFM][IFM];
  int w1 [M1][KK1];
  int w2 [M2][C2][KK2];
  longint s1 [O1][O1][M1];
  longint s2 [O2][O2][M2];
  int a1 [O1][O1][M1], p1 [P1O][P1O][M1], a2 [O2][O2][M2], p2 [P2O][P2O][M2];
  int exp_neg = 0;
  int w_reads = 0, img_reads = 0, bad_access = 0, out_writes = 0;
  int out_wr_count [P2O*P2O*M2];
  int n_l1_start = 0, n_l2_start = 0, n_pool1 = 0, n_pool2 = 0, n_fused = 0;
  longint t_l1 = 0, cyc = 0, tile_cyc_min = 0, tile_cyc_max = 0;

  always #5 clk = ~clk;

  usefuse_top #(.IFM(IFM), .K1(K1), .M1(M1), .K2(K2), .M2(M2), .ST1(ST1), .TEMPORAL(TEMPORAL)) dut (
    .clk, .rst_n, .go, .done, .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_req_wdata, .mem_rsp_valid, .mem_rsp_data, .neg_terminations, .l1_active_cycles,
    .l2_active_cycles, .tiles_done);

  tb_mem_model #(.AW(AW), .DW(N), .BUSY_PCT(20), .MAX_LAT(4)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data));

  initial begin
    #5000000;
    failures++;
    $display("watchdog: no done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat8(input longint v);
    return (v < 0) ? 0 : (v > 255) ? 255 : int'(v);
  endfunction

  // Monitor of memory traffic and of the datapath's events.
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (mem_req_valid && mem_req_ready) begin
      int a;
      a = int'(mem_req_addr);
      if (mem_req_we) begin
        if (a >= OUT_BASE && a < OUT_END) begin out_writes++; out_wr_count[a - OUT_BASE]++; end
        else bad_access++;
      end else begin
        if (a >= W1_BASE && a < OUT_BASE) w_reads++;
        else if (a >= IMG_BASE && a < W1_BASE) img_reads++;
        else bad_access++;
      end
    end
    if (dut.l1_start) begin n_l1_start++; t_l1 = cyc; end
    if (dut.l2_start) n_l2_start++;
    if (dut.mp1_valid) begin
      n_pool1++;
      if (dut.u_level2.in_load_all) n_fused++;
    end
    if (dut.mp2_valid) begin
      longint d;
      n_pool2++;
      d = cyc - t_l1;
      if (tile_cyc_min == 0 || d < tile_cyc_min) tile_cyc_min = d;
      if (d > tile_cyc_max) tile_cyc_max = d;
    end
  end

  initial begin
    // ---------------- data ----------------
    for (int i = 0; i < IFM; i++) for (int j = 0; j < IFM; j++) begin
      img[i][j] = $urandom_range(0, 255);
      u_mem.mem[IMG_BASE + i * IFM + j] = N'(img[i][j]);
    end
    for (int m = 0; m < M1; m++) for (int e = 0; e < KK1; e++) begin
      w1[m][e] = int'($urandom_range(0, 63)) - 32;
      u_mem.mem[W1_BASE + m * KK1 + e] = N'(w1[m][e]);
    end
    for (int m = 0; m < M2; m++) for (int c = 0; c < C2; c++) for (int e = 0; e < KK2; e++) begin
      w2[m][c][e] = int'($urandom_range(0, 63)) - 32;
      u_mem.mem[W2_BASE + (m * C2 + c) * KK2 + e] = N'(w2[m][c][e]);
    end
    for (int i = 0; i < P2O * P2O * M2; i++) out_wr_count[i] = 0;

    // ---------------- reference ----------------
    for (int r = 0; r < O1; r++) for (int c = 0; c < O1; c++) for (int m = 0; m < M1; m++) begin
      s1[r][c][m] = 0;
      for (int ki = 0; ki < K1; ki++) for (int kj = 0; kj < K1; kj++)
        s1[r][c][m] += olm_ref(img[r + ki][c + kj], w1[m][ki * K1 + kj], N);
      a1[r][c][m] = sat8(s1[r][c][m]);
    end
    for (int r = 0; r < P1O; r++) for (int c = 0; c < P1O; c++) for (int m = 0; m < M1; m++)
      p1[r][c][m] = max4(a1[2*r][2*c][m], a1[2*r][2*c+1][m], a1[2*r+1][2*c][m], a1[2*r+1][2*c+1][m]);
    for (int r = 0; r < O2; r++) for (int c = 0; c < O2; c++) for (int m = 0; m < M2; m++) begin
      s2[r][c][m] = 0;
      for (int ch = 0; ch < C2; ch++) for (int ki = 0; ki < K2; ki++) for (int kj = 0; kj < K2; kj++)
        s2[r][c][m] += olm_ref(p1[r + ki][c + kj][ch], w2[m][ch][ki * K2 + kj], N);
      a2[r][c][m] = sat8(s2[r][c][m]);
    end
    for (int r = 0; r < P2O; r++) for (int c = 0; c < P2O; c++) for (int m = 0; m < M2; m++)
      p2[r][c][m] = max4(a2[2*r][2*c][m], a2[2*r][2*c+1][m], a2[2*r+1][2*c][m], a2[2*r+1][2*c+1][m]);
    // negative sums met by the 25 pyramid positions (tiles overlap, so
    // some outputs are computed more than once)
    for (int ar = 0; ar < ALPHA; ar++) for (int ac = 0; ac < ALPHA; ac++) begin
      for (int r = 0; r < R1; r++) for (int c = 0; c < R1; c++) for (int m = 0; m < M1; m++)
        if (s1[ar * ST1 + r][ac * ST1 + c][m] < 0) exp_neg++;
      for (int r = 0; r < R2; r++) for (int c = 0; c < R2; c++) for (int m = 0; m < M2; m++)
        if (s2[ar * ST2 + r][ac * ST2 + c][m] < 0) exp_neg++;
    end

    // ---------------- run ----------------
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 go = 1;
    @(posedge clk); #1 go = 0;
    wait (done === 1'b1);
    repeat (5) @(posedge clk);
    #1;

    // ---------------- checks ----------------
    for (int r = 0; r < P2O; r++) for (int c = 0; c < P2O; c++) for (int m = 0; m < M2; m++) begin
      checks++;
      if (int'(u_mem.mem[OUT_BASE + (r * P2O + c) * M2 + m]) != p2[r][c][m]) begin
        failures++;
        if (failures < 20)
          $display("FAIL top output (%0d,%0d,%0d) = %0d expected %0d", r, c, m,
                   u_mem.mem[OUT_BASE + (r * P2O + c) * M2 + m], p2[r][c][m]);
      end
      checks++;
      if (out_wr_count[(r * P2O + c) * M2 + m] != 1) begin
        failures++; $display("FAIL top output word written %0d times", out_wr_count[(r * P2O + c) * M2 + m]);
      end
    end
    check("early negative terminations", neg_terminations, exp_neg, 1);
    check("pyramid positions (tiles_done)", tiles_done, ALPHA * ALPHA, 1);
    check("level-1 starts", n_l1_start, ALPHA * ALPHA, 1);
    check("level-2 starts", n_l2_start, ALPHA * ALPHA, 1);
    check("level-1 max-pool results", n_pool1, ALPHA * ALPHA, 1);
    check("level-2 max-pool results", n_pool2, ALPHA * ALPHA, 1);
    check("fused on-chip level-1 -> level-2 transfers", n_fused, ALPHA * ALPHA, 1);
    check("filter words read (once each)", w_reads, M1 * C1 * KK1 + M2 * C2 * KK2, 1);
    check("image words read", img_reads, ALPHA * ALPHA * H1 * H1 * C1, 1);
    check("accesses outside image/filter/output", bad_access, 0, 0);
    check("output words written", out_writes, P2O * P2O * M2, 1);
    check("memory stall cycles (>0)", u_mem.stalls > 0, 1, 1);
    // early termination must have saved PPU cycles against always running to the end
    check("level-1 PPU-cycles saved (>0)",
          ALPHA * ALPHA * R1 * R1 * M1 * (LAT1 + 1) - int'(l1_active_cycles) > 0, 1, 1);
    check("level-2 PPU-cycles saved (>0)",
          ALPHA * ALPHA * R2 * R2 * M2 * (LAT2 + 1) - int'(l2_active_cycles) > 0, 1, 1);
    $display("top: %0d early terminations, active PPU-cycles L1=%0d of %0d, L2=%0d of %0d",
             neg_terminations, l1_active_cycles, ALPHA * ALPHA * R1 * R1 * M1 * (LAT1 + 1),
             l2_active_cycles, ALPHA * ALPHA * R2 * R2 * M2 * (LAT2 + 1));
    $display("top: compute cycles per position %0d..%0d, total %0d cycles, %0d memory stalls",
             tile_cyc_min, tile_cyc_max, cyc, u_mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int max4(input int a, input int b, input int c, input int d);
    int r;
    r = a;
    if (b > r) r = b;
    if (c > r) r = c;
    if (d > r) r = d;
    return r;
  endfunction

  task automatic check(input string what, input longint got, input longint expv, input bit nonzero);
    checks++;
    if (got != expv || (nonzero && got == 0)) begin
      failures++;
      $display("FAIL top %s: %0d expected %0d", what, got, expv);
    end else begin
      $display("top: %s = %0d", what, got);
    end
  endtask
endmodule
