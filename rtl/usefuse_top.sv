// usefuse_top: two-level fused convolution accelerator with online
// (most-significant-digit-first) arithmetic and a uniform tile stride.
//
// The default configuration is the paper's LeNet-5 example: the first two
// convolution layers (5x5 kernels, 1 -> 6 -> 16 maps, stride 1), each with
// ReLU and 2x2 max pooling, fused into one pyramid over a 32x32 image. The
// pyramid is traced back from one pooled output pixel of layer 2: level 2
// works on a 6x6x6 tile (2x2 outputs), level 1 on a 16x16x1 tile (12x12
// outputs). With the uniform tile strides ST1 = 4 (level 1) and 4 / 2 = 2
// (level 2) both levels make ALPHA = 5 movements per axis, so 5 x 5 pyramid
// positions produce the 5x5x16 pooled output of layer 2 with no skipped
// region.
//
// Blocks: CCU (control), DRAM interface, and per level a pyramid level
// (input buffer, kernel buffers, P x M PPU array, activation buffer)
// followed by a max-pooling block. Level 1's pooled tile is loaded directly
// into level 2's input buffer. The design works in the spatial style DS-1
// by default; TEMPORAL = 1 builds both levels with the temporal DS-2 PPUs.
//
// Memory port: one N_BITS-bit word per address; requests on mem_req_*
// (valid/ready, we = write), read data returned in order on mem_rsp_*.
// Layout: image at IMG_BASE as [row][col][ch] unsigned N_BITS-bit fractions;
// filters of level 1 then level 2 as [filter][ch][ki][kj] two's-complement
// fractions; output at OUT_BASE as [row][col][map] unsigned fractions.
// `go` starts a whole inference, `done` stays high at the end until the next
// `go`. Statistics: `neg_terminations` counts PPU results that END-U
// terminated early (both levels), `l1_active_cycles`/`l2_active_cycles` the
// PPU-cycles spent computing, `tiles_done` the pyramid movements.
//
// Fixed to Q = 2 levels; the tile geometry is derived from the layer
// parameters with Eq. (1) of the paper (D_l = (D_o - 1) S + K) and checked at
// elaboration for the uniform-movement condition.
module usefuse_top
  import usefuse_pkg::*;
#(
  parameter int unsigned N_BITS   = 8,
  parameter int unsigned IFM      = 32,
  parameter int unsigned C1       = 1,
  parameter int unsigned K1       = 5,
  parameter int unsigned M1       = 6,
  parameter int unsigned K2       = 5,
  parameter int unsigned M2       = 16,
  parameter int unsigned POOL     = 2,
  parameter int unsigned OUT_TILE = 1,     // pooled level-2 outputs per tile side
  parameter int unsigned ST1      = 4,     // level-1 tile stride
  parameter int unsigned RQ1      = 0,
  parameter int unsigned RQ2      = 0,
  parameter bit          TEMPORAL = 1'b0,
  parameter int unsigned AW       = 16,
  localparam int unsigned S1      = 1,
  localparam int unsigned S2      = 1,
  // Eq. (1) applied from the output back to the input
  localparam int unsigned R2      = tile_in_dim(OUT_TILE, POOL, POOL),
  localparam int unsigned H2      = tile_in_dim(R2, K2, S2),
  localparam int unsigned R1      = tile_in_dim(H2, POOL, POOL),
  localparam int unsigned H1      = tile_in_dim(R1, K1, S1),
  localparam int unsigned ALPHA   = tile_moves(IFM, H1, ST1),
  localparam int unsigned IFM2    = ((IFM - K1) / S1 + 1) / POOL,
  localparam int unsigned ST2     = ST1 / (S1 * POOL),
  localparam int unsigned OST     = ST2 / (S2 * POOL),
  localparam int unsigned IMG_BASE = 0,
  localparam int unsigned W1_BASE  = IMG_BASE + IFM * IFM * C1,
  localparam int unsigned W2_BASE  = W1_BASE + M1 * C1 * K1 * K1,
  localparam int unsigned OUT_BASE = W2_BASE + M2 * M1 * K2 * K2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              go,
  output logic              done,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [AW-1:0]     mem_req_addr,
  output logic [N_BITS-1:0] mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [N_BITS-1:0] mem_rsp_data,
  output logic [31:0]       neg_terminations,
  output logic [31:0]       l1_active_cycles,
  output logic [31:0]       l2_active_cycles,
  output logic [15:0]       tiles_done
);

  localparam int unsigned C2  = M1;
  localparam int unsigned P1  = R1 * R1;
  localparam int unsigned P2  = R2 * R2;
  localparam int unsigned H1W = (H1 > 1) ? $clog2(H1) : 1;
  localparam int unsigned C1W = (C1 > 1) ? $clog2(C1) : 1;
  localparam int unsigned M1W = (M1 > 1) ? $clog2(M1) : 1;
  localparam int unsigned M2W = (M2 > 1) ? $clog2(M2) : 1;
  localparam int unsigned I1W = $clog2(C1 * K1 * K1);
  localparam int unsigned I2W = $clog2(C2 * K2 * K2);

  // Uniform movement: level 2 must move exactly as often as level 1, and the
  // movements must cover the maps without gaps.
  if (tile_moves(IFM2, H2, ST2) != ALPHA || ST2 * S1 * POOL != ST1 || OST * S2 * POOL != ST2
      || (IFM - H1) % ST1 != 0 || ST1 / S1 > R1 || ST2 / S2 > R2 || OST > OUT_TILE) begin : g_bad_stride
    $error("usefuse_top: tile strides do not give a uniform, gap-free pyramid movement");
  end

  // DRAM interface <-> CCU
  logic              rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready, dram_idle;
  logic [AW-1:0]     rd_req_addr, wr_req_addr;
  logic [31:0]       rd_req_tag, rd_rsp_tag;
  logic [N_BITS-1:0] rd_rsp_data, wr_req_data;

  // CCU <-> levels
  logic              l1_in_wr_en, l1_kw_en, l2_kw_en, l1_start, l2_start;
  logic [H1W-1:0]    l1_in_wr_row, l1_in_wr_col;
  logic [C1W-1:0]    l1_in_wr_ch;
  logic [N_BITS-1:0] l1_in_wr_data, l1_kw_data, l2_kw_data;
  logic [M1W-1:0]    l1_kw_col;
  logic [I1W-1:0]    l1_kw_idx;
  logic [M2W-1:0]    l2_kw_col;
  logic [I2W-1:0]    l2_kw_idx;

  // level datapath
  logic              l1_done, l2_done, mp1_valid, mp2_valid;
  logic [N_BITS-1:0] l1_act [R1][R1][M1];
  logic [N_BITS-1:0] mp1_out [H2][H2][M1];
  logic [N_BITS-1:0] l2_act [R2][R2][M2];
  logic [N_BITS-1:0] mp2_out [OUT_TILE][OUT_TILE][M2];
  logic [N_BITS-1:0] l1_tile_unused [H1][H1][C1];
  logic [$clog2(P1*M1+1)-1:0] l1_neg;
  logic [$clog2(P2*M2+1)-1:0] l2_neg;

  always_comb begin
    for (int i = 0; i < H1; i++)
      for (int j = 0; j < H1; j++)
        for (int c = 0; c < C1; c++)
          l1_tile_unused[i][j][c] = '0;
  end

  dram_interface #(.AW(AW), .DW(N_BITS), .TW(32), .DEPTH(8)) u_dram_if (
    .clk          (clk),
    .rst_n        (rst_n),
    .rd_req_valid (rd_req_valid),
    .rd_req_ready (rd_req_ready),
    .rd_req_addr  (rd_req_addr),
    .rd_req_tag   (rd_req_tag),
    .rd_rsp_valid (rd_rsp_valid),
    .rd_rsp_data  (rd_rsp_data),
    .rd_rsp_tag   (rd_rsp_tag),
    .wr_req_valid (wr_req_valid),
    .wr_req_ready (wr_req_ready),
    .wr_req_addr  (wr_req_addr),
    .wr_req_data  (wr_req_data),
    .idle         (dram_idle),
    .mem_req_valid(mem_req_valid),
    .mem_req_ready(mem_req_ready),
    .mem_req_we   (mem_req_we),
    .mem_req_addr (mem_req_addr),
    .mem_req_wdata(mem_req_wdata),
    .mem_rsp_valid(mem_rsp_valid),
    .mem_rsp_data (mem_rsp_data)
  );

  ccu #(
    .N_BITS(N_BITS), .AW(AW), .IFM(IFM), .C1(C1), .H1(H1), .K1(K1), .S1(S1), .M1(M1),
    .ST1(ST1), .K2(K2), .S2(S2), .M2(M2), .POOL(POOL),
    .IMG_BASE(IMG_BASE), .W1_BASE(W1_BASE), .W2_BASE(W2_BASE), .OUT_BASE(OUT_BASE)
  ) u_ccu (
    .clk          (clk),
    .rst_n        (rst_n),
    .go           (go),
    .done         (done),
    .tiles_done   (tiles_done),
    .rd_req_valid (rd_req_valid),
    .rd_req_ready (rd_req_ready),
    .rd_req_addr  (rd_req_addr),
    .rd_req_tag   (rd_req_tag),
    .rd_rsp_valid (rd_rsp_valid),
    .rd_rsp_data  (rd_rsp_data),
    .rd_rsp_tag   (rd_rsp_tag),
    .wr_req_valid (wr_req_valid),
    .wr_req_ready (wr_req_ready),
    .wr_req_addr  (wr_req_addr),
    .wr_req_data  (wr_req_data),
    .l1_in_wr_en  (l1_in_wr_en),
    .l1_in_wr_row (l1_in_wr_row),
    .l1_in_wr_col (l1_in_wr_col),
    .l1_in_wr_ch  (l1_in_wr_ch),
    .l1_in_wr_data(l1_in_wr_data),
    .l1_kw_en     (l1_kw_en),
    .l1_kw_col    (l1_kw_col),
    .l1_kw_idx    (l1_kw_idx),
    .l1_kw_data   (l1_kw_data),
    .l1_start     (l1_start),
    .mp1_valid    (mp1_valid),
    .l2_kw_en     (l2_kw_en),
    .l2_kw_col    (l2_kw_col),
    .l2_kw_idx    (l2_kw_idx),
    .l2_kw_data   (l2_kw_data),
    .l2_start     (l2_start),
    .mp2_valid    (mp2_valid),
    .mp2_out      (mp2_out)
  );

  pyramid_level #(
    .N_BITS(N_BITS), .H(H1), .NCH(C1), .M(M1), .K(K1), .S(S1), .RQ_SHIFT(RQ1), .TEMPORAL(TEMPORAL)
  ) u_level1 (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_wr_en     (l1_in_wr_en),
    .in_wr_row    (l1_in_wr_row),
    .in_wr_col    (l1_in_wr_col),
    .in_wr_ch     (l1_in_wr_ch),
    .in_wr_data   (l1_in_wr_data),
    .in_load_all  (1'b0),
    .in_tile      (l1_tile_unused),
    .kw_en        (l1_kw_en),
    .kw_col       (l1_kw_col),
    .kw_idx       (l1_kw_idx),
    .kw_data      (l1_kw_data),
    .start        (l1_start),
    .done         (l1_done),
    .act_out      (l1_act),
    .neg_count    (l1_neg),
    .active_cycles(l1_active_cycles)
  );

  maxpool #(.N_BITS(N_BITS), .R(R1), .M(M1), .POOL(POOL)) u_pool1 (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (l1_done),
    .din      (l1_act),
    .out_valid(mp1_valid),
    .dout     (mp1_out)
  );

  pyramid_level #(
    .N_BITS(N_BITS), .H(H2), .NCH(C2), .M(M2), .K(K2), .S(S2), .RQ_SHIFT(RQ2), .TEMPORAL(TEMPORAL)
  ) u_level2 (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_wr_en     (1'b0),
    .in_wr_row    ('0),
    .in_wr_col    ('0),
    .in_wr_ch     ('0),
    .in_wr_data   ('0),
    .in_load_all  (mp1_valid),
    .in_tile      (mp1_out),
    .kw_en        (l2_kw_en),
    .kw_col       (l2_kw_col),
    .kw_idx       (l2_kw_idx),
    .kw_data      (l2_kw_data),
    .start        (l2_start),
    .done         (l2_done),
    .act_out      (l2_act),
    .neg_count    (l2_neg),
    .active_cycles(l2_active_cycles)
  );

  maxpool #(.N_BITS(N_BITS), .R(R2), .M(M2), .POOL(POOL)) u_pool2 (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (l2_done),
    .din      (l2_act),
    .out_valid(mp2_valid),
    .dout     (mp2_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 neg_terminations <= '0;
    else if (go && !done)       neg_terminations <= '0;
    else if (l1_done || l2_done)
      neg_terminations <= neg_terminations + (l1_done ? 32'(l1_neg) : 32'd0)
                                           + (l2_done ? 32'(l2_neg) : 32'd0);
  end

endmodule
