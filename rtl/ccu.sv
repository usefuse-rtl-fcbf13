// ccu: central control unit of the two-level fusion pyramid.
//
// Sequences the whole fused computation:
//   1. reads both layers' filters from memory once and writes them into the
//      kernel buffers (level 1 first, then level 2);
//   2. moves the fusion pyramid over the input feature map in ALPHA x ALPHA
//      uniform steps. For each position (ar, ac) it reads the level-1 input
//      tile, whose top-left corner is (ar*ST1, ac*ST1), into the level-1
//      input buffer; starts level 1; waits for its pooled result (which the
//      datapath loads straight into the level-2 input buffer); starts level
//      2; waits for its pooled result and writes it to the output feature
//      map at (ar*OST, ac*OST), OST being the tile stride seen at the output;
//   3. raises `done`.
// Because every level's tile stride gives the same number of movements
// ALPHA (the uniform-stride condition), one counter pair serves all levels
// and no level waits for another to catch up. The paper gives the movement
// scheme but not the controller; the order of the steps, the memory layout
// (channel-fastest image, filter-major weights, channel-fastest output) and
// the absence of overlap between tile loading and computing are this
// design's choices.
//
// Memory requests go through the DRAM interface; a read's tag carries where
// the word goes: {kind[31:30], a[29:20], b[19:10], c[9:0]} with kind 0/1 =
// level-1/level-2 weight (a = filter, b = index) and kind 2 = pixel
// (a = row, b = column, c = channel).
module ccu #(
  parameter int unsigned N_BITS   = 8,
  parameter int unsigned AW       = 16,
  parameter int unsigned IFM      = 32,
  parameter int unsigned C1       = 1,
  parameter int unsigned H1       = 16,
  parameter int unsigned K1       = 5,
  parameter int unsigned S1       = 1,
  parameter int unsigned M1       = 6,
  parameter int unsigned ST1      = 4,
  parameter int unsigned K2       = 5,
  parameter int unsigned S2       = 1,
  parameter int unsigned M2       = 16,
  parameter int unsigned POOL     = 2,
  parameter int unsigned IMG_BASE = 0,
  parameter int unsigned W1_BASE  = 1024,
  parameter int unsigned W2_BASE  = 1174,
  parameter int unsigned OUT_BASE = 3574,
  localparam int unsigned R1      = (H1 - K1) / S1 + 1,
  localparam int unsigned H2      = R1 / POOL,
  localparam int unsigned C2      = M1,
  localparam int unsigned R2      = (H2 - K2) / S2 + 1,
  localparam int unsigned OT      = R2 / POOL,
  localparam int unsigned ALPHA   = (IFM - H1) / ST1 + 1,
  localparam int unsigned OST     = ST1 / (S1 * POOL * S2 * POOL),
  localparam int unsigned OFM     = (ALPHA - 1) * OST + OT,
  localparam int unsigned KK1     = K1 * K1,
  localparam int unsigned KK2     = K2 * K2,
  localparam int unsigned H1W     = (H1 > 1) ? $clog2(H1) : 1,
  localparam int unsigned C1W     = (C1 > 1) ? $clog2(C1) : 1,
  localparam int unsigned M1W     = (M1 > 1) ? $clog2(M1) : 1,
  localparam int unsigned M2W     = (M2 > 1) ? $clog2(M2) : 1,
  localparam int unsigned I1W     = $clog2(C1 * KK1),
  localparam int unsigned I2W     = $clog2(C2 * KK2)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              go,
  output logic              done,
  output logic [15:0]       tiles_done,
  // DRAM interface
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [AW-1:0]     rd_req_addr,
  output logic [31:0]       rd_req_tag,
  input  logic              rd_rsp_valid,
  input  logic [N_BITS-1:0] rd_rsp_data,
  input  logic [31:0]       rd_rsp_tag,
  output logic              wr_req_valid,
  input  logic              wr_req_ready,
  output logic [AW-1:0]     wr_req_addr,
  output logic [N_BITS-1:0] wr_req_data,
  // level 1
  output logic              l1_in_wr_en,
  output logic [H1W-1:0]    l1_in_wr_row,
  output logic [H1W-1:0]    l1_in_wr_col,
  output logic [C1W-1:0]    l1_in_wr_ch,
  output logic [N_BITS-1:0] l1_in_wr_data,
  output logic              l1_kw_en,
  output logic [M1W-1:0]    l1_kw_col,
  output logic [I1W-1:0]    l1_kw_idx,
  output logic [N_BITS-1:0] l1_kw_data,
  output logic              l1_start,
  input  logic              mp1_valid,
  // level 2
  output logic              l2_kw_en,
  output logic [M2W-1:0]    l2_kw_col,
  output logic [I2W-1:0]    l2_kw_idx,
  output logic [N_BITS-1:0] l2_kw_data,
  output logic              l2_start,
  input  logic              mp2_valid,
  input  logic [N_BITS-1:0] mp2_out [OT][OT][M2]
);

  typedef enum logic [3:0] {
    S_IDLE, S_W_ISSUE, S_W_WAIT, S_T_ISSUE, S_T_WAIT,
    S_START1, S_WAIT1, S_START2, S_WAIT2, S_WB, S_NEXT, S_DONE
  } state_t;

  localparam int unsigned NW  = M1 * C1 * KK1 + M2 * C2 * KK2;
  localparam int unsigned NT  = H1 * H1 * C1;
  localparam logic [1:0]  K_W1 = 2'd0, K_W2 = 2'd1, K_PIX = 2'd2;

  state_t        state_q;
  logic          lvl_q;                 // weight loading: 0 = level 1, 1 = level 2
  logic [9:0]    a_q, b_q, c_q;         // issue counters
  logic [15:0]   rsp_cnt_q;
  logic [9:0]    ar_q, ac_q;            // pyramid position
  logic          issue;
  logic [1:0]    rsp_kind;

  // ---------------- request generation ----------------
  always_comb begin
    rd_req_valid = (state_q == S_W_ISSUE) || (state_q == S_T_ISSUE);
    rd_req_tag   = '0;
    rd_req_addr  = '0;
    if (state_q == S_W_ISSUE) begin
      rd_req_tag = {lvl_q ? K_W2 : K_W1, a_q, b_q, 10'd0};
      rd_req_addr = lvl_q ? AW'(W2_BASE + 32'(a_q) * C2 * KK2 + 32'(b_q))
                          : AW'(W1_BASE + 32'(a_q) * C1 * KK1 + 32'(b_q));
    end else begin
      rd_req_tag  = {K_PIX, a_q, b_q, c_q};
      rd_req_addr = AW'(IMG_BASE + ((32'(ar_q) * ST1 + 32'(a_q)) * IFM
                                   + 32'(ac_q) * ST1 + 32'(b_q)) * C1 + 32'(c_q));
    end
    wr_req_valid = (state_q == S_WB);
    wr_req_addr  = AW'(OUT_BASE + ((32'(ar_q) * OST + 32'(a_q)) * OFM
                                  + 32'(ac_q) * OST + 32'(b_q)) * M2 + 32'(c_q));
    wr_req_data  = '0;
    for (int i = 0; i < OT; i++)
      for (int j = 0; j < OT; j++)
        for (int m = 0; m < M2; m++)
          if (a_q == 10'(i) && b_q == 10'(j) && c_q == 10'(m)) wr_req_data = mp2_out[i][j][m];
  end
  assign issue = rd_req_valid && rd_req_ready;

  // ---------------- response steering ----------------
  assign rsp_kind      = rd_rsp_tag[31:30];
  assign l1_kw_en      = rd_rsp_valid && rsp_kind == K_W1;
  assign l1_kw_col     = M1W'(rd_rsp_tag[29:20]);
  assign l1_kw_idx     = I1W'(rd_rsp_tag[19:10]);
  assign l1_kw_data    = rd_rsp_data;
  assign l2_kw_en      = rd_rsp_valid && rsp_kind == K_W2;
  assign l2_kw_col     = M2W'(rd_rsp_tag[29:20]);
  assign l2_kw_idx     = I2W'(rd_rsp_tag[19:10]);
  assign l2_kw_data    = rd_rsp_data;
  assign l1_in_wr_en   = rd_rsp_valid && rsp_kind == K_PIX;
  assign l1_in_wr_row  = H1W'(rd_rsp_tag[29:20]);
  assign l1_in_wr_col  = H1W'(rd_rsp_tag[19:10]);
  assign l1_in_wr_ch   = C1W'(rd_rsp_tag[9:0]);
  assign l1_in_wr_data = rd_rsp_data;

  assign l1_start = (state_q == S_START1);
  assign l2_start = (state_q == S_START2);
  assign done     = (state_q == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      lvl_q      <= 1'b0;
      a_q        <= '0;
      b_q        <= '0;
      c_q        <= '0;
      rsp_cnt_q  <= '0;
      ar_q       <= '0;
      ac_q       <= '0;
      tiles_done <= '0;
    end else begin
      if (rd_rsp_valid) rsp_cnt_q <= rsp_cnt_q + 1'b1;
      unique case (state_q)
        S_IDLE: if (go) begin
          state_q    <= S_W_ISSUE;
          lvl_q      <= 1'b0;
          {a_q, b_q, c_q} <= '0;
          rsp_cnt_q  <= '0;
          ar_q       <= '0;
          ac_q       <= '0;
          tiles_done <= '0;
        end
        S_W_ISSUE: if (issue) begin
          // b: index within the filter, a: filter, lvl: level
          if (b_q == 10'((lvl_q ? C2 * KK2 : C1 * KK1) - 1)) begin
            b_q <= '0;
            if (a_q == 10'((lvl_q ? M2 : M1) - 1)) begin
              a_q <= '0;
              if (lvl_q) state_q <= S_W_WAIT;
              lvl_q <= 1'b1;
            end else a_q <= a_q + 1'b1;
          end else b_q <= b_q + 1'b1;
        end
        S_W_WAIT: if (rsp_cnt_q == 16'(NW)) begin
          state_q   <= S_T_ISSUE;
          rsp_cnt_q <= '0;
          {a_q, b_q, c_q} <= '0;
        end
        S_T_ISSUE: if (issue) begin
          // c: channel, b: column, a: row of the level-1 tile
          if (c_q == 10'(C1 - 1)) begin
            c_q <= '0;
            if (b_q == 10'(H1 - 1)) begin
              b_q <= '0;
              if (a_q == 10'(H1 - 1)) begin
                a_q     <= '0;
                state_q <= S_T_WAIT;
              end else a_q <= a_q + 1'b1;
            end else b_q <= b_q + 1'b1;
          end else c_q <= c_q + 1'b1;
        end
        S_T_WAIT: if (rsp_cnt_q == 16'(NT)) begin
          state_q <= S_START1;
        end
        S_START1: state_q <= S_WAIT1;
        S_WAIT1:  if (mp1_valid) state_q <= S_START2;
        S_START2: state_q <= S_WAIT2;
        S_WAIT2:  if (mp2_valid) begin
          state_q <= S_WB;
          {a_q, b_q, c_q} <= '0;
        end
        S_WB: if (wr_req_ready) begin
          // c: output map, b: column, a: row of the output tile
          if (c_q == 10'(M2 - 1)) begin
            c_q <= '0;
            if (b_q == 10'(OT - 1)) begin
              b_q <= '0;
              if (a_q == 10'(OT - 1)) begin
                a_q     <= '0;
                state_q <= S_NEXT;
              end else a_q <= a_q + 1'b1;
            end else b_q <= b_q + 1'b1;
          end else c_q <= c_q + 1'b1;
        end
        S_NEXT: begin
          tiles_done <= tiles_done + 1'b1;
          rsp_cnt_q  <= '0;
          if (ac_q == 10'(ALPHA - 1)) begin
            ac_q <= '0;
            if (ar_q == 10'(ALPHA - 1)) begin
              ar_q    <= '0;
              state_q <= S_DONE;
            end else begin
              ar_q    <= ar_q + 1'b1;
              state_q <= S_T_ISSUE;
            end
          end else begin
            ac_q    <= ac_q + 1'b1;
            state_q <= S_T_ISSUE;
          end
        end
        S_DONE: if (go) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
