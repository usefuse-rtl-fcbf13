// pyramid_level: accelerator of one convolution layer of the fusion pyramid.
//
// A P x M array of pixel processing units (P = R*R output positions of the
// level's tile, M output feature maps). The input buffer broadcasts each
// row's K x K x NCH window to the M PPUs of that row; each of the M kernel
// buffers broadcasts its filter to the P PPUs of its column; the activation
// buffer collects the results (the per-column output buffers). All PPUs
// start together and run in lockstep, so the level finishes when the last
// PPU has its result; PPUs whose END-U detects a negative sum stop early and
// contribute zero. This array organisation (rows = output positions,
// columns = output maps, input tiling over NCH channels inside the PPU)
// follows the paper; the level sequencer is this design's.
//
// Interface: the tile is written through `in_wr_*` (element-wise) or
// `in_load_all`/`in_tile` (whole tile); filters through `kw_*`
// (`kw_col` = output map, `kw_idx` = ch*K*K + ki*K + kj). `start` runs the
// level on the tile currently held. `done` pulses when `act_out` holds the
// new results. `neg_count` is the number of PPUs terminated early in the
// last run; `active_cycles` accumulates, over all runs, the PPU-cycles in
// which a PPU was really computing (the effective computation cycles).
//
// Timing (DS-1): `done` rises ppu_latency(N_BITS, K*K, NCH) + 1 cycles after
// `start` (the results are stored at the end of the cycle in which the last
// PPU is valid; `done` flags them in the next cycle, when `act_out` already
// holds them). If every PPU of the level terminates early the level is done
// early too.
module pyramid_level
  import usefuse_pkg::*;
#(
  parameter int unsigned N_BITS   = 8,
  parameter int unsigned H        = 6,
  parameter int unsigned NCH      = 2,
  parameter int unsigned M        = 2,
  parameter int unsigned K        = 3,
  parameter int unsigned S        = 1,
  parameter int unsigned RQ_SHIFT = 0,
  parameter bit          TEMPORAL = 1'b0,
  localparam int unsigned R       = (H - K) / S + 1,
  localparam int unsigned P       = R * R,
  localparam int unsigned KK      = K * K,
  localparam int unsigned D       = N_BITS + clog2u(KK) + clog2u(NCH),
  localparam int unsigned HW      = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned CW      = (NCH > 1) ? $clog2(NCH) : 1,
  localparam int unsigned MW      = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned IW      = $clog2(NCH * KK)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_wr_en,
  input  logic [HW-1:0]     in_wr_row,
  input  logic [HW-1:0]     in_wr_col,
  input  logic [CW-1:0]     in_wr_ch,
  input  logic [N_BITS-1:0] in_wr_data,
  input  logic              in_load_all,
  input  logic [N_BITS-1:0] in_tile [H][H][NCH],
  input  logic              kw_en,
  input  logic [MW-1:0]     kw_col,
  input  logic [IW-1:0]     kw_idx,
  input  logic [N_BITS-1:0] kw_data,
  input  logic              start,
  output logic              done,
  output logic [N_BITS-1:0] act_out [R][R][M],
  output logic [$clog2(P*M+1)-1:0] neg_count,
  output logic [31:0]       active_cycles
);

  sd_digit_t                win_dig [P][NCH][KK];
  logic        [N_BITS-1:0] win_val [P][NCH][KK];
  logic signed [N_BITS-1:0] kw      [M][NCH][KK];
  logic        [D-1:0]      res     [P][M];
  logic                     ppu_valid [P][M];
  logic                     ppu_term  [P][M];
  logic                     ppu_act   [P][M];
  logic                     busy_q, all_valid, shift;
  logic [$clog2(P*M+1)-1:0] neg_now, act_now;

  // Stream the activation bits out MSB first: digit t is presented in cycle t
  // after `start`; once all bits are out the buffer presents zero digits.
  assign shift = !TEMPORAL && (start || busy_q);

  input_buffer #(.N_BITS(N_BITS), .H(H), .NCH(NCH), .K(K), .S(S)) u_inbuf (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (in_wr_en),
    .wr_row  (in_wr_row),
    .wr_col  (in_wr_col),
    .wr_ch   (in_wr_ch),
    .wr_data (in_wr_data),
    .load_all(in_load_all),
    .tile_in (in_tile),
    .shift   (shift),
    .win_dig (win_dig),
    .win_val (win_val)
  );

  for (genvar m = 0; m < M; m++) begin : g_col
    kernel_buffer #(.N_BITS(N_BITS), .NCH(NCH), .KK(KK)) u_kbuf (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr_en  (kw_en && kw_col == MW'(m)),
      .wr_idx (kw_idx),
      .wr_data(kw_data),
      .w      (kw[m])
    );
    for (genvar p = 0; p < P; p++) begin : g_row
      ppu #(.N_BITS(N_BITS), .K(K), .NCH(NCH), .TEMPORAL(TEMPORAL)) u_ppu (
        .clk       (clk),
        .rst_n     (rst_n),
        .start     (start),
        .x_dig     (win_dig[p]),
        .x_val     (win_val[p]),
        .w         (kw[m]),
        .valid     (ppu_valid[p][m]),
        .terminated(ppu_term[p][m]),
        .active    (ppu_act[p][m]),
        .value     (res[p][m])
      );
    end
  end

  always_comb begin
    all_valid = 1'b1;
    neg_now   = '0;
    act_now   = '0;
    for (int p = 0; p < P; p++)
      for (int m = 0; m < M; m++) begin
        all_valid = all_valid & ppu_valid[p][m];
        neg_now   = neg_now + ($clog2(P*M+1))'(ppu_term[p][m]);
        act_now   = act_now + ($clog2(P*M+1))'(ppu_act[p][m]);
      end
  end

  activation_buffer #(.N_BITS(N_BITS), .DW(D), .R(R), .M(M), .RQ_SHIFT(RQ_SHIFT)) u_actbuf (
    .clk  (clk),
    .rst_n(rst_n),
    .wr_en(busy_q && !start && all_valid),
    .din  (res),
    .dout (act_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q        <= 1'b0;
      done          <= 1'b0;
      neg_count     <= '0;
      active_cycles <= '0;
    end else begin
      done          <= 1'b0;
      active_cycles <= active_cycles + 32'(act_now);
      if (start) begin
        busy_q <= 1'b1;
      end else if (busy_q) begin
        if (all_valid) begin
          busy_q    <= 1'b0;
          done      <= 1'b1;
          neg_count <= neg_now;
        end
      end
    end
  end

endmodule
