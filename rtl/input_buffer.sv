// input_buffer: input-tile storage of one pyramid level, with the window
// broadcast to the PPU rows.
//
// Holds one H x H x NCH input tile of N_BITS-bit unsigned activations. For
// each of the P = R*R output positions of the tile (one PPU row each) it
// presents the K x K x NCH convolution window that row needs: as parallel
// values on `win_val` (used by the temporal DS-2 PPU) and as the current most
// significant bit of every value on `win_dig` (the MSDF digit stream of the
// spatial DS-1 PPU). Pulsing `shift` moves every stored value one bit to the
// left, so N_BITS consecutive shifts stream all digits MSB first and zero
// digits afterwards. Window element order is ch*K*K + ki*K + kj; output
// position p = r*R + c uses tile rows r*S .. r*S+K-1 and columns
// c*S .. c*S+K-1. Activations are non-negative, so each digit is simply the
// bit (z- = 0).
//
// The tile is written element by element from the DRAM interface
// (`wr_en`, first level) or as a whole from the previous level's pooling
// output (`load_all`). A write takes effect at the next clock edge. One
// register array per tile, shared by all rows, is this design's choice; the
// paper draws one input buffer per PPU row.
module input_buffer
  import usefuse_pkg::*;
#(
  parameter int unsigned N_BITS = 8,
  parameter int unsigned H      = 6,
  parameter int unsigned NCH    = 2,
  parameter int unsigned K      = 3,
  parameter int unsigned S      = 1,
  localparam int unsigned R     = (H - K) / S + 1,
  localparam int unsigned P     = R * R,
  localparam int unsigned KK    = K * K,
  localparam int unsigned HW    = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned CW    = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [HW-1:0]     wr_row,
  input  logic [HW-1:0]     wr_col,
  input  logic [CW-1:0]     wr_ch,
  input  logic [N_BITS-1:0] wr_data,
  input  logic              load_all,
  input  logic [N_BITS-1:0] tile_in [H][H][NCH],
  input  logic              shift,
  output sd_digit_t         win_dig [P][NCH][KK],
  output logic [N_BITS-1:0] win_val [P][NCH][KK]
);

  logic [N_BITS-1:0] tile_q [H][H][NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < H; i++)
        for (int j = 0; j < H; j++)
          for (int c = 0; c < NCH; c++)
            tile_q[i][j][c] <= '0;
    end else if (load_all) begin
      tile_q <= tile_in;
    end else if (shift) begin
      for (int i = 0; i < H; i++)
        for (int j = 0; j < H; j++)
          for (int c = 0; c < NCH; c++)
            tile_q[i][j][c] <= tile_q[i][j][c] << 1;
    end else if (wr_en) begin
      tile_q[wr_row][wr_col][wr_ch] <= wr_data;
    end
  end

  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < R; c++) begin : g_c
      for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
        for (genvar ki = 0; ki < K; ki++) begin : g_ki
          for (genvar kj = 0; kj < K; kj++) begin : g_kj
            assign win_val[r*R+c][ch][ki*K+kj]   = tile_q[r*S+ki][c*S+kj][ch];
            assign win_dig[r*R+c][ch][ki*K+kj].p = tile_q[r*S+ki][c*S+kj][ch][N_BITS-1];
            assign win_dig[r*R+c][ch][ki*K+kj].n = 1'b0;
          end
        end
      end
    end
  end

endmodule
