// activation_buffer: on-chip store of a pyramid level's output tile.
//
// Captures the R x R x M results of the PPU array (the per-column output
// buffers taken together) when the level finishes, and holds them for the
// pooling stage and the next level. Each PPU delivers the ReLU'd sum of
// products as a DW-bit non-negative integer in units of 2^-N_BITS; before
// storing, the buffer re-quantises it to an N_BITS-bit unsigned activation:
// value >> RQ_SHIFT, saturated to 2^N_BITS - 1. The paper does not give the
// activation format between layers; this re-quantisation (default shift 0,
// i.e. the result saturated to the [0, 1) range of the next layer's input)
// is this design's choice.
//
// Timing: `wr_en` stores all results at the next edge; `dout` then holds
// them until the next write.
module activation_buffer #(
  parameter int unsigned N_BITS   = 8,
  parameter int unsigned DW       = 12,
  parameter int unsigned R        = 2,
  parameter int unsigned M        = 2,
  parameter int unsigned RQ_SHIFT = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [DW-1:0]     din  [R*R][M],
  output logic [N_BITS-1:0] dout [R][R][M]
);

  localparam logic [DW-1:0] SAT = DW'((1 << N_BITS) - 1);

  logic [N_BITS-1:0] mem_q [R][R][M];
  logic [N_BITS-1:0] rq    [R][R][M];
  logic [DW-1:0]     shifted;

  always_comb begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < R; c++)
        for (int m = 0; m < M; m++) begin
          shifted     = din[r*R+c][m] >> RQ_SHIFT;
          rq[r][c][m] = (shifted > SAT) ? SAT[N_BITS-1:0] : shifted[N_BITS-1:0];
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < R; r++)
        for (int c = 0; c < R; c++)
          for (int m = 0; m < M; m++)
            mem_q[r][c][m] <= '0;
    end else if (wr_en) begin
      mem_q <= rq;
    end
  end

  assign dout = mem_q;

endmodule
