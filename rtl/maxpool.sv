// maxpool: POOL x POOL max pooling of an R x R x M activation tile.
//
// Two pipeline stages: the first takes the maximum along each row of every
// pooling window, the second the maximum of those row results, so the pooled
// R/POOL x R/POOL x M tile appears two cycles after `in_valid` (the MP = 2
// cycles of the latency formula for the LeNet-5 configuration). Values are
// unsigned (post-ReLU) activations. Rows/columns beyond POOL*(R/POOL) are
// dropped. The paper names the block only; the two-stage comparator is this
// design's choice.
module maxpool #(
  parameter int unsigned N_BITS = 8,
  parameter int unsigned R      = 4,
  parameter int unsigned M      = 2,
  parameter int unsigned POOL   = 2,
  localparam int unsigned RO    = R / POOL
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N_BITS-1:0] din  [R][R][M],
  output logic              out_valid,
  output logic [N_BITS-1:0] dout [RO][RO][M]
);

  // row_max_q[or][oc][j][m]: max over the POOL values of window row j
  logic [N_BITS-1:0] row_max_d [RO][RO][POOL][M];
  logic [N_BITS-1:0] row_max_q [RO][RO][POOL][M];
  logic [N_BITS-1:0] pool_d    [RO][RO][M];
  logic              v1_q;

  always_comb begin
    for (int orow = 0; orow < RO; orow++)
      for (int oc = 0; oc < RO; oc++)
        for (int m = 0; m < M; m++) begin
          for (int j = 0; j < POOL; j++) begin
            row_max_d[orow][oc][j][m] = din[orow*POOL+j][oc*POOL][m];
            for (int i = 1; i < POOL; i++)
              if (din[orow*POOL+j][oc*POOL+i][m] > row_max_d[orow][oc][j][m])
                row_max_d[orow][oc][j][m] = din[orow*POOL+j][oc*POOL+i][m];
          end
          pool_d[orow][oc][m] = row_max_q[orow][oc][0][m];
          for (int j = 1; j < POOL; j++)
            if (row_max_q[orow][oc][j][m] > pool_d[orow][oc][m])
              pool_d[orow][oc][m] = row_max_q[orow][oc][j][m];
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
      for (int orow = 0; orow < RO; orow++)
        for (int oc = 0; oc < RO; oc++)
          for (int m = 0; m < M; m++) begin
            dout[orow][oc][m] <= '0;
            for (int j = 0; j < POOL; j++) row_max_q[orow][oc][j][m] <= '0;
          end
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
      if (in_valid) row_max_q <= row_max_d;
      if (v1_q)     dout      <= pool_d;
    end
  end

endmodule
