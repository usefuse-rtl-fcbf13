// wpu_s: spatial window processing unit (one K x K window of one channel).
//
// K*K serial-parallel online multipliers work side by side, one per window
// position, each taking its activation digit stream and its weight; an online
// adder tree sums the K*K products. The output stream carries
// SUM(x_i * w_i) / 2^ceil(log2(K*K)) MSDF. This is the structure of the
// paper's WPU-S (OLM-1 .. OLM-K*K feeding a tree of online adders).
//
// Timing: `start` marks the cycle of every activation's first digit; the
// first output digit follows 2 + 2*ceil(log2(K*K)) cycles later, marked by
// `start_o`. `en` low freezes every unit inside.
module wpu_s
  import usefuse_pkg::*;
#(
  parameter int unsigned N_BITS = 8,
  parameter int unsigned K      = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     start,
  input  sd_digit_t                x [K*K],
  input  logic signed [N_BITS-1:0] w [K*K],
  output sd_digit_t                z,
  output logic                     start_o
);

  sd_digit_t prod [K*K];
  logic      prod_start [K*K];

  for (genvar i = 0; i < K*K; i++) begin : g_olm
    olm #(.N_BITS(N_BITS)) u_olm (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (en),
      .start  (start),
      .x      (x[i]),
      .y      (w[i]),
      .z      (prod[i]),
      .start_o(prod_start[i])
    );
  end

  ola_tree #(.NUM(K*K)) u_tree (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (en),
    .start  (prod_start[0]),
    .x      (prod),
    .z      (z),
    .start_o(start_o)
  );

endmodule
