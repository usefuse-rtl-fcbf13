// ola_tree: binary tree of online adders reducing NUM signed-digit streams.
//
// The tree has S = ceil(log2(NUM)) stages; inputs are padded with zero streams
// up to 2^S so that every stage halves every operand by the same factor. The
// output stream therefore carries SUM(inputs) / 2^S exactly, with S more
// digits than the input streams (one extra digit per adder stage, as counted
// in the paper's latency formula). With NUM = 1 the tree is a wire.
//
// Timing: `start` marks the cycle of the inputs' first digit; the output's
// first digit appears 2*S cycles later, marked by `start_o`. All adders share
// `en`, so the whole tree can be frozen.
module ola_tree
  import usefuse_pkg::*;
#(
  parameter int unsigned NUM = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,
  input  logic      start,
  input  sd_digit_t x [NUM],
  output sd_digit_t z,
  output logic      start_o
);

  localparam int unsigned S    = clog2u(NUM);
  localparam int unsigned FULL = 1 << S;

  sd_digit_t leaf [FULL];

  for (genvar i = 0; i < FULL; i++) begin : g_in
    if (i < NUM) begin : g_real
      assign leaf[i] = x[i];
    end else begin : g_pad
      assign leaf[i] = SD_ZERO;
    end
  end

  if (S == 0) begin : g_wire
    assign z       = leaf[0];
    assign start_o = start;
  end else begin : g_tree
    for (genvar s = 0; s < S; s++) begin : g_stage
      localparam int unsigned WIDTH = FULL >> (s + 1);
      sd_digit_t a_in [2*WIDTH];
      sd_digit_t zs   [WIDTH];
      logic      st_in;
      logic      st_o [WIDTH];
      if (s == 0) begin : g_first
        assign a_in  = leaf;
        assign st_in = start;
      end else begin : g_next
        assign a_in  = g_stage[s-1].zs;
        assign st_in = g_stage[s-1].st_o[0];
      end
      for (genvar i = 0; i < WIDTH; i++) begin : g_add
        ola u_ola (
          .clk    (clk),
          .rst_n  (rst_n),
          .en     (en),
          .start  (st_in),
          .a      (a_in[2*i]),
          .b      (a_in[2*i+1]),
          .z      (zs[i]),
          .start_o(st_o[i])
        );
      end
    end
    assign z       = g_stage[S-1].zs[0];
    assign start_o = g_stage[S-1].st_o[0];
  end

endmodule
