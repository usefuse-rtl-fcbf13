// ola: radix-2 online adder of two signed-digit streams (online delay 2).
//
// Computes Z = (A + B) / 2 digit by digit, most significant first. The halving
// keeps the result a fraction; in digit terms it is the extra leading digit
// that an adder stage adds to the stream, so a stream of m digits in gives an
// exact result of m + 1 digits out. The unit uses the same residual recurrence
// as the multiplier, with the input term (a_j + b_j) * 2^-3:
//     v = 2 w + (a + b) * 2^-3,  z = SELM(v_hat),  w <- v - z
// (two initialisation steps first, same selection constants as the
// multiplier). The paper only says its adder follows the standard online
// adder; this residual form with delay 2 is this design's own choice of
// insides and gives the same digit timing as the paper's latency formula.
//
// Timing: `start` marks the cycle carrying a_1/b_1 and clears the residual;
// z_1 is produced (combinationally) two cycles later, marked by `start_o`.
// `en` low freezes the unit.
module ola
  import usefuse_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,
  input  logic      start,
  input  sd_digit_t a,
  input  sd_digit_t b,
  output sd_digit_t z,
  output logic      start_o
);

  logic signed [4:0]    w_q, w_base, v, w_next;   // 3 fractional bits
  logic signed [2:0]    term;
  logic signed [3:0]    v_hat;
  logic [1:0]           init_q;
  logic [DELTA_OLA-1:0] start_pipe;
  logic                 init_step;

  always_comb begin
    w_base    = start ? '0 : w_q;
    init_step = start || (init_q != 2'd0);
    term      = 3'(int'(a.p) - int'(a.n) + int'(b.p) - int'(b.n));
    v         = (w_base <<< 1) + 5'(term);
    v_hat     = 4'(v >>> 1);
    z         = SD_ZERO;
    if (!init_step) begin
      if (v_hat >= 4'sd2)       z = SD_POS;
      else if (v_hat <= -4'sd3) z = SD_NEG;
    end
    w_next = v;
    if (z.p) w_next = v - 5'sd8;
    if (z.n) w_next = v + 5'sd8;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q        <= '0;
      init_q     <= 2'd0;
      start_pipe <= '0;
    end else if (en) begin
      w_q        <= w_next;
      start_pipe <= {start_pipe[DELTA_OLA-2:0], start};
      if (start)               init_q <= 2'(DELTA_OLA - 1);
      else if (init_q != 2'd0) init_q <= init_q - 2'd1;
    end
  end

  assign start_o = start_pipe[DELTA_OLA-1];

endmodule
