// olm: radix-2 serial-parallel online multiplier (online delay 2).
//
// Computes Z = X * Y where X arrives serially, most significant digit first,
// as radix-2 signed digits x_1, x_2, ... (one per cycle) and Y is an N_BITS
// two's-complement fraction held in parallel (the weight). It follows the
// paper's serial-parallel recurrence:
//     v[j]   = 2 w[j] + x_{j+3} * Y * 2^-2
//     z_{j+1} = SELM(v_hat[j]),   w[j+1] = v[j] - z_{j+1}
// after two initialisation steps that only collect input (w <- v). SELM looks
// at v truncated to one integer bit (plus sign) and two fractional bits:
// z = +1 if v_hat >= 1/2, z = -1 if v_hat < -1/2, else 0, which keeps
// |w| <= 1/2. After n output digits |X*Y - Z| <= 2^-(n+1).
//
// Interface and timing: `start` marks the cycle that carries x_1 and clears
// the residual; `en` low freezes the unit (used for early termination).
// The output digit z is combinational: z_1 appears in the cycle that carries
// x_3, i.e. two cycles after `start`; `start_o` marks that cycle. Exactly
// N_BITS digits are produced (as in the paper's algorithm); afterwards z is
// held at zero until the next `start`, so the leftover residual never leaks
// into a following adder. Inputs past the operand's last digit must be
// driven as zero digits.
// Residual width (N_BITS + 3 bits, N_BITS + 1 of them fractional) is this
// design's choice; the selection rule and delay follow the paper.
module olm
  import usefuse_pkg::*;
#(
  parameter int unsigned N_BITS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     start,
  input  sd_digit_t                x,
  input  logic signed [N_BITS-1:0] y,
  output sd_digit_t                z,
  output logic                     start_o
);

  localparam int unsigned F  = N_BITS + 1;  // fractional bits of the residual
  localparam int unsigned WW = F + 2;       // plus sign and one integer bit

  logic signed [WW-1:0] w_q, w_base, v, term, w_next;
  logic signed [3:0]    v_hat;               // v in units of 1/4
  localparam int unsigned LAST = DELTA_OLM + N_BITS;   // step after the last digit
  localparam int unsigned SW   = $clog2(LAST + 1);

  logic [SW-1:0]        step_q, step;        // cycles since start (saturating)
  logic                 out_step;
  logic [DELTA_OLM-1:0] start_pipe;
  logic                 init_step;

  // Y * 2^-2 in units of 2^-F has the same integer code as Y in units of 2^-(N_BITS-1).
  always_comb begin
    w_base    = start ? '0 : w_q;
    step      = start ? '0 : step_q;
    init_step = step < SW'(DELTA_OLM);
    out_step  = !init_step && (step < SW'(LAST));
    unique case ({x.p, x.n})
      2'b10:   term = WW'(y);
      2'b01:   term = -WW'(y);
      default: term = '0;
    endcase
    v     = (w_base <<< 1) + term;
    v_hat = 4'(v >>> (F - 2));
    z     = SD_ZERO;
    if (out_step) begin
      if (v_hat >= 4'sd2)       z = SD_POS;
      else if (v_hat <= -4'sd3) z = SD_NEG;
    end
    w_next = v;
    if (z.p) w_next = v - (WW'(1) <<< F);
    if (z.n) w_next = v + (WW'(1) <<< F);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q        <= '0;
      step_q     <= SW'(LAST);
      start_pipe <= '0;
    end else if (en) begin
      w_q        <= w_next;
      start_pipe <= {start_pipe[DELTA_OLM-2:0], start};
      if (step < SW'(LAST)) step_q <= step + SW'(1);
      else                  step_q <= SW'(LAST);
    end
  end

  assign start_o = start_pipe[DELTA_OLM-1];

endmodule
