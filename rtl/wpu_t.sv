// wpu_t: temporal window processing unit (one K x K window of one channel,
// one multiplier).
//
// The K*K products of a window are formed one after another by a single
// serial-parallel online multiplier (OLM). For product k the activation
// x[k] is fed to the OLM one bit per cycle, most significant first, with the
// weight w[k] in parallel. The activation register collects the OLM's N_BITS
// output digits; when the last digit is in, the product (z+ - z-) is passed
// through a multiplexer to the adder in front of the accumulation register.
// The multiplexer's other input is zero and is selected in every cycle in
// which no finished product is waiting, so the register holds its sum. After
// K*K products the accumulated sum is sent on to the channel adder tree MSDF:
// it is emitted as N_BITS + ceil(log2(K*K)) signed digits (sign-magnitude
// recoding, digit = +/-bit) of SUM / 2^ceil(log2(K*K)), the same scaling
// and length as the spatial WPU-S output, so either unit can sit in a PPU.
// Structure (OLM, activation register, mux with 0, adder, accumulation
// register) follows the paper; the recoding for the MSDF hand-off, the
// clearing of the accumulator at the start of a window and the one-cycle
// accumulate are this design's choices.
//
// Timing: `start` begins a window (x and w must stay stable until `busy`
// falls).
// Each product takes N_BITS + 2 cycles (online delay 2 plus N_BITS digits),
// the accumulate overlaps the next product. `start_o` marks the first output
// digit on `z`, K*K*(N_BITS+2) + 3 cycles after `start` (one cycle to leave
// idle, the last accumulate and the output register); the stream lasts
// N_BITS + ceil(log2(K*K)) cycles. `en` low freezes the unit.
module wpu_t
  import usefuse_pkg::*;
#(
  parameter int unsigned N_BITS = 8,
  parameter int unsigned K      = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     start,
  input  logic        [N_BITS-1:0] x [K*K],
  input  logic signed [N_BITS-1:0] w [K*K],
  output sd_digit_t                z,
  output logic                     start_o,
  output logic                     busy
);

  localparam int unsigned KK    = K * K;
  localparam int unsigned S     = clog2u(KK);
  localparam int unsigned DOUT  = N_BITS + S;
  localparam int unsigned PER   = N_BITS + DELTA_OLM;   // cycles per product
  localparam int unsigned AW    = N_BITS + S + 1;       // accumulator width
  localparam int unsigned KW    = $clog2(KK + 1);
  localparam int unsigned TW    = $clog2(PER + DOUT + 1);

  typedef enum logic [1:0] {IDLE, MUL, LAST_ACC, EMIT} state_t;

  state_t                state_q;
  logic [KW-1:0]         k_q;
  logic [TW-1:0]         t_q;
  logic [N_BITS-1:0]     act_p_q, act_n_q;        // activation register
  logic [N_BITS-1:0]     act_p_new, act_n_new;
  logic                  prod_rdy_q;
  logic signed [AW-1:0]  prod_q, acc_q, mux_out;
  logic [AW-2:0]         mag_q;
  logic                  sign_q;
  sd_digit_t             x_dig, olm_z;
  logic                  olm_start, olm_start_o;
  logic [N_BITS-1:0]     x_cur;

  assign x_cur     = x[k_q < KW'(KK) ? k_q : '0];
  assign olm_start = (state_q == MUL) && (t_q == '0);
  always_comb begin
    x_dig = SD_ZERO;
    if (state_q == MUL && t_q < TW'(N_BITS)) x_dig.p = x_cur[N_BITS-1-int'(t_q)];
  end

  olm #(.N_BITS(N_BITS)) u_olm (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (en),
    .start  (olm_start),
    .x      (x_dig),
    .y      (w[k_q < KW'(KK) ? k_q : '0]),
    .z      (olm_z),
    .start_o(olm_start_o)
  );

  assign act_p_new = {act_p_q[N_BITS-2:0], olm_z.p};
  assign act_n_new = {act_n_q[N_BITS-2:0], olm_z.n};
  // The multiplexer in front of the accumulator adder: product or zero.
  assign mux_out   = prod_rdy_q ? prod_q : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= IDLE;
      k_q        <= '0;
      t_q        <= '0;
      act_p_q    <= '0;
      act_n_q    <= '0;
      prod_rdy_q <= 1'b0;
      prod_q     <= '0;
      acc_q      <= '0;
      mag_q      <= '0;
      sign_q     <= 1'b0;
      start_o    <= 1'b0;
      z          <= SD_ZERO;
    end else if (en) begin
      start_o    <= 1'b0;
      z          <= SD_ZERO;
      prod_rdy_q <= 1'b0;
      if (state_q != EMIT) acc_q <= acc_q + mux_out;
      unique case (state_q)
        IDLE: ;
        MUL: begin
          if (t_q >= TW'(DELTA_OLM)) begin
            act_p_q <= act_p_new;
            act_n_q <= act_n_new;
          end
          if (t_q == TW'(PER - 1)) begin
            prod_q     <= AW'(signed'({1'b0, act_p_new})) - AW'(signed'({1'b0, act_n_new}));
            prod_rdy_q <= 1'b1;
            t_q        <= '0;
            if (k_q == KW'(KK - 1)) state_q <= LAST_ACC;
            else                    k_q     <= k_q + 1'b1;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        LAST_ACC: begin
          // the last product is added this cycle; latch sign and magnitude
          sign_q  <= (acc_q + mux_out) < 0;
          mag_q   <= (acc_q + mux_out) < 0 ? (AW-1)'(-(acc_q + mux_out))
                                           : (AW-1)'(acc_q + mux_out);
          state_q <= EMIT;
          t_q     <= '0;
        end
        EMIT: begin
          start_o <= (t_q == '0);
          z.p     <= mag_q[DOUT-1] & ~sign_q;
          z.n     <= mag_q[DOUT-1] &  sign_q;
          mag_q   <= mag_q << 1;
          if (t_q == TW'(DOUT - 1)) state_q <= IDLE;
          t_q <= t_q + 1'b1;
        end
        default: state_q <= IDLE;
      endcase
      if (start) begin
        state_q <= MUL;
        k_q     <= '0;
        t_q     <= '0;
        acc_q   <= '0;
        act_p_q <= '0;
        act_n_q <= '0;
      end
    end
  end

  assign busy = (state_q != IDLE);

endmodule
