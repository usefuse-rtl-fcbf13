// ppu: pixel processing unit - one output pixel of one output feature map.
//
// NCH window processing units (one per input channel) each reduce a K x K
// window; an online adder tree sums their streams across the channels; the
// early negative detection unit (END-U) watches the resulting MSDF stream.
// The stream carries SUM / 2^S with S = ceil(log2(K*K)) + ceil(log2(NCH))
// and has D = N_BITS + S digits, so END-U's `value` is the exact sum of the
// NCH*K*K online products in units of 2^-N_BITS (zero when negative).
// When END-U flags a negative result, every multiplier and adder of the PPU
// is frozen for the rest of the run (the paper's termination of the
// ineffectual convolution); the result is then the ReLU output zero.
//
// TEMPORAL = 0 builds the paper's DS-1 PPU with spatial WPU-S units fed by
// digit streams `x_dig`; TEMPORAL = 1 builds the DS-2 variant with temporal
// WPU-T units fed by the parallel activations `x_val`. The unused input set
// is ignored.
//
// Timing: `start` marks the first activation digit (DS-1) or the start of
// the window (DS-2). `valid` rises when the result is final; with DS-1 this is
// ppu_latency(N_BITS, K*K, NCH) cycles after `start`. `active` is high in the
// cycles in which the PPU really computes (for effective-cycle statistics).
module ppu
  import usefuse_pkg::*;
#(
  parameter int unsigned N_BITS   = 8,
  parameter int unsigned K        = 3,
  parameter int unsigned NCH      = 2,
  parameter bit          TEMPORAL = 1'b0,
  localparam int unsigned KK      = K * K,
  localparam int unsigned D       = N_BITS + clog2u(KK) + clog2u(NCH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  sd_digit_t                x_dig [NCH][KK],
  input  logic        [N_BITS-1:0] x_val [NCH][KK],
  input  logic signed [N_BITS-1:0] w     [NCH][KK],
  output logic                     valid,
  output logic                     terminated,
  output logic                     active,
  output logic [D-1:0]             value
);

  sd_digit_t ch_z [NCH];
  logic      ch_start [NCH];
  logic      ch_busy [NCH];
  sd_digit_t sum_z;
  logic      sum_start, en, running_q;

  // Freeze everything once END-U has seen a negative prefix.
  assign en = start || !terminated;

  for (genvar c = 0; c < NCH; c++) begin : g_wpu
    if (TEMPORAL) begin : g_t
      wpu_t #(.N_BITS(N_BITS), .K(K)) u_wpu (
        .clk    (clk),
        .rst_n  (rst_n),
        .en     (en),
        .start  (start),
        .x      (x_val[c]),
        .w      (w[c]),
        .z      (ch_z[c]),
        .start_o(ch_start[c]),
        .busy   (ch_busy[c])
      );
    end else begin : g_s
      wpu_s #(.N_BITS(N_BITS), .K(K)) u_wpu (
        .clk    (clk),
        .rst_n  (rst_n),
        .en     (en),
        .start  (start),
        .x      (x_dig[c]),
        .w      (w[c]),
        .z      (ch_z[c]),
        .start_o(ch_start[c])
      );
      assign ch_busy[c] = 1'b0;
    end
  end

  ola_tree #(.NUM(NCH)) u_ch_tree (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (en),
    .start  (ch_start[0]),
    .x      (ch_z),
    .z      (sum_z),
    .start_o(sum_start)
  );

  end_u #(.D(D)) u_endu (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (start),
    .start    (sum_start),
    .d        (sum_z),
    .terminate(terminated),
    .valid    (valid),
    .value    (value)
  );

  // Busy from `start` until END-U has a result (early or complete).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     running_q <= 1'b0;
    else if (start) running_q <= 1'b1;
    else if (valid) running_q <= 1'b0;
  end
  assign active = start || (running_q && !valid);

endmodule
