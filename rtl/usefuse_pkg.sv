// usefuse_pkg: types, constants and elaboration-time helpers shared by the
// fused-layer online-arithmetic accelerator.
//
// Digits travel between arithmetic units most significant digit first (MSDF)
// in the radix-2 signed-digit set {-1, 0, 1}. A digit is carried as a pair of
// bits (p, n) whose value is p - n, the "z+ / z-" borrow-save form. Both units
// (the serial-parallel online multiplier and the online adder) have an online
// delay of 2, as stated for the multiplier; the adder's delay of 2 is this
// design's choice (the classic radix-2 online adder value).
//
// The helper functions compute the fusion-pyramid geometry at elaboration
// time: the tile size of a layer from the tile size of the layer after it
// (D_l = (D_o - 1) * S_l + K_l) and the number of tile movements a tile of
// size H with tile stride ST makes across a feature map of size IFM.
package usefuse_pkg;

  // One radix-2 signed digit: value = p - n.
  typedef struct packed {
    logic p;
    logic n;
  } sd_digit_t;

  localparam sd_digit_t SD_ZERO = '{p: 1'b0, n: 1'b0};
  localparam sd_digit_t SD_POS  = '{p: 1'b1, n: 1'b0};
  localparam sd_digit_t SD_NEG  = '{p: 1'b0, n: 1'b1};

  // Online delays of the serial-parallel multiplier and of the adder.
  localparam int unsigned DELTA_OLM = 2;
  localparam int unsigned DELTA_OLA = 2;

  // Ceiling of log2, with clog2u(1) = 0.
  function automatic int unsigned clog2u(input int unsigned v);
    int unsigned r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // Eq. (1): input tile dimension needed for an output region of size d_out.
  function automatic int unsigned tile_in_dim(input int unsigned d_out,
                                              input int unsigned k,
                                              input int unsigned s);
    return (d_out - 1) * s + k;
  endfunction

  // Number of tile movements along one axis: (IFM - H) / ST + 1.
  function automatic int unsigned tile_moves(input int unsigned ifm,
                                             input int unsigned h,
                                             input int unsigned st);
    return (ifm - h) / st + 1;
  endfunction

  // Cycles from the first input digit until a PPU result is stored: the
  // multiplier delay, one adder delay per tree stage, and the n + stages
  // digits of the widened result stream (per-level term of Eq. (3) plus n).
  function automatic int unsigned ppu_latency(input int unsigned n_bits,
                                              input int unsigned kk,
                                              input int unsigned nch);
    int unsigned s;
    s = clog2u(kk) + clog2u(nch);
    return DELTA_OLM + DELTA_OLA * s + n_bits + s;
  endfunction

endpackage
