// kernel_buffer: storage of one filter (one output feature map) of a level.
//
// Holds the NCH x K x K weights of one output feature map as N_BITS-bit
// two's-complement fractions and drives all of them in parallel to every PPU
// of its array column. The weights are written once, before the first tile,
// one word per cycle (`wr_en`, `wr_idx` = ch*K*K + ki*K + kj); they stay for
// all tile movements. A write takes effect at the next clock edge; the buffer
// resets to zero. Register storage is this design's choice.
module kernel_buffer #(
  parameter int unsigned N_BITS = 8,
  parameter int unsigned NCH    = 2,
  parameter int unsigned KK     = 9,
  localparam int unsigned IW    = $clog2(NCH * KK)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [IW-1:0]            wr_idx,
  input  logic [N_BITS-1:0]        wr_data,
  output logic signed [N_BITS-1:0] w [NCH][KK]
);

  logic [N_BITS-1:0] mem_q [NCH*KK];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCH*KK; i++) mem_q[i] <= '0;
    end else if (wr_en && wr_idx < IW'(NCH*KK)) begin
      mem_q[wr_idx] <= wr_data;
    end
  end

  always_comb begin
    for (int c = 0; c < NCH; c++)
      for (int i = 0; i < KK; i++)
        w[c][i] = signed'(mem_q[c*KK + i]);
  end

endmodule
