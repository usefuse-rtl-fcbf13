// end_u: early negative detection unit.
//
// Watches the MSDF result stream of a sum of products. Each cycle it appends
// the digit's z+ bit to one register and its z- bit to another and compares
// the two registers as unsigned numbers. As soon as z+ < z- the prefix seen so
// far is negative, and since the digits still to come can add less than one
// unit of the last position the whole result is negative: the unit raises
// `terminate` (sticky until the next `start`) so the PPU can stop computing,
// and the ReLU output is zero. Otherwise, after D digits, the result
// z+ - z- (a D-bit non-negative integer in units of the last digit) is
// delivered. Detection follows the paper's algorithm; the conversion of the
// surviving result to binary and the zero output after termination are this
// design's way of presenting the ReLU result.
//
// Timing: `clear` (the start of a new PPU run) drops `terminate` and `valid`.
// `start` marks the cycle carrying the first digit. `valid` rises the
// cycle after the D-th digit (or the cycle after detection) and stays high
// until the next `start`; `value` is then final.
module end_u
  import usefuse_pkg::*;
#(
  parameter int unsigned D = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          start,
  input  sd_digit_t     d,
  output logic          terminate,
  output logic          valid,
  output logic [D-1:0]  value
);

  logic [D-1:0]         zp_q, zn_q, zp_new, zn_new;
  logic [$clog2(D+1):0] cnt_q, cnt_cur;
  logic                 active_q, active, neg_now;

  always_comb begin
    active  = start || active_q;
    cnt_cur = start ? '0 : cnt_q;
    zp_new  = start ? D'(d.p) : {zp_q[D-2:0], d.p};
    zn_new  = start ? D'(d.n) : {zn_q[D-2:0], d.n};
    neg_now = active && (zp_new < zn_new);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zp_q      <= '0;
      zn_q      <= '0;
      cnt_q     <= '0;
      active_q  <= 1'b0;
      terminate <= 1'b0;
      valid     <= 1'b0;
    end else begin
      if (start || clear) begin
        terminate <= 1'b0;
        valid     <= 1'b0;
        active_q  <= 1'b0;
      end
      if (active) begin
        zp_q  <= zp_new;
        zn_q  <= zn_new;
        cnt_q <= cnt_cur + 1'b1;
        if (neg_now) begin
          terminate <= 1'b1;
          valid     <= 1'b1;
          active_q  <= 1'b0;
        end else if (cnt_cur == ($clog2(D+1)+1)'(D - 1)) begin
          valid    <= 1'b1;
          active_q <= 1'b0;
        end else begin
          active_q <= 1'b1;
        end
      end
    end
  end

  assign value = terminate ? '0 : (zp_q - zn_q);

endmodule
