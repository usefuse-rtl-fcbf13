// dram_interface: the accelerator's single port to off-chip memory.
//
// Accepts read requests (address + tag) and write requests (address + data)
// from the central control unit and issues them, one per cycle, on a
// valid/ready memory request channel. Memory answers reads in order on a
// response channel that has no back-pressure; the interface keeps the tags of
// the reads in flight in a FIFO of DEPTH entries and returns each response
// with the tag of its request, so the control unit can steer the word to the
// right input-buffer or kernel-buffer location. Writes take priority over
// reads. The paper only names this block; the request/response protocol,
// the in-order tag FIFO and the write priority are this design's choices.
//
// Timing: a request is accepted in a cycle where its valid and ready are both
// high; rd_rsp_* is combinational from mem_rsp_*. At most DEPTH reads are in
// flight.
module dram_interface #(
  parameter int unsigned AW    = 16,
  parameter int unsigned DW    = 8,
  parameter int unsigned TW    = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // control side
  input  logic          rd_req_valid,
  output logic          rd_req_ready,
  input  logic [AW-1:0] rd_req_addr,
  input  logic [TW-1:0] rd_req_tag,
  output logic          rd_rsp_valid,
  output logic [DW-1:0] rd_rsp_data,
  output logic [TW-1:0] rd_rsp_tag,
  input  logic          wr_req_valid,
  output logic          wr_req_ready,
  input  logic [AW-1:0] wr_req_addr,
  input  logic [DW-1:0] wr_req_data,
  output logic          idle,
  // memory side
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic          mem_req_we,
  output logic [AW-1:0] mem_req_addr,
  output logic [DW-1:0] mem_req_wdata,
  input  logic          mem_rsp_valid,
  input  logic [DW-1:0] mem_rsp_data
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [TW-1:0] tag_q [DEPTH];
  logic [PW-1:0] wp_q, rp_q;
  logic [PW:0]   cnt_q;
  logic          push, pop, full;

  assign full          = (cnt_q == (PW+1)'(DEPTH));
  assign wr_req_ready  = mem_req_ready;
  assign rd_req_ready  = mem_req_ready && !wr_req_valid && !full;
  assign mem_req_valid = wr_req_valid || (rd_req_valid && !full);
  assign mem_req_we    = wr_req_valid;
  assign mem_req_addr  = wr_req_valid ? wr_req_addr : rd_req_addr;
  assign mem_req_wdata = wr_req_data;

  assign push         = rd_req_valid && rd_req_ready;
  assign pop          = mem_rsp_valid;
  assign rd_rsp_valid = mem_rsp_valid;
  assign rd_rsp_data  = mem_rsp_data;
  assign rd_rsp_tag   = tag_q[rp_q];
  assign idle         = (cnt_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) tag_q[i] <= '0;
    end else begin
      if (push) begin
        tag_q[wp_q] <= rd_req_tag;
        wp_q        <= (wp_q == PW'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
      end
      if (pop) rp_q <= (rp_q == PW'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  // A response must belong to an outstanding read.
  a_rsp_has_req: assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> cnt_q != '0)
    else $error("dram_interface: read response with no read in flight");

endmodule
