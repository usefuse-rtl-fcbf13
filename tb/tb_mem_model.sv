// tb_mem_model: behavioural off-chip memory used by the testbenches.
//
// A word-addressed array of 2^AW words of DW bits behind a valid/ready
// request channel (write when `req_we`) and an in-order read response
// channel without back-pressure. `req_ready` is low in a random READY_PCT
// share of cycles to model a busy memory, and each read answers after a
// random latency of 1..MAX_LAT cycles (never overtaking an earlier read).
// The read value is taken when the request is accepted. `stalls` counts the
// cycles in which a request waited for `req_ready`. Tests preload and
// inspect the contents through the `mem` array.
`timescale 1ns/1ps
module tb_mem_model #(
  parameter int AW        = 16,
  parameter int DW        = 8,
  parameter int BUSY_PCT  = 20,
  parameter int MAX_LAT   = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [DW-1:0] req_wdata,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_data
);

  logic [DW-1:0] mem [2**AW];
  logic [DW-1:0] q_data [$];
  longint        q_due [$];
  longint        cyc = 0;
  longint        last_due = 0;
  int            stalls = 0, reads = 0, writes = 0;

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      q_data.delete();
      q_due.delete();
      rsp_valid <= 1'b0;
      req_ready <= 1'b1;
    end else begin
      cyc++;
      if (req_valid && !req_ready) stalls++;
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[req_addr] = req_wdata;
          writes++;
        end else begin
          longint due;
          due = cyc + longint'($urandom_range(1, MAX_LAT));
          if (due <= last_due) due = last_due + 1;
          last_due = due;
          q_data.push_back(mem[req_addr]);
          q_due.push_back(due);
          reads++;
        end
      end
      if (q_due.size() > 0 && q_due[0] <= cyc + 1) begin
        rsp_valid <= 1'b1;
        rsp_data  <= q_data.pop_front();
        void'(q_due.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
      req_ready <= ($urandom_range(0, 99) >= BUSY_PCT);
    end
  end

endmodule
