// tb_dram_interface: self-checking testbench of the DRAM interface.
// A random requester issues reads (tag = running sequence number, random
// address) and writes (random address and data) against the behavioural
// memory, which is busy in 30% of cycles and answers reads after 1..6
// cycles. A shadow memory predicts each read's data at acceptance. Checks:
// every response carries the tag and data of the oldest outstanding read,
// no more than DEPTH reads are ever in flight, every write reaches memory,
// reads and writes both waited on back-pressure at least once, and `idle`
// is high exactly when no read is outstanding.
`timescale 1ns/1ps
module tb_dram_interface;
  localparam int AW = 6, DW = 8, TW = 32, DEPTH = 4;

  logic clk = 0, rst_n = 0;
  logic rd_req_valid = 0, rd_req_ready, rd_rsp_valid, wr_req_valid = 0, wr_req_ready, idle;
  logic [AW-1:0] rd_req_addr = '0, wr_req_addr = '0;
  logic [TW-1:0] rd_req_tag = '0, rd_rsp_tag;
  logic [DW-1:0] rd_rsp_data, wr_req_data = '0;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [DW-1:0] mem_req_wdata, mem_rsp_data;
  logic [DW-1:0] shadow [2**AW];
  logic [DW-1:0] exp_data [$];
  logic [TW-1:0] exp_tag [$];
  logic wr_acc, rd_acc;
  int checks = 0, failures = 0, rd_stall = 0, wr_stall = 0, nrsp = 0;

  always #5 clk = ~clk;

  dram_interface #(.AW(AW), .DW(DW), .TW(TW), .DEPTH(DEPTH)) dut (.*);

  tb_mem_model #(.AW(AW), .DW(DW), .BUSY_PCT(30), .MAX_LAT(6)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2**AW; i++) begin
      shadow[i] = DW'($urandom);
      u_mem.mem[i] = shadow[i];
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      // new requests only when the previous one was accepted
      if (!rd_req_valid && $urandom_range(0, 1) == 1) begin
        rd_req_valid = 1; rd_req_addr = AW'($urandom); rd_req_tag = rd_req_tag + 1;
      end
      if (!wr_req_valid && $urandom_range(0, 4) == 0) begin
        wr_req_valid = 1; wr_req_addr = AW'($urandom); wr_req_data = DW'($urandom);
      end
      #1;
      // sample this cycle's handshakes and response before the edge
      checks++;
      if (idle != (exp_tag.size() == 0)) begin failures++; $display("FAIL dram_interface idle"); end
      if (rd_rsp_valid) begin
        checks++;
        nrsp++;
        if (exp_tag.size() == 0) begin
          failures++; $display("FAIL dram_interface unexpected response");
        end else begin
          logic [DW-1:0] ed;
          logic [TW-1:0] et;
          ed = exp_data.pop_front();
          et = exp_tag.pop_front();
          if (rd_rsp_data != ed || rd_rsp_tag != et) begin
            failures++;
            $display("FAIL dram_interface rsp %0h/%0d expected %0h/%0d", rd_rsp_data, rd_rsp_tag, ed, et);
          end
        end
      end
      checks++;
      if (exp_tag.size() > DEPTH) begin failures++; $display("FAIL dram_interface too many in flight %0d cnt=%0d", exp_tag.size(), dut.cnt_q); end
      if (wr_req_valid && !wr_req_ready) wr_stall++;
      if (rd_req_valid && !rd_req_ready) rd_stall++;
      wr_acc = wr_req_valid && wr_req_ready;
      rd_acc = rd_req_valid && rd_req_ready;
      @(posedge clk); #1;
      if (wr_acc) begin
        shadow[wr_req_addr] = wr_req_data;
        wr_req_valid = 0;
      end
      if (rd_acc) begin
        exp_data.push_back(shadow[rd_req_addr]);
        exp_tag.push_back(rd_req_tag);
        rd_req_valid = 0;
      end
    end
    rd_req_valid = 0; wr_req_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_tag.size() != 0) begin failures++; $display("FAIL dram_interface lost responses"); end
    for (int i = 0; i < 2**AW; i++) begin
      checks++;
      if (u_mem.mem[i] != shadow[i]) begin failures++; $display("FAIL dram_interface mem[%0d]", i); end
    end
    checks++;
    if (rd_stall == 0 || wr_stall == 0 || nrsp < 100) begin
      failures++; $display("FAIL dram_interface coverage rd_stall=%0d wr_stall=%0d rsp=%0d", rd_stall, wr_stall, nrsp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
