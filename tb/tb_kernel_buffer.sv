// tb_kernel_buffer: self-checking testbench of the kernel (weight) buffer.
// NCH=3, K*K=9: random writes (including out-of-range indices, which must
// be ignored) against a reference array; every cycle the whole signed
// weight output [channel][element] must match the reference.
`timescale 1ns/1ps
module tb_kernel_buffer;
  localparam int N = 8, NCH = 3, KK = 9, IW = $clog2(NCH * KK);

  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [IW-1:0] wr_idx = '0;
  logic [N-1:0] wr_data = '0;
  logic signed [N-1:0] w [NCH][KK];
  logic [N-1:0] mem_ref [NCH*KK];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  kernel_buffer #(.N_BITS(N), .NCH(NCH), .KK(KK)) dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_data, .w);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NCH * KK; i++) mem_ref[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      wr_en   = ($urandom_range(0, 3) != 0);
      wr_idx  = IW'($urandom_range(0, (1 << IW) - 1));
      wr_data = N'($urandom);
      @(posedge clk); #1;
      if (wr_en && wr_idx < NCH * KK) mem_ref[wr_idx] = wr_data;
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < KK; i++) begin
          checks++;
          if (w[c][i] != signed'(mem_ref[c * KK + i])) begin
            failures++;
            $display("FAIL kernel_buffer [%0d][%0d] %0d vs %0d", c, i, w[c][i], mem_ref[c * KK + i]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
