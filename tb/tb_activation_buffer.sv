// tb_activation_buffer: self-checking testbench of the activation/output
// buffer. R=2, M=3, 12-bit ReLU results, two instances with requantisation
// shifts 0 and 2. Random results (biased to hit saturation) are written with
// random wr_en; the stored n-bit activations must equal
// min(2^n - 1, din >> shift) and must hold when wr_en is low.
`timescale 1ns/1ps
module tb_activation_buffer;
  localparam int N = 8, DW = 12, R = 2, M = 3;

  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [DW-1:0] din [R*R][M];
  logic [N-1:0] dout0 [R][R][M], dout2 [R][R][M];
  logic [N-1:0] ref0 [R][R][M], ref2 [R][R][M];
  int checks = 0, failures = 0, sat = 0;

  always #5 clk = ~clk;

  activation_buffer #(.N_BITS(N), .DW(DW), .R(R), .M(M), .RQ_SHIFT(0)) dut0 (
    .clk, .rst_n, .wr_en, .din, .dout(dout0));
  activation_buffer #(.N_BITS(N), .DW(DW), .R(R), .M(M), .RQ_SHIFT(2)) dut2 (
    .clk, .rst_n, .wr_en, .din, .dout(dout2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] rq(input logic [DW-1:0] v, input int sh);
    int t;
    t = int'(v) >> sh;
    return (t > 255) ? 8'hFF : N'(t);
  endfunction

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < R; c++) for (int m = 0; m < M; m++) begin
      ref0[r][c][m] = '0; ref2[r][c][m] = '0; din[r*R+c][m] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      wr_en = ($urandom_range(0, 2) != 0);
      for (int p = 0; p < R * R; p++) for (int m = 0; m < M; m++)
        din[p][m] = ($urandom_range(0, 1) == 1) ? DW'($urandom_range(0, 300)) : DW'($urandom);
      @(posedge clk); #1;
      if (wr_en)
        for (int r = 0; r < R; r++) for (int c = 0; c < R; c++) for (int m = 0; m < M; m++) begin
          ref0[r][c][m] = rq(din[r*R+c][m], 0);
          ref2[r][c][m] = rq(din[r*R+c][m], 2);
          if (din[r*R+c][m] > 255) sat++;
        end
      for (int r = 0; r < R; r++) for (int c = 0; c < R; c++) for (int m = 0; m < M; m++) begin
        checks++;
        if (dout0[r][c][m] != ref0[r][c][m] || dout2[r][c][m] != ref2[r][c][m]) begin
          failures++;
          $display("FAIL activation_buffer [%0d][%0d][%0d] %0d/%0d vs %0d/%0d", r, c, m,
                   dout0[r][c][m], dout2[r][c][m], ref0[r][c][m], ref2[r][c][m]);
        end
      end
    end
    checks++;
    if (sat == 0) begin failures++; $display("FAIL activation_buffer saturation never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
