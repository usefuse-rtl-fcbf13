// tb_maxpool: self-checking testbench of the max-pooling unit.
// R=4, M=2, 2x2 pooling: random activation maps with random in_valid; two
// cycles after each valid input the 2x2 output must hold the maximum of each
// pooling window, out_valid must follow in_valid by exactly two cycles and
// the output must hold between valid inputs. A 6x6/3x3 instance is checked
// the same way.
`timescale 1ns/1ps
module tb_maxpool;
  localparam int N = 8, M = 2;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [N-1:0] din4 [4][4][M];
  logic [N-1:0] din6 [6][6][M];
  logic [N-1:0] dout2 [2][2][M];
  logic [N-1:0] dout3 [2][2][M];
  logic ov2, ov3;
  logic [N-1:0] exp2 [2][2][M], exp3 [2][2][M];
  logic [N-1:0] q2 [3][2][2][M], q3 [3][2][2][M];  // expected values in flight
  logic vq [3];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  maxpool #(.N_BITS(N), .R(4), .M(M), .POOL(2)) dut2 (
    .clk, .rst_n, .in_valid, .din(din4), .out_valid(ov2), .dout(dout2));
  maxpool #(.N_BITS(N), .R(6), .M(M), .POOL(3)) dut3 (
    .clk, .rst_n, .in_valid, .din(din6), .out_valid(ov3), .dout(dout3));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) for (int m = 0; m < M; m++) begin
      exp2[a][b][m] = '0; exp3[a][b][m] = '0;
    end
    for (int i = 0; i < 3; i++) vq[i] = 1'b0;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) for (int m = 0; m < M; m++) din4[i][j][m] = '0;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) for (int m = 0; m < M; m++) din6[i][j][m] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      in_valid = ($urandom_range(0, 2) == 0);
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) for (int m = 0; m < M; m++) din4[i][j][m] = N'($urandom);
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) for (int m = 0; m < M; m++) din6[i][j][m] = N'($urandom);
      // expected results of this input
      for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) for (int m = 0; m < M; m++) begin
        q2[0][a][b][m] = '0; q3[0][a][b][m] = '0;
        for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++)
          if (din4[2*a+i][2*b+j][m] > q2[0][a][b][m]) q2[0][a][b][m] = din4[2*a+i][2*b+j][m];
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
          if (din6[3*a+i][3*b+j][m] > q3[0][a][b][m]) q3[0][a][b][m] = din6[3*a+i][3*b+j][m];
      end
      vq[0] = in_valid;
      @(posedge clk); #1;
      // shift the expectation pipeline
      vq[2] = vq[1]; vq[1] = vq[0];
      q2[2] = q2[1]; q2[1] = q2[0]; q3[2] = q3[1]; q3[1] = q3[0];
      if (vq[2]) begin exp2 = q2[2]; exp3 = q3[2]; end
      checks++;
      if (ov2 != vq[2] || ov3 != vq[2]) begin failures++; $display("FAIL maxpool out_valid"); end
      for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) for (int m = 0; m < M; m++) begin
        checks++;
        if (dout2[a][b][m] != exp2[a][b][m] || dout3[a][b][m] != exp3[a][b][m]) begin
          failures++;
          $display("FAIL maxpool [%0d][%0d][%0d] %0d/%0d vs %0d/%0d", a, b, m,
                   dout2[a][b][m], dout3[a][b][m], exp2[a][b][m], exp3[a][b][m]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
