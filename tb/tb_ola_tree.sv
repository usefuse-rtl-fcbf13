// tb_ola_tree: self-checking testbench of the online adder tree.
// Five random signed-digit streams (padded by the tree to eight) of M digits;
// output has M+3 digits representing SUM / 8 exactly, first digit 2*3 = 6
// cycles after start (three adder stages of online delay 2).
`timescale 1ns/1ps
module tb_ola_tree;
  import usefuse_pkg::*;

  localparam int NUM = 5;
  localparam int S   = 3;
  localparam int M   = 9;
  logic clk = 0, rst_n = 0, en = 1, start = 0, start_o;
  sd_digit_t x [NUM];
  sd_digit_t z;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ola_tree #(.NUM(NUM)) dut (.clk, .rst_n, .en, .start, .x, .z, .start_o);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one();
    sd_digit_t d [NUM][M];
    longint sum, zv;
    int first, r;
    sum = 0; zv = 0; first = -1;
    for (int k = 0; k < NUM; k++) begin
      longint v;
      v = 0;
      for (int i = 0; i < M; i++) begin
        r = int'($urandom_range(0, 2)) - 1;
        d[k][i] = (r > 0) ? SD_POS : (r < 0) ? SD_NEG : SD_ZERO;
        v = v * 2 + r;
      end
      sum += v;
    end
    for (int cyc = 0; cyc < M + 3 * S; cyc++) begin
      start = (cyc == 0);
      for (int k = 0; k < NUM; k++) x[k] = (cyc < M) ? d[k][cyc] : SD_ZERO;
      #1;
      if (start_o && first < 0) first = cyc;
      if (cyc >= 2 * S && cyc < 2 * S + M + S) zv = zv * 2 + (int'(z.p) - int'(z.n));
      @(posedge clk);
      #1;
    end
    start = 0;
    checks++;
    if (zv != sum) begin
      failures++;
      $display("FAIL tree sum=%0d got %0d", sum, zv);
    end
    checks++;
    if (first != 2 * S) begin
      failures++;
      $display("FAIL tree start_o at %0d", first);
    end
  endtask

  initial begin
    for (int k = 0; k < NUM; k++) x[k] = SD_ZERO;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 300; i++) run_one();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
