// tb_end_u: self-checking testbench of the early negative detection unit.
// Random D-digit signed-digit streams (biased so that about half are
// negative). The reference finds the first digit after which the prefix
// value is negative; END-U must raise `terminate` right after that digit and
// output zero, otherwise deliver the full value after the D-th digit.
`timescale 1ns/1ps
module tb_end_u;
  import usefuse_pkg::*;

  localparam int D = 12;
  logic clk = 0, rst_n = 0, clear = 0, start = 0, terminate, valid;
  sd_digit_t d;
  logic [D-1:0] value;
  int checks = 0, failures = 0, n_neg = 0;

  always #5 clk = ~clk;

  end_u #(.D(D)) dut (.clk, .rst_n, .clear, .start, .d, .terminate, .valid, .value);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one();
    sd_digit_t s [D];
    longint pre;
    int neg_at, r, term_seen_at;
    pre = 0; neg_at = -1; term_seen_at = -1;
    for (int i = 0; i < D; i++) begin
      r = int'($urandom_range(0, 2)) - 1;
      if (i == 0 && r == 0) r = ($urandom_range(0, 1) == 1) ? 1 : -1;
      s[i] = (r > 0) ? SD_POS : (r < 0) ? SD_NEG : SD_ZERO;
      pre = pre * 2 + r;
      if (pre < 0 && neg_at < 0) neg_at = i;
    end
    clear = 1;
    @(posedge clk); #1;
    clear = 0;
    for (int cyc = 0; cyc < D + 1; cyc++) begin
      start = (cyc == 0);
      d = (cyc < D) ? s[cyc] : SD_ZERO;
      #1;
      if (terminate && term_seen_at < 0) term_seen_at = cyc;
      @(posedge clk); #1;
      start = 0;
    end
    #1;
    checks++;
    if (!valid) begin failures++; $display("FAIL end_u no valid"); end
    if (neg_at >= 0) begin
      n_neg++;
      checks++;
      if (term_seen_at != neg_at + 1) begin
        failures++;
        $display("FAIL end_u terminate at %0d expected %0d", term_seen_at, neg_at + 1);
      end
      checks++;
      if (value != '0) begin failures++; $display("FAIL end_u value not zero"); end
    end else begin
      checks++;
      if (terminate || longint'(value) != pre) begin
        failures++;
        $display("FAIL end_u value %0d expected %0d term %0b", value, pre, terminate);
      end
    end
  endtask

  initial begin
    d = SD_ZERO;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 400; i++) run_one();
    checks++;
    if (n_neg == 0 || n_neg == 400) begin failures++; $display("FAIL end_u no mix"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
