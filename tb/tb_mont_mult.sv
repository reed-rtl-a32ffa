// tb_mont_mult: checks the registered Montgomery multiplier.
//
// For four primes of the form 2^53 + qH*2^18 + 1 and random operands below q
// (plus the corner values 0, 1 and q-1) the product must equal a*b*2^-54 mod
// q, computed here with plain 192-bit arithmetic and a modular inverse of
// 2^54. A new operand pair is applied every cycle; each result and its tag
// must appear exactly one cycle later (the unit's stated latency).
`timescale 1ns/1ps
module tb_mont_mult;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam u64 QS [4] = '{64'h20000000140001, 64'h20000000280001,
                            64'h20000000640001, 64'h200000007c0001};
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0, out_valid;
  logic [7:0] in_tag = 0, out_tag;
  coeff_t a = 0, b = 0, q = QS[0], p;

  mont_mult #(.TAGW(8)) dut (.clk, .rst_n, .in_valid, .in_tag, .a, .b, .q,
                             .out_valid, .out_tag, .p);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  u64 exp_q[$];
  int exp_t[$];

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0 || p != exp_q[0] || out_tag != 8'(exp_t[0])) begin
        failures++;
        if (failures < 5) $display("mismatch: got %h exp %h", p, exp_q.size() ? exp_q[0] : 0);
      end
      if (exp_q.size()) begin void'(exp_q.pop_front()); void'(exp_t.pop_front()); end
    end
  end

  initial begin
    u64 x, y;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        x = (i == 0) ? QS[m] - 1 : (i == 1) ? 0 : (i == 2) ? 1 : rand54(QS[m]);
        y = (i == 0) ? QS[m] - 1 : (i == 3) ? 1 : rand54(QS[m]);
        in_valid = 1; in_tag = 8'(i); a = x; b = y; q = QS[m];
        exp_q.push_back(montref(x, y, QS[m]));
        exp_t.push_back(i);
        // latency: the result of this cycle's inputs appears after one edge
        @(posedge clk); #0.1;
        checks++;
        if (!out_valid || out_tag != 8'(i)) failures++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
