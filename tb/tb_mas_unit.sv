// tb_mas_unit: checks the point-wise MAS unit on N2 = 8 lanes.
//
// Random rows are issued back to back with all four operations (a+c, a-c,
// a*b and a*b+c, where b is a Montgomery-form operand so a*b means
// a*b*2^-54 mod q) and two different primes (q is held while rows are in flight, as in the PU). Every output row is compared
// lane by lane with values computed in the testbench, and must arrive with
// its tag exactly two cycles after it was issued.
`timescale 1ns/1ps
module tb_mas_unit;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N2 = 8;
  localparam u64 QS [2] = '{64'h20000000140001, 64'h200000007c0001};
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  mas_op_e op = MAS_ADD;
  coeff_t q = QS[0];
  logic in_valid = 0, out_valid;
  logic [9:0] in_tag = 0, out_tag;
  coeff_t a [N2], b [N2], c [N2], y [N2];

  mas_unit #(.N2(N2), .TAGW(10)) dut (.clk, .rst_n, .op, .q, .in_valid, .in_tag,
                                      .a, .b, .c, .out_valid, .out_tag, .y);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { u64 v [N2]; int tag; } exp_t;
  exp_t exq[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int issued [1024];
  always @(posedge clk) begin
    if (rst_n && in_valid) issued[in_tag] = cyc;
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (exq.size() == 0) failures++;
      else begin
        e = exq.pop_front();
        if (out_tag != 10'(e.tag) || cyc - issued[out_tag] != 2) begin
          failures++;
          $display("tag/latency error tag=%0d lat=%0d", out_tag, cyc - issued[out_tag]);
        end
        for (int j = 0; j < int'(N2); j++) begin
          checks++;
          if (y[j] != e.v[j]) begin
            failures++;
            if (failures < 5) $display("lane %0d got %h exp %h", j, y[j], e.v[j]);
          end
        end
      end
    end
  end

  initial begin
    exp_t e;
    for (int j = 0; j < int'(N2); j++) begin a[j] = 0; b[j] = 0; c[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      if (i % 100 == 0) begin
        // q must stay constant while rows are in flight: drain first
        @(negedge clk); in_valid = 0;
        repeat (3) @(negedge clk);
      end else @(negedge clk);
      q  = QS[(i / 100) % 2];
      op = mas_op_e'(i % 4);
      in_valid = (i % 7 != 3);
      in_tag = 10'(i);
      for (int j = 0; j < int'(N2); j++) begin
        a[j] = rand54(q); b[j] = rand54(q); c[j] = rand54(q);
        if (i == 0) begin a[j] = q - 1; c[j] = q - 1; end
        unique case (op)
          MAS_ADD: e.v[j] = addm(a[j], c[j], q);
          MAS_SUB: e.v[j] = subm(a[j], c[j], q);
          MAS_MUL: e.v[j] = montref(a[j], b[j], q);
          MAS_MAC: e.v[j] = addm(montref(a[j], b[j], q), c[j], q);
        endcase
      end
      e.tag = i;
      if (in_valid) exq.push_back(e);
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
