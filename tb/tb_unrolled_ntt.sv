// tb_unrolled_ntt: checks the fully unrolled N2-point transform (N2 = 8).
//
// With tw[e] = root^e (Montgomery form) for a primitive N2-th root of unity,
// every output row must be the cyclic transform out[k] = sum_n in[n]*root^(nk)
// mod q in natural order; the same check is repeated with the inverse root
// (the transform used by the inverse NTT). Rows are streamed back to back
// with random gaps; each must
// leave log2(N2) cycles after it entered, with its tag.
`timescale 1ns/1ps
module tb_unrolled_ntt;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N2 = 8, LAT = $clog2(N2);
  localparam u64 Q = 64'h20000000280001, G = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  coeff_t q = Q, tw [N2/2], in_data [N2], out_data [N2];
  logic in_valid = 0, in_sop = 0, out_valid, out_sop;
  logic [7:0] in_tag = 0, out_tag;

  unrolled_ntt #(.N2(N2), .TAGW(8)) dut (.clk, .rst_n, .q, .tw, .in_valid,
    .in_sop, .in_tag, .in_data, .out_valid, .out_sop, .out_tag, .out_data);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { u64 v [N2]; int tag; } row_t;
  row_t exq [$];
  int issued [256];
  always @(posedge clk) begin
    if (rst_n && in_valid) issued[in_tag] = cyc;
    if (rst_n && out_valid) begin
      row_t e;
      checks++;
      if (exq.size() == 0) failures++;
      else begin
        e = exq.pop_front();
        if (out_tag != 8'(e.tag) || cyc - issued[out_tag] != LAT) failures++;
        for (int k = 0; k < int'(N2); k++) begin
          checks++;
          if (out_data[k] != e.v[k]) begin
            failures++;
            if (failures < 5) $display("k=%0d got %h exp %h", k, out_data[k], e.v[k]);
          end
        end
      end
    end
  end

  initial begin
    u64 root, x [N2];
    row_t e;
    for (int k = 0; k < int'(N2); k++) in_data[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int dir = 0; dir < 2; dir++) begin
      root = powm(G, (Q - 1) / N2, Q);
      if (dir == 1) root = invm(root, Q);
      @(negedge clk); in_valid = 0;
      repeat (LAT + 2) @(negedge clk);    // tables change only when idle
      for (int e2 = 0; e2 < int'(N2 / 2); e2++) tw[e2] = tomont(powm(root, u64'(e2), Q), Q);
      for (int i = 0; i < 60; i++) begin
        @(negedge clk);
        in_valid = ($urandom % 4 != 0);
        in_sop = (i == 0);
        in_tag = 8'(i + 100 * dir);
        for (int n = 0; n < int'(N2); n++) begin x[n] = rand54(Q); in_data[n] = x[n]; end
        for (int k = 0; k < int'(N2); k++) begin
          e.v[k] = 0;
          for (int n = 0; n < int'(N2); n++)
            e.v[k] = addm(e.v[k], mulm(x[n], powm(root, u64'((n * k) % N2), Q), Q), Q);
        end
        e.tag = i + 100 * dir;
        if (in_valid) exq.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (exq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
