// tb_sdf_ntt: checks the single-lane SDF NTT/INTT pipeline (N1 = 16).
//
// The testbench serves the twiddle requests itself: stage s asking for index
// k gets root^((N1/2^(s+1))*k) in Montgomery form, root being a primitive
// N1-th root of unity (forward) or its inverse (inverse). Forward: three
// random sequences x enter back to back in bit-reversed order and the
// output, in natural order, must be X[k] = sum_n x[n]*root^(nk). Inverse:
// sequences enter in natural order and output position t must hold the
// inverse-root transform at index bitrev(t). The first output of each
// sequence must come N1-1+log2(N1) cycles after its first input.
`timescale 1ns/1ps
module tb_sdf_ntt;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N1 = 16, LG = $clog2(N1), LAT = N1 - 1 + LG;
  localparam u64 Q = 64'h20000000140001, G = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic inverse = 0, in_valid = 0, in_sop = 0, out_valid, out_sop;
  coeff_t q = Q, in_data = 0, out_data;
  logic [LG-1:0] tw_idx [LG];
  coeff_t tw [LG];
  u64 root;

  sdf_ntt #(.N1(N1)) dut (.clk, .rst_n, .inverse, .q, .in_valid, .in_sop,
    .in_data, .tw_idx, .tw, .out_valid, .out_sop, .out_data);

  always_comb
    for (int s = 0; s < int'(LG); s++)
      tw[s] = tomont(powm(root, u64'((N1 >> (s + 1)) * tw_idx[s]), Q), Q);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  u64 expq [$];
  int sop_in [$];
  int pos = 0;
  always @(posedge clk) begin
    if (rst_n && in_valid && in_sop) sop_in.push_back(cyc);
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0 || out_data != expq[0]) begin
        failures++;
        if (failures < 5) $display("pos %0d got %h exp %h", pos, out_data, expq.size() ? expq[0] : 0);
      end
      if (expq.size()) void'(expq.pop_front());
      pos++;
      if (out_sop) begin
        checks++;
        if (sop_in.size() == 0 || cyc - sop_in[0] != LAT) begin
          failures++; $display("latency %0d", sop_in.size() ? cyc - sop_in[0] : -1);
        end
        if (sop_in.size()) void'(sop_in.pop_front());
      end
    end
  end

  initial begin
    u64 x [N1], X [N1], acc;
    root = powm(G, (Q - 1) / N1, Q);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int dir = 0; dir < 2; dir++) begin
      @(negedge clk); in_valid = 0;
      repeat (LAT + 3) @(negedge clk);
      inverse = 1'(dir);
      root = powm(G, (Q - 1) / N1, Q);
      if (dir == 1) root = invm(root, Q);
      for (int p = 0; p < 3; p++) begin
        for (int n = 0; n < int'(N1); n++) x[n] = rand54(Q);
        for (int k = 0; k < int'(N1); k++) begin
          acc = 0;
          for (int n = 0; n < int'(N1); n++)
            acc = addm(acc, mulm(x[n], powm(root, u64'((n * k) % N1), Q), Q), Q);
          X[k] = acc;
        end
        for (int t = 0; t < int'(N1); t++) begin
          @(negedge clk);
          in_valid = 1;
          in_sop = (t == 0);
          in_data = (dir == 0) ? x[brev(t, LG)] : x[t];
          expq.push_back((dir == 0) ? X[t] : X[brev(t, LG)]);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
