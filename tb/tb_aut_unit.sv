// tb_aut_unit: checks the automorphism unit on N1 = 8 rows of N2 = 4 lanes.
//
// A random polynomial in NTT form (slot k = k1 + N1*k2 at row k1, lane k2)
// is streamed one row per cycle for several odd Galois elements, among them
// 1 (identity), 2N-1 (conjugation) and powers of 5 (rotations). Each output
// row is written by its row number into a result array, which must equal
// the slot permutation out[d] = in[s] with 2d+1 = gle*(2s+1) mod 2N. Every
// output row must appear log2(N2)+1 cycles after its input row, and every
// destination row exactly once per polynomial.
`timescale 1ns/1ps
module tb_aut_unit;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N1 = 8, N2 = 4, N = N1 * N2;
  localparam int unsigned LAT = $clog2(N2) + 1;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [$clog2(2*N)-1:0] gle = 1;
  logic in_valid = 0, out_valid;
  logic [2:0] in_row = 0, out_row;
  coeff_t in_data [N2], out_data [N2];

  aut_unit #(.N1(N1), .N2(N2)) dut (.clk, .rst_n, .gle, .in_valid, .in_row,
    .in_data, .out_valid, .out_row, .out_data);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  u64 res [N];
  int seen [N1];
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      seen[out_row]++;
      for (int j = 0; j < int'(N2); j++) res[int'(out_row) + N1 * j] = out_data[j];
    end
  end

  // latency per row: the k-th output must come LAT cycles after the k-th input
  int in_t [$], out_t [$];
  always @(posedge clk) begin
    if (rst_n && in_valid) in_t.push_back(cyc);
    if (rst_n && out_valid) out_t.push_back(cyc);
  end

  initial begin
    u64 src [N];
    int g, d;
    int gles [6] = '{1, 2 * N - 1, 5, 25, 125 % (2 * N), 7};
    for (int j = 0; j < int'(N2); j++) in_data[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      g = gles[t];
      for (int k = 0; k < int'(N); k++) src[k] = rand54(64'h20000000140001);
      for (int k = 0; k < int'(N); k++) res[k] = 64'hdead;
      for (int r = 0; r < int'(N1); r++) seen[r] = 0;
      in_t.delete(); out_t.delete();
      for (int r = 0; r < int'(N1); r++) begin
        @(negedge clk);
        gle = 6'(g); in_valid = 1; in_row = 3'(r);
        for (int j = 0; j < int'(N2); j++) in_data[j] = src[r + N1 * j];
      end
      @(negedge clk); in_valid = 0;
      repeat (LAT + 2) @(negedge clk);
      for (int s = 0; s < int'(N); s++) begin
        d = (((g * (2 * s + 1)) % (2 * N)) - 1) / 2;
        checks++;
        if (res[d] != src[s]) begin
          failures++;
          if (failures < 5) $display("gle %0d slot %0d->%0d wrong", g, s, d);
        end
      end
      for (int r = 0; r < int'(N1); r++) begin
        checks++;
        if (seen[r] != 1) failures++;
      end
      checks++;
      if (in_t.size() != out_t.size()) failures++;
      else foreach (in_t[i]) begin
        checks++;
        if (out_t[i] - in_t[i] != LAT) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
