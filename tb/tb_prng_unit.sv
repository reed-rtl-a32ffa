// tb_prng_unit: checks the N2-lane PRNG that produces the key part ksk1.
//
// With N2 = 4 lanes and the prime 2^53 + 5*2^18 + 1, the unit is seeded,
// must become ready 18 cycles later, and then delivers one row of N2
// coefficients per next. Lane j must equal the low 54 bits of word n of a
// Trivium stream keyed by the seed with IV j, reduced once by q (values in
// [q, 2^54) lose q). A reseed must restart every lane from word 0.
`timescale 1ns/1ps
module tb_prng_unit;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N2 = 4;
  localparam u64 Q = 64'h20000000140001;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic load = 0, next = 0, ready;
  logic [63:0] seed = 0;
  coeff_t q = Q, coeff [N2];

  prng_unit #(.N2(N2)) dut (.clk, .rst_n, .load, .seed, .next, .q, .ready, .coeff);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    u64 ref_w [N2][$];
    u64 e;
    int wait_c;
    int reduced = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      seed = {$urandom, $urandom};
      for (int j = 0; j < int'(N2); j++) begin
        ref_w[j].delete();
        trivium_ref(seed, 80'(j), 40, ref_w[j]);
      end
      load = 1;
      @(negedge clk); load = 0;
      wait_c = 0;
      while (!ready && wait_c < 40) begin @(negedge clk); wait_c++; end
      checks++;
      if (wait_c != 18) failures++;
      for (int n = 0; n < 40; n++) begin
        for (int j = 0; j < int'(N2); j++) begin
          e = ref_w[j][n] & ((64'd1 << 54) - 1);
          if (e >= Q) begin e = e - Q; reduced++; end
          checks++;
          if (coeff[j] != e) failures++;
        end
        next = 1;
        @(negedge clk);
        next = 0;
      end
    end
    // the reduction path must have been exercised
    checks++;
    if (reduced == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
