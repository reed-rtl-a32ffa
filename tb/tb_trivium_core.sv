// tb_trivium_core: checks the 64-bit-per-cycle Trivium core.
//
// For several random seeds and IVs the core is loaded and must raise ready
// exactly 18 cycles later (1152 initialisation steps at 64 steps per cycle);
// then 20 keystream words are drawn, with random pauses of next during which
// the word must hold. Every word is compared with a bit-serial Trivium
// written from the cipher's specification (tb_math_pkg::trivium_ref).
`timescale 1ns/1ps
module tb_trivium_core;
  import tb_math_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic load = 0, next = 0, ready;
  logic [63:0] seed = 0, word;
  logic [79:0] iv = 0;

  trivium_core dut (.clk, .rst_n, .load, .seed, .iv, .next, .ready, .word);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    u64 ref_w [$];
    int n, wait_c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      ref_w.delete();
      @(negedge clk);
      seed = (t == 0) ? 64'd0 : {$urandom, $urandom};
      iv   = (t == 1) ? 80'd0 : {16'($urandom), $urandom, $urandom};
      trivium_ref(seed, iv, 20, ref_w);
      load = 1;
      @(negedge clk); load = 0;
      wait_c = 0;   // edges after the one that took load
      while (!ready && wait_c < 40) begin @(negedge clk); wait_c++; end
      checks++;
      if (wait_c != 18) begin failures++; $display("ready after %0d", wait_c); end
      n = 0;
      while (n < 20) begin
        checks++;
        if (word != ref_w[n]) begin
          failures++;
          if (failures < 5) $display("word %0d got %h exp %h", n, word, ref_w[n]);
        end
        next = ($urandom % 3 != 0);
        @(negedge clk);
        if (next) n++;
      end
      next = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
