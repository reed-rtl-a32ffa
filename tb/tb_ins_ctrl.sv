// tb_ins_ctrl: checks in-order issue and completion tracking.
//
// A program of 40 random micro-instructions (NTT, MAS and AUT on both units,
// SWAP, SEED, XFER, XWAIT) ending in HALT is written into the instruction
// memory and executed twice. A model of the units answers each start with the
// matching done line after a random delay (pulses for the arithmetic units,
// levels for PRNG ready and link idle) and drives wrong done lines in
// between, which must be ignored. The testbench checks the order and
// content of the issued instructions, that nothing is issued while an
// instruction is outstanding, that SWAP and XFER complete without waiting,
// the fetch/issue overhead (the next start comes exactly 2 cycles after the
// completing done), and busy/halted.
`timescale 1ns/1ps
module tb_ins_ctrl;
  import reed_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic imem_we = 0, exec = 0, busy, halted, start;
  logic [5:0] imem_addr = 0;
  instr_t imem_wdata = '0, instr;
  logic [6:0] done = 0;

  ins_ctrl #(.IMEM_DEPTH(64)) dut (.clk, .rst_n, .imem_we, .imem_addr,
    .imem_wdata, .exec, .busy, .halted, .start, .instr, .done);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  instr_t prog [41];
  int bit_of;

  function automatic int done_bit(instr_t i);
    unique case (i.opcode)
      OP_NTT:   return 0;
      OP_MAS:   return i.unit ? 2 : 1;
      OP_AUT:   return i.unit ? 4 : 3;
      OP_SEED:  return 5;
      OP_XWAIT: return 6;
      default:  return -1;
    endcase
  endfunction

  initial begin
    opcode_e ops [8] = '{OP_NTT, OP_MAS, OP_AUT, OP_SWAP, OP_SEED, OP_XFER,
                         OP_XWAIT, OP_MAS};
    int k, d, last_done;
    for (int i = 0; i < 40; i++) begin
      prog[i] = '0;
      prog[i].opcode  = ops[$urandom % 8];
      prog[i].unit    = 1'($urandom);
      prog[i].mod_idx = 6'($urandom);
      prog[i].imm     = {$urandom, $urandom};
    end
    prog[40] = '0;   // HALT
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i <= 40; i++) begin
      @(negedge clk); imem_we = 1; imem_addr = 6'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    checks++; if (busy || halted) failures++;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk); exec = 1;
      @(negedge clk); exec = 0;
      last_done = -1;
      for (k = 0; k < 40; k++) begin
        // wait for the start
        while (!start) begin
          @(negedge clk);
          if (!busy) break;
        end
        checks += 2;
        if (instr != prog[k]) begin
          failures++; $display("instr %0d differs", k);
        end
        if (last_done >= 0 && cyc - last_done != 2) begin
          failures++; $display("overhead %0d at %0d", cyc - last_done, k);
        end
        bit_of = done_bit(prog[k]);
        if (bit_of < 0) begin
          last_done = cyc + 1;   // done in the wait cycle right after issue
          @(negedge clk);
          continue;
        end
        // levels that are already high would end the wait at once: lower them
        d = 1 + $urandom % 6;
        for (int c = 0; c < d; c++) begin
          @(negedge clk);
          done = 7'($urandom) & ~(7'd1 << bit_of);
          checks++;
          if (start) begin failures++; $display("start while outstanding"); end
        end
        done = 7'd1 << bit_of;
        last_done = cyc;
        @(negedge clk);
        done = 0;
      end
      while (busy) @(negedge clk);
      checks += 2;
      if (!halted) failures++;
      if (k != 40) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
