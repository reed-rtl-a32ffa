// ins_ctrl: instruction controller of one REED processing unit.
//
// The host writes a program of micro-instructions (reed_pkg::instr_t, one
// 128-bit word each) into a small instruction memory, then pulses exec. The
// controller fetches instructions from address 0 in order; for each it pulses
// start with the instruction on instr, and waits for the matching completion
// signal collected from the units before moving on:
//   OP_NTT  -> done[0] (NTT, and with keymul the fused MAS write-back)
//   OP_MAS  -> done[1] / done[2] for the top / bottom MAS unit
//   OP_AUT  -> done[3] / done[4] for the top / bottom AUT unit
//   OP_SEED -> done[5] (PRNG ready, a level)
//   OP_XWAIT-> done[6] (ring link idle, a level)
//   OP_SWAP, OP_XFER complete at once (the transfer itself runs in the
//   background, which is what makes the chiplet-to-chiplet exchange
//   non-blocking).
// OP_HALT ends the program: busy falls and halted rises until the next exec.
// Per instruction the overhead is 3 cycles (fetch, issue, wait). The paper
// gives the controller's role (instruction memory, execute command, unit
// multiplexer control, done collection); the encoding, the in-order one-at-a-
// time issue and the memory depth are this design's.
module ins_ctrl
  import reed_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host side
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t                        imem_wdata,
  input  logic                          exec,
  output logic                          busy,
  output logic                          halted,
  // unit side
  output logic                          start,
  output instr_t                        instr,
  input  logic [6:0]                    done
);
  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_ISSUE, S_WAIT} state_e;

  instr_t                        imem [IMEM_DEPTH];
  logic [$clog2(IMEM_DEPTH)-1:0] pc;
  state_e                        state;
  logic                          finished;

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  always_comb begin
    finished = 1'b0;
    unique case (instr.opcode)
      OP_NTT:   finished = done[0];
      OP_MAS:   finished = instr.unit ? done[2] : done[1];
      OP_AUT:   finished = instr.unit ? done[4] : done[3];
      OP_SEED:  finished = done[5];
      OP_XWAIT: finished = done[6];
      default:  finished = 1'b1;
    endcase
  end

  assign start = (state == S_ISSUE);
  assign busy  = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      pc     <= '0;
      halted <= 1'b0;
      instr  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (exec) begin
          pc     <= '0;
          halted <= 1'b0;
          state  <= S_FETCH;
        end
        S_FETCH: begin
          instr <= imem[pc];
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          if (instr.opcode == OP_HALT) begin
            halted <= 1'b1;
            state  <= S_IDLE;
          end else begin
            state <= S_WAIT;
          end
        end
        S_WAIT: if (finished) begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
      endcase
    end
  end
endmodule
