// mont_mult: registered modular multiplier, p = a*b*2^-W mod q.
//
// The multiplier every arithmetic unit of the chiplet is built from. It
// evaluates reed_pkg::mont_mul (W/M = 3 word-level Montgomery reduction steps
// for the special prime form 2^(W-1) + qH*2^M + 1, as the paper describes) and
// registers the result, so the latency is one cycle and a new product can be
// started every cycle. The valid bit and an opaque tag travel alongside.
// Keeping the whole reduction in one cycle is this design's simplification:
// a 1.5 GHz implementation would spread the three steps over pipeline stages.
module mont_mult
  import reed_pkg::*;
#(
  parameter int unsigned TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [TAGW-1:0] in_tag,
  input  coeff_t          a,
  input  coeff_t          b,      // usually a constant in Montgomery form
  input  coeff_t          q,
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output coeff_t          p
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      p         <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      p         <= mont_mul(a, b, q);
    end
  end
endmodule
