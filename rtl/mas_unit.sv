// mas_unit: N2 parallel triadic multiply / add / subtract lanes.
//
// Every lane takes three operands a, b, c and computes, as selected by op,
// a+c, a-c, a*b or a*b+c modulo q (the paper's MAS unit: point-wise
// multiplication, addition, subtraction and multiply-accumulate). The
// multiplier is the Montgomery multiplier, so a*b means a*b*2^-W: b is
// expected in Montgomery form (switching keys and plaintext constants are
// stored that way in this design). Latency is 2 cycles (multiplier, then
// adder), one row of N2 coefficients per cycle; a row tag (the memory row)
// travels with the data.
module mas_unit
  import reed_pkg::*;
#(
  parameter int unsigned N2   = 64,
  parameter int unsigned TAGW = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  mas_op_e         op,
  input  coeff_t          q,
  input  logic            in_valid,
  input  logic [TAGW-1:0] in_tag,
  input  coeff_t          a [N2],
  input  coeff_t          b [N2],
  input  coeff_t          c [N2],
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output coeff_t          y [N2]
);
  logic            v1;
  logic [TAGW-1:0] t1;
  mas_op_e         op1;
  coeff_t          p1 [N2];
  coeff_t          a1 [N2];
  coeff_t          c1 [N2];

  for (genvar j = 0; j < int'(N2); j++) begin : g_mul
    mont_mult #(.TAGW(1)) u_mul (
      .clk, .rst_n, .in_valid (1'b0), .in_tag (1'b0),
      .a (a[j]), .b (b[j]), .q,
      .out_valid (), .out_tag (), .p (p1[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; t1 <= '0; op1 <= MAS_ADD;
      out_valid <= 1'b0; out_tag <= '0;
      for (int j = 0; j < int'(N2); j++) begin
        a1[j] <= '0; c1[j] <= '0; y[j] <= '0;
      end
    end else begin
      v1  <= in_valid;
      t1  <= in_tag;
      op1 <= op;
      a1  <= a;
      c1  <= c;
      out_valid <= v1;
      out_tag   <= t1;
      for (int j = 0; j < int'(N2); j++) begin
        unique case (op1)
          MAS_ADD: y[j] <= mod_add(a1[j], c1[j], q);
          MAS_SUB: y[j] <= mod_sub(a1[j], c1[j], q);
          MAS_MUL: y[j] <= p1[j];
          MAS_MAC: y[j] <= mod_add(p1[j], c1[j], q);
        endcase
      end
    end
  end
endmodule
