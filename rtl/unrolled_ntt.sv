// unrolled_ntt: fully unrolled N2-point NTT across the N2 lanes (U-NTT unit).
//
// Each cycle one row of N2 coefficients enters and, log2(N2) cycles later, its
// N2-point transform leaves: out[k] = sum_n in[n] * root^(n*k) mod q, in
// natural order. The network is a Gentleman-Sande (decimation in frequency)
// butterfly network with one register stage per butterfly level; its
// bit-reversed result is re-ordered by wiring, so the transform of the rows
// also performs the "natural transpose" of the hybrid NTT without any buffer.
// root is whatever the twiddle table holds: tw[e] = root^e (Montgomery form,
// e < N2/2); hybrid_ntt supplies omega^N1 for NTT and its inverse for INTT.
// A valid flag, a start-of-polynomial flag and a tag follow each row.
module unrolled_ntt
  import reed_pkg::*;
#(
  parameter int unsigned N2   = 64,
  parameter int unsigned TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  coeff_t          q,
  input  coeff_t          tw [N2/2],
  input  logic            in_valid,
  input  logic            in_sop,
  input  logic [TAGW-1:0] in_tag,
  input  coeff_t          in_data [N2],
  output logic            out_valid,
  output logic            out_sop,
  output logic [TAGW-1:0] out_tag,
  output coeff_t          out_data [N2]
);
  localparam int unsigned LOGN2 = $clog2(N2);

  coeff_t          d   [LOGN2+1][N2];
  logic            v   [LOGN2+1];
  logic            sp  [LOGN2+1];
  logic [TAGW-1:0] tg  [LOGN2+1];

  assign d[0]  = in_data;
  assign v[0]  = in_valid;
  assign sp[0] = in_sop;
  assign tg[0] = in_tag;

  for (genvar st = 0; st < int'(LOGN2); st++) begin : g_lvl
    localparam int unsigned H = N2 >> (st + 1);   // half span of this level
    coeff_t nxt [N2];
    always_comb begin
      for (int i = 0; i < int'(N2); i++) nxt[i] = '0;
      for (int b = 0; b < int'(N2); b += 2 * int'(H)) begin
        for (int j = 0; j < int'(H); j++) begin
          nxt[b+j]   = mod_add(d[st][b+j], d[st][b+j+int'(H)], q);
          nxt[b+j+int'(H)] = mont_mul(mod_sub(d[st][b+j], d[st][b+j+int'(H)], q),
                                      tw[j * int'(N2 / (2 * H))], q);
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v[st+1]  <= 1'b0;
        sp[st+1] <= 1'b0;
        tg[st+1] <= '0;
        for (int i = 0; i < int'(N2); i++) d[st+1][i] <= '0;
      end else begin
        v[st+1]  <= v[st];
        sp[st+1] <= sp[st];
        tg[st+1] <= tg[st];
        d[st+1]  <= nxt;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < int'(N2); k++) out_data[k] = d[LOGN2][bitrev(k, LOGN2)];
  end
  assign out_valid = v[LOGN2];
  assign out_sop   = sp[LOGN2];
  assign out_tag   = tg[LOGN2];
endmodule
