// shuffle_tree: pipelined binary-tree permutation of N2 coefficients.
//
// Each coefficient enters with its destination lane. Level s merges pairs of
// neighbouring batches of 2^s coefficients into batches of 2^(s+1), placing
// every coefficient at the position equal to its destination modulo
// 2^(s+1); after log2(N2) levels every coefficient sits in its destination
// lane. Each output position of a level is a 2:1 choice between the same
// position of the two merged batches, decided by one destination bit, and
// each level is registered (N2 coefficients per level, as in the paper's
// shuffle figure). This is correct for any permutation in which every
// aligned block of 2^(s+1) source lanes covers all residues modulo 2^(s+1),
// which holds for the automorphism maps dst = start + gle*j (gle odd).
// Throughput one row per cycle, latency log2(N2) cycles; a tag follows.
module shuffle_tree
  import reed_pkg::*;
#(
  parameter int unsigned N2   = 64,
  parameter int unsigned TAGW = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [TAGW-1:0]       in_tag,
  input  coeff_t                in_data [N2],
  input  logic [$clog2(N2)-1:0] in_dst  [N2],
  output logic                  out_valid,
  output logic [TAGW-1:0]       out_tag,
  output coeff_t                out_data [N2]
);
  localparam int unsigned LG = $clog2(N2);

  coeff_t          d  [LG+1][N2];
  logic [LG-1:0]   a  [LG+1][N2];
  logic            v  [LG+1];
  logic [TAGW-1:0] tg [LG+1];

  assign d[0]  = in_data;
  assign a[0]  = in_dst;
  assign v[0]  = in_valid;
  assign tg[0] = in_tag;

  for (genvar s = 0; s < int'(LG); s++) begin : g_lvl
    localparam int unsigned B = 1 << s;      // size of the batches being merged
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v[s+1]  <= 1'b0;
        tg[s+1] <= '0;
        for (int p = 0; p < int'(N2); p++) begin
          d[s+1][p] <= '0;
          a[s+1][p] <= '0;
        end
      end else begin
        v[s+1]  <= v[s];
        tg[s+1] <= tg[s];
        for (int p = 0; p < int'(N2); p++) begin
          int base, l, r;
          base = p - (p % (2 * int'(B)));       // first lane of the merged batch
          l    = base + (p % int'(B));          // candidate in the left batch
          r    = l + int'(B);                   // candidate in the right batch
          if (a[s][l][s] == 1'(p >> s)) begin
            d[s+1][p] <= d[s][l];
            a[s+1][p] <= a[s][l];
          end else begin
            d[s+1][p] <= d[s][r];
            a[s+1][p] <= a[s][r];
          end
        end
      end
    end
  end

  assign out_data  = d[LG];
  assign out_valid = v[LG];
  assign out_tag   = tg[LG];
endmodule
