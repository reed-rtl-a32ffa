// aut_unit: out-of-place automorphism of a polynomial in NTT form.
//
// The polynomial is stored column-major in N2 lane memories of depth N1
// (lane k2, row k1 holds slot k = k1 + N1*k2). The automorphism moves slot s
// to slot d with 2d+1 = gle*(2s+1) mod 2N. For a source row l0 all N2
// coefficients go to one destination row l1, lane j going to lane
// (start + gle*j) mod N2, where index = (gle*(2*l0+1) mod 2N - 1)/2,
// l1 = index mod N1 and start = index / N1 (the paper's Algorithm 7, written
// here for this design's slot indexing; the paper keeps a running index
// that grows by gle per row, which is the same value). The unit therefore
// reads one row per cycle, permutes it in a shuffle_tree and emits it with
// its destination row: throughput one row per cycle for every gle, latency
// log2(N2)+1 cycles. gle must be odd. For a rotation by r slots the host
// passes the inverse of 5^r mod 2N, for conjugation 2N-1.
module aut_unit
  import reed_pkg::*;
#(
  parameter int unsigned N1 = 1024,
  parameter int unsigned N2 = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(2*N1*N2)-1:0] gle,
  input  logic                     in_valid,
  input  logic [$clog2(N1)-1:0]    in_row,
  input  coeff_t                   in_data [N2],
  output logic                     out_valid,
  output logic [$clog2(N1)-1:0]    out_row,
  output coeff_t                   out_data [N2]
);
  localparam int unsigned LOGN1 = $clog2(N1);
  localparam int unsigned LOGN2 = $clog2(N2);
  localparam int unsigned GW    = $clog2(2 * N1 * N2);

  logic [GW-1:0]    e, index;
  logic [LOGN1-1:0] l1;
  logic [LOGN2-1:0] start;
  logic [LOGN2-1:0] dst [N2];

  // registered address computation
  logic             v0;
  logic [LOGN1-1:0] l1_r;
  coeff_t           d0 [N2];
  logic [LOGN2-1:0] dst_r [N2];

  always_comb begin
    e     = GW'((2*GW)'(gle) * (2*GW)'({in_row, 1'b1}));   // mod 2N by truncation
    index = (e - 1'b1) >> 1;
    l1    = index[LOGN1-1:0];
    start = LOGN2'(index >> LOGN1);
    for (int j = 0; j < int'(N2); j++)
      dst[j] = LOGN2'(32'(start) + 32'(gle) * 32'(j));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0   <= 1'b0;
      l1_r <= '0;
      for (int j = 0; j < int'(N2); j++) begin
        d0[j]    <= '0;
        dst_r[j] <= '0;
      end
    end else begin
      v0    <= in_valid;
      l1_r  <= l1;
      d0    <= in_data;
      dst_r <= dst;
    end
  end

  shuffle_tree #(.N2(N2), .TAGW(LOGN1)) u_tree (
    .clk, .rst_n,
    .in_valid (v0), .in_tag (l1_r), .in_data (d0), .in_dst (dst_r),
    .out_valid, .out_tag (out_row), .out_data
  );
endmodule
