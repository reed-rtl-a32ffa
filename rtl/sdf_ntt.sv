// sdf_ntt: N1-point pipelined NTT/INTT on one lane (single-path delay feedback).
//
// log2(N1) sdf_stage instances with delays 1, 2, 4, ..., N1/2. The forward
// transform (inverse=0) runs the stages in increasing delay order with
// Cooley-Tukey butterflies: input in bit-reversed position order, output in
// natural order. The inverse transform (inverse=1) runs the same stages in
// decreasing delay order with Gentleman-Sande butterflies: input in natural
// order, output bit-reversed. Reversing the direction of flow through the same
// stages is how this design realises the paper's bi-directional NTT; the
// choice of CT for one direction and GS for the other is its own.
//
// One coefficient enters and one leaves per cycle once the pipe is full; the
// latency is N1-1+log2(N1) cycles. Stage s (delay 2^s) requests twiddle
// root^((N1/2^(s+1))*k) through tw_idx[s] and gets it (Montgomery form) on
// tw[s] in the same cycle; root is the N1-th root of unity (forward) or its
// inverse. hybrid_ntt shares one twiddle lookup among all N2 lanes.
module sdf_ntt
  import reed_pkg::*;
#(
  parameter int unsigned N1 = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inverse,
  input  coeff_t      q,
  input  logic        in_valid,
  input  logic        in_sop,
  input  coeff_t      in_data,
  output logic [$clog2(N1)-1:0] tw_idx [$clog2(N1)],
  input  coeff_t      tw     [$clog2(N1)],
  output logic        out_valid,
  output logic        out_sop,
  output coeff_t      out_data
);
  localparam int unsigned LOGN1 = $clog2(N1);

  logic   sv_in  [LOGN1];
  logic   ss_in  [LOGN1];
  coeff_t sd_in  [LOGN1];
  logic   sv_out [LOGN1];
  logic   ss_out [LOGN1];
  coeff_t sd_out [LOGN1];

  for (genvar s = 0; s < int'(LOGN1); s++) begin : g_stage
    localparam int unsigned D = 1 << s;
    logic [$clog2(2*D)-1:0] idx;

    // forward: previous stage is s-1; inverse: previous stage is s+1
    if (s == 0) begin : g_first
      assign sv_in[s] = inverse ? sv_out[1 % LOGN1] : in_valid;
      assign ss_in[s] = inverse ? ss_out[1 % LOGN1] : in_sop;
      assign sd_in[s] = inverse ? sd_out[1 % LOGN1] : in_data;
    end else if (s == int'(LOGN1) - 1) begin : g_last
      assign sv_in[s] = inverse ? in_valid : sv_out[s-1];
      assign ss_in[s] = inverse ? in_sop   : ss_out[s-1];
      assign sd_in[s] = inverse ? in_data  : sd_out[s-1];
    end else begin : g_mid
      assign sv_in[s] = inverse ? sv_out[s+1] : sv_out[s-1];
      assign ss_in[s] = inverse ? ss_out[s+1] : ss_out[s-1];
      assign sd_in[s] = inverse ? sd_out[s+1] : sd_out[s-1];
    end

    sdf_stage #(.D(D)) u_stage (
      .clk, .rst_n, .inverse, .q,
      .in_valid (sv_in[s]), .in_sop (ss_in[s]), .in_data (sd_in[s]),
      .tw_idx   (idx),      .tw     (tw[s]),
      .out_valid(sv_out[s]), .out_sop(ss_out[s]), .out_data(sd_out[s])
    );
    assign tw_idx[s] = LOGN1'(idx);
  end

  assign out_valid = inverse ? sv_out[0] : sv_out[LOGN1-1];
  assign out_sop   = inverse ? ss_out[0] : ss_out[LOGN1-1];
  assign out_data  = inverse ? sd_out[0] : sd_out[LOGN1-1];
endmodule
