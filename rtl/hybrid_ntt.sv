// hybrid_ntt: transpose-free Hybrid NTT/INTT of an N = N1*N2 point negacyclic
// transform, fully pipelined with a throughput of one row (N2 coefficients)
// per cycle, i.e. one polynomial every N1 cycles.
//
// Data layout (as in the paper's memory-flow figure): a polynomial a lives in
// N2 lane memories of depth N1; the coefficient-domain polynomial is row-major
// (lane j, row i holds a[i*N2+j]) and the NTT-domain polynomial is
// column-major (lane k2, row k1 holds A[k1+N1*k2]), with
// A[k] = a(psi^(2k+1)) = sum_n a[n] psi^n omega^(nk), omega = psi^2.
//
// Forward flow (inverse=0):  PP -> SDF-NTT -> HP -> U-NTT
//   PP : a[i][j] * psi^(i*N2+j)  (two multipliers per lane: lane constant
//        psi^j, then a row factor psi^(N2*i) read from a row table)
//   SDF: N2 parallel N1-point column NTTs (sdf_ntt, Cooley-Tukey order)
//   HP : Hadamard product with omega^(j*k1), generated on the fly per lane as a
//        running product (starts at 1, multiplied by omega^j every row)
//   U  : N2-point row NTT across the lanes (unrolled_ntt)
// Inverse flow (inverse=1) runs the same units backwards:
//   U^-1 -> HP^-1 -> SDF^-1 (Gentleman-Sande order) -> PP^-1 (psi^-n * N^-1).
//
// Row order: the forward SDF needs its rows in bit-reversed order, so the
// caller reads input row bitrev(t) at step t; the forward result leaves in
// natural row order (out_row = t). The inverse reads rows in natural order
// and its result leaves in bit-reversed order (out_row = bitrev(t)). out_row
// is the row address at which to write each output row.
//
// Twiddle constants (all in Montgomery form) are loaded per RNS modulus
// through the cfg port before use:
//   kind 0: idx 0 = q, idx 1 = 2^W mod q (Montgomery one)
//   kind 1: PP row factor, sel 0: psi^(N2*i), sel 1: psi^(-N2*i) * N^-1 (i<N1)
//   kind 2: SDF twiddles, sel 0/1 = fwd/inv, idx 2^s+k: root1^((N1/2^(s+1))*k)
//           for stage s, k<2^s (root1 = omega^N2 or its inverse)
//   kind 3: lane constants, sel 0: psi^j, 1: psi^-j, 2: omega^j, 3: omega^-j
//   kind 4: U-NTT table, sel 0/1: root2^e (root2 = omega^N1 or inverse), e<N2/2
// Storing the SDF and U-NTT twiddles and generating the HP twiddles on the fly
// follows the paper's unit diagram (TW Stor./TW Gen.); the exact split and the
// table layout are this design's choice. mod_idx and inverse must stay
// constant while a polynomial is in flight. Latency: N1+log2(N1)+log2(N2)+2.
module hybrid_ntt
  import reed_pkg::*;
#(
  parameter int unsigned N1   = 1024,
  parameter int unsigned N2   = 64,
  parameter int unsigned MODS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // constant load port
  input  logic                     cfg_we,
  input  logic [2:0]               cfg_kind,
  input  logic [MODW-1:0]          cfg_mod,
  input  logic [1:0]               cfg_sel,
  input  logic [$clog2((N1 > N2) ? N1 : N2)-1:0] cfg_idx,
  input  coeff_t                   cfg_data,
  // operation
  input  logic                     inverse,
  input  logic [MODW-1:0]          mod_idx,
  input  logic                     in_valid,
  input  logic                     in_sop,
  input  coeff_t                   in_data [N2],
  output logic                     out_valid,
  output logic                     out_sop,
  output logic [$clog2(N1)-1:0]    out_row,
  output coeff_t                   out_data [N2],
  output coeff_t                   q_out
);
  localparam int unsigned LOGN1 = $clog2(N1);

  // ------------------------------------------------------------ constant store
  coeff_t qtab   [MODS];
  coeff_t onetab [MODS];
  coeff_t rowtab [MODS*2*N1];
  coeff_t lanec  [MODS*4][N2];
  coeff_t utab   [MODS*2][N2/2];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_kind)
        3'd0: if (cfg_idx == '0) qtab[32'(cfg_mod) % MODS] <= cfg_data;
              else onetab[32'(cfg_mod) % MODS] <= cfg_data;
        3'd1: rowtab[(32'(cfg_mod)*2 + 32'(cfg_sel[0]))*N1 + 32'(cfg_idx) % N1] <= cfg_data;
        3'd3: lanec[32'(cfg_mod)*4 + 32'(cfg_sel)][32'(cfg_idx) % N2] <= cfg_data;
        3'd4: utab[32'(cfg_mod)*2 + 32'(cfg_sel[0])][32'(cfg_idx) % (N2/2)] <= cfg_data;
        default: ;
      endcase
    end
  end

  coeff_t q, one;
  assign q     = qtab[32'(mod_idx) % MODS];
  assign one   = onetab[32'(mod_idx) % MODS];
  assign q_out = q;

  // ------------------------------------------------------------- stream wires
  logic   pp_iv, pp_is, pp_ov, pp_os;
  coeff_t pp_id [N2];
  coeff_t pp_od [N2];
  logic   sdf_iv, sdf_is;
  coeff_t sdf_id [N2];
  logic   sdf_ov [N2];
  logic   sdf_os [N2];
  coeff_t sdf_od [N2];
  logic   hp_iv, hp_is, hp_ov, hp_os;
  coeff_t hp_id [N2];
  coeff_t hp_od [N2];
  logic   u_iv, u_is, u_ov, u_os;
  coeff_t u_id [N2];
  coeff_t u_od [N2];

  // bi-directional routing between the four units
  assign pp_iv  = inverse ? sdf_ov[0] : in_valid;
  assign pp_is  = inverse ? sdf_os[0] : in_sop;
  assign pp_id  = inverse ? sdf_od    : in_data;
  assign sdf_iv = inverse ? hp_ov     : pp_ov;
  assign sdf_is = inverse ? hp_os     : pp_os;
  assign sdf_id = inverse ? hp_od     : pp_od;
  assign hp_iv  = inverse ? u_ov      : sdf_ov[0];
  assign hp_is  = inverse ? u_os      : sdf_os[0];
  assign hp_id  = inverse ? u_od      : sdf_od;
  assign u_iv   = inverse ? in_valid  : hp_ov;
  assign u_is   = inverse ? in_sop    : hp_os;
  assign u_id   = inverse ? in_data   : hp_od;

  // ------------------------------------------------------------------ PP unit
  logic [LOGN1-1:0] pp_cnt, pp_pos;
  logic             pp_v1, pp_s1, pp_v2, pp_s2;
  coeff_t           pp_m1 [N2];
  coeff_t           pp_row;
  assign pp_pos = pp_is ? '0 : pp_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pp_cnt <= '0;
      pp_v1  <= 1'b0;
      pp_s1  <= 1'b0;
      pp_v2  <= 1'b0;
      pp_s2  <= 1'b0;
      pp_row <= '0;
      for (int j = 0; j < int'(N2); j++) begin
        pp_m1[j] <= '0;
        pp_od[j] <= '0;
      end
    end else begin
      if (pp_iv) pp_cnt <= pp_pos + 1'b1;
      pp_v1  <= pp_iv;
      pp_s1  <= pp_iv & pp_is;
      pp_row <= rowtab[(32'(mod_idx)*2 + 32'(inverse))*N1 + bitrev(32'(pp_pos), LOGN1)];
      for (int j = 0; j < int'(N2); j++)
        pp_m1[j] <= mont_mul(pp_id[j], lanec[32'(mod_idx)*4 + 32'(inverse)][j], q);
      pp_v2  <= pp_v1;
      pp_s2  <= pp_s1;
      for (int j = 0; j < int'(N2); j++) pp_od[j] <= mont_mul(pp_m1[j], pp_row, q);
    end
  end
  assign pp_ov = pp_v2;
  assign pp_os = pp_s2;

  // ------------------------------------------------------------- SDF-NTT unit
  logic [LOGN1-1:0] tw_idx [N2][LOGN1];
  coeff_t           sdf_tw [LOGN1];

  for (genvar s = 0; s < int'(LOGN1); s++) begin : g_tw
    localparam int unsigned H = 1 << s;
    coeff_t stab [MODS*2*H];
    always_ff @(posedge clk) begin
      if (cfg_we && cfg_kind == 3'd2 && 32'(cfg_idx) >= H && 32'(cfg_idx) < 2*H)
        stab[(32'(cfg_mod)*2 + 32'(cfg_sel[0]))*H + (32'(cfg_idx) - H)] <= cfg_data;
    end
    assign sdf_tw[s] = stab[(32'(mod_idx)*2 + 32'(inverse))*H + (32'(tw_idx[0][s]) % H)];
  end

  for (genvar j = 0; j < int'(N2); j++) begin : g_lane
    sdf_ntt #(.N1(N1)) u_sdf (
      .clk, .rst_n, .inverse, .q,
      .in_valid (sdf_iv), .in_sop (sdf_is), .in_data (sdf_id[j]),
      .tw_idx   (tw_idx[j]), .tw (sdf_tw),
      .out_valid(sdf_ov[j]), .out_sop (sdf_os[j]), .out_data (sdf_od[j])
    );
  end

  // ------------------------------------------------------------------ HP unit
  coeff_t hp_run [N2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hp_ov <= 1'b0;
      hp_os <= 1'b0;
      for (int j = 0; j < int'(N2); j++) begin
        hp_run[j] <= '0;
        hp_od[j]  <= '0;
      end
    end else begin
      hp_ov <= hp_iv;
      hp_os <= hp_iv & hp_is;
      if (hp_iv) begin
        for (int j = 0; j < int'(N2); j++) begin
          hp_od[j]  <= mont_mul(hp_id[j], hp_is ? one : hp_run[j], q);
          hp_run[j] <= mont_mul(hp_is ? one : hp_run[j],
                                lanec[32'(mod_idx)*4 + 2 + 32'(inverse)][j], q);
        end
      end
    end
  end

  // ---------------------------------------------------------------- U-NTT unit
  unrolled_ntt #(.N2(N2), .TAGW(1)) u_untt (
    .clk, .rst_n, .q, .tw (utab[32'(mod_idx)*2 + 32'(inverse)]),
    .in_valid (u_iv), .in_sop (u_is), .in_tag (1'b0), .in_data (u_id),
    .out_valid(u_ov), .out_sop (u_os), .out_tag (), .out_data (u_od)
  );

  // ------------------------------------------------------------------- output
  logic [LOGN1-1:0] o_cnt, o_pos;
  assign out_valid = inverse ? pp_ov : u_ov;
  assign out_sop   = inverse ? pp_os : u_os;
  assign out_data  = inverse ? pp_od : u_od;
  assign o_pos     = out_sop ? '0 : o_cnt;
  assign out_row   = inverse ? LOGN1'(bitrev(32'(o_pos), LOGN1)) : o_pos;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         o_cnt <= '0;
    else if (out_valid) o_cnt <= o_pos + 1'b1;
  end
endmodule
