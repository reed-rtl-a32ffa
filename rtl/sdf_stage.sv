// sdf_stage: one radix-2 single-path delay-feedback (SDF) butterfly stage.
//
// The stage pairs samples D positions apart (D = half the butterfly span).
// During the first D positions of each 2D block it stores the incoming sample
// in a D-deep delay line and emits what the delay line returns (the "difference"
// outputs of the previous block). During the second D positions it combines
// the stored sample x with the incoming one y, emits the "sum" output at once
// and stores the other output for emission D cycles later. Every sample thus
// leaves the stage exactly D+1 cycles after it arrived, in the same order.
//
// inverse=0 selects a Cooley-Tukey butterfly (t = y*w; x+t, x-t) and
// inverse=1 a Gentleman-Sande butterfly (x+y, (x-y)*w); sdf_ntt chains the
// stages in opposite orders for the two directions. The stage asks for the
// twiddle of the current pair through tw_idx (k = position-D, k < D) and
// expects tw (Montgomery form) combinationally in the same cycle.
// The valid and start-of-polynomial flags ride in the delay line with the
// data; in_sop restarts the position count, so polynomials may follow each
// other back to back or with gaps. The stage runs every cycle (no stall).
module sdf_stage
  import reed_pkg::*;
#(
  parameter int unsigned D = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inverse,
  input  coeff_t      q,
  input  logic        in_valid,
  input  logic        in_sop,
  input  coeff_t      in_data,
  output logic [$clog2(2*D)-1:0] tw_idx,
  input  coeff_t      tw,
  output logic        out_valid,
  output logic        out_sop,
  output coeff_t      out_data
);
  localparam int unsigned CW = $clog2(2*D);
  localparam int unsigned PW = (D > 1) ? $clog2(D) : 1;

  typedef struct packed {
    logic   valid;
    logic   sop;
    coeff_t data;
  } elem_t;

  coeff_t        dl_data [D];     // delay line data (an SRAM of depth D)
  logic [1:0]    dl_flag [D];     // delay line valid/sop flags (reset)
  logic [PW-1:0] ptr;
  logic [CW-1:0] cnt;
  logic [CW-1:0] pos;
  elem_t         head, push;
  coeff_t        u, v, t;
  logic          second;

  assign pos    = in_sop ? '0 : cnt;
  assign second = (pos >= CW'(D));
  assign head   = '{valid: dl_flag[ptr][1], sop: dl_flag[ptr][0], data: dl_data[ptr]};
  assign tw_idx = pos - CW'(D);

  always_comb begin
    t = '0;
    u = '0;
    v = '0;
    if (!inverse) begin
      t = mont_mul(in_data, tw, q);
      u = mod_add(head.data, t, q);
      v = mod_sub(head.data, t, q);
    end else begin
      u = mod_add(head.data, in_data, q);
      t = mod_sub(head.data, in_data, q);
      v = mont_mul(t, tw, q);
    end
    push = second ? '{valid: in_valid, sop: in_sop, data: v}
                  : '{valid: in_valid, sop: in_sop, data: in_data};
  end

  always_ff @(posedge clk) dl_data[ptr] <= push.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      ptr       <= '0;
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_data  <= '0;
      for (int i = 0; i < int'(D); i++) dl_flag[i] <= '0;
    end else begin
      cnt       <= pos + 1'b1;
      ptr       <= (D > 1) ? PW'((32'(ptr) + 1) % D) : '0;
      dl_flag[ptr] <= {push.valid, push.sop};
      out_valid <= head.valid;
      out_sop   <= head.sop;
      out_data  <= second ? u : head.data;
    end
  end
endmodule
