// poly_mem: ping-pong polynomial buffer made of N2 lane SRAMs.
//
// Holds two halves, each one polynomial limb as N1 rows of N2 coefficients
// (lane j of every row is one SRAM bank of depth N1, so a whole row is read or
// written per cycle). One half serves the processing unit while the other is
// filled or drained by the off-chip side (HBM or the chiplet-to-chiplet link);
// swap exchanges the roles, which is how prefetching overlaps with compute.
// Each of the four ports names its half through a parameter:
//   compute read  -> active half;   compute write -> active (CWR_OTHER=0) or
//   inactive half (CWR_OTHER=1);   external read -> inactive (XRD_OTHER=1) or
//   active half (0);               external write -> inactive half.
// The C2C buffer uses CWR_OTHER=1, XRD_OTHER=0: the NTT writes a fresh INTT
// result into the half being received into, and the link sends the half being
// processed. Reads have one cycle of latency (synchronous SRAM); if both write
// ports address the same half and row in one cycle the compute write wins.
// The split into two halves follows the paper; the port arrangement is this
// design's.
module poly_mem
  import reed_pkg::*;
#(
  parameter int unsigned N1        = 1024,
  parameter int unsigned N2        = 64,
  parameter bit          CWR_OTHER = 1'b0,
  parameter bit          XRD_OTHER = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  swap,
  output logic                  active,      // index of the half the PU works on
  // compute side
  input  logic [$clog2(N1)-1:0] c_raddr,
  output coeff_t                c_rdata [N2],
  input  logic                  c_we,
  input  logic [$clog2(N1)-1:0] c_waddr,
  input  coeff_t                c_wdata [N2],
  // external side (HBM or C2C)
  input  logic [$clog2(N1)-1:0] x_raddr,
  output coeff_t                x_rdata [N2],
  input  logic                  x_we,
  input  logic [$clog2(N1)-1:0] x_waddr,
  input  coeff_t                x_wdata [N2]
);
  coeff_t mem [2][N1][N2];
  logic   sel;

  assign active = sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= ~sel;
  end

  always_ff @(posedge clk) begin
    c_rdata <= mem[sel][c_raddr];
    x_rdata <= mem[sel ^ XRD_OTHER][x_raddr];
    if (x_we && !(c_we && CWR_OTHER && c_waddr == x_waddr))
      mem[~sel][x_waddr] <= x_wdata;
    if (c_we)
      mem[sel ^ CWR_OTHER][c_waddr] <= c_wdata;
  end
endmodule
