// reed_top: R = 4 REED chiplets joined in a uni-directional ring.
//
// Each chiplet is one reed_pu with its own HBM stack. Chiplet i sends the
// contents of its small C2C memory (an INTT result) to chiplet (i-1) mod R
// and receives from chiplet (i+1) mod R, so during a KeySwitch every chiplet
// forwards limbs around the ring while it keeps computing NTTs and key
// multiplications on the limb it already holds (non-blocking communication).
//
// The physical die-to-die links and the HBM stacks are not part of this RTL:
// link i starts at chiplet i's transmit port (link_tx_*[i]) and its far end
// (link_rx_*[i]) is wired here to chiplet (i-1) mod R. The link may hold off
// the sender with link_tx_ready and may deliver rows late or out of order,
// since every row carries its row number; the receiver holds it off with
// link_rx_ready outside its receive window. The HBM ports, the program
// (instruction memory) ports and the NTT constant ports are per chiplet;
// exec starts all chiplets in the same cycle.
// Ring size, direction and per-chiplet HBM follow the paper; the link and
// host interfaces are this design's.
module reed_top
  import reed_pkg::*;
#(
  parameter int unsigned R          = 4,
  parameter int unsigned N1         = 1024,
  parameter int unsigned N2         = 64,
  parameter int unsigned MODS       = 32,
  parameter int unsigned IMEM_DEPTH = 1024,
  localparam int unsigned RW        = $clog2(N1),
  localparam int unsigned CIW       = $clog2((N1 > N2) ? N1 : N2),
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // host
  input  logic            exec,
  output logic            busy      [R],
  output logic            halted    [R],
  input  logic            imem_we   [R],
  input  logic [IAW-1:0]  imem_addr [R],
  input  instr_t          imem_wdata[R],
  input  logic            cfg_we    [R],
  input  logic [2:0]      cfg_kind  [R],
  input  logic [MODW-1:0] cfg_mod   [R],
  input  logic [1:0]      cfg_sel   [R],
  input  logic [CIW-1:0]  cfg_idx   [R],
  input  coeff_t          cfg_data  [R],
  // HBM, per chiplet
  input  logic            hbm_we    [R][4],
  input  logic [RW-1:0]   hbm_waddr [R][4],
  input  coeff_t          hbm_wdata [R][4][N2],
  input  logic [RW-1:0]   hbm_raddr [R][2],
  output coeff_t          hbm_rdata [R][2][N2],
  // C2C links: link i carries chiplet i -> chiplet (i-1) mod R
  output logic            link_tx_valid [R],
  input  logic            link_tx_ready [R],
  output logic [RW-1:0]   link_tx_row   [R],
  output coeff_t          link_tx_data  [R][N2],
  input  logic            link_rx_valid [R],
  output logic            link_rx_ready [R],
  input  logic [RW-1:0]   link_rx_row   [R],
  input  coeff_t          link_rx_data  [R][N2]
);
  for (genvar i = 0; i < int'(R); i++) begin : g_chip
    localparam int unsigned SRC = (i + 1) % R;   // link feeding chiplet i
    reed_pu #(.N1(N1), .N2(N2), .MODS(MODS), .IMEM_DEPTH(IMEM_DEPTH)) u_pu (
      .clk, .rst_n,
      .imem_we(imem_we[i]), .imem_addr(imem_addr[i]), .imem_wdata(imem_wdata[i]),
      .exec, .busy(busy[i]), .halted(halted[i]),
      .cfg_we(cfg_we[i]), .cfg_kind(cfg_kind[i]), .cfg_mod(cfg_mod[i]),
      .cfg_sel(cfg_sel[i]), .cfg_idx(cfg_idx[i]), .cfg_data(cfg_data[i]),
      .hbm_we(hbm_we[i]), .hbm_waddr(hbm_waddr[i]), .hbm_wdata(hbm_wdata[i]),
      .hbm_raddr(hbm_raddr[i]), .hbm_rdata(hbm_rdata[i]),
      .tx_valid(link_tx_valid[i]), .tx_ready(link_tx_ready[i]),
      .tx_row(link_tx_row[i]), .tx_data(link_tx_data[i]),
      .rx_valid(link_rx_valid[SRC]), .rx_ready(link_rx_ready[SRC]), .rx_row(link_rx_row[SRC]),
      .rx_data(link_rx_data[SRC])
    );
  end
endmodule
