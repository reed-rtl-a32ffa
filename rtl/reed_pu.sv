// reed_pu: one REED processing unit (the compute part of one chiplet).
//
// Five ping-pong polynomial memories surround the arithmetic units:
//   ACC0 (HBM read/write), IN (filled from HBM), ACC1 (HBM read/write),
//   KEY (filled from HBM, switching key ksk0) and the small memory SM that
//   is shared with the chiplet-to-chiplet (C2C) link;
// one hybrid NTT/INTT unit, two MAS (multiply/add/subtract) units, two
// automorphism units, a PRNG that generates the key part ksk1 on chip, and
// the instruction controller. All memories are N1 rows of N2 coefficients;
// every unit consumes and produces one row per cycle.
//
// Operation. ins_ctrl issues one micro-instruction at a time. For NTT, MAS and
// AUT the unit reads the source rows 0..N1-1 (bit-reversed row order for the
// forward NTT) one per cycle from the active halves, streams them through
// the selected unit and writes each result row, at the row the unit names,
// into the destination memory; the instruction completes when N1 rows have
// been written. With keymul set, an NTT is fused with the key multiplication
// of Fig. 10: every NTT output row d is combined at once with the matching
// rows of KEY, ACC0 and ACC1, ACC0 += d*ksk0 in the top MAS and
// ACC1 += d*PRNG in the bottom MAS, so the products never go to memory.
// SWAP flips ping-pong halves, SEED reseeds the PRNG (18 cycles), XFER starts
// sending the active half of SM to the next chiplet of the ring in the
// background, and XWAIT waits until that transfer has finished and a whole
// polynomial has arrived from the other neighbour into the inactive half.
//
// Interfaces. The HBM side of ACC0, IN, ACC1 and KEY is a plain row port
// (write index order ACC0, IN, ACC1, KEY; read ports on ACC0 and ACC1 only,
// since only those two write back). It works on the inactive halves and can
// run during any instruction. The C2C side is a row stream (tx_valid/
// tx_ready with the row number) and a receive stream (rx_valid/rx_ready)
// that accepts rows only between XFER and the end of XWAIT.
// Timing, from issue to completion: NTT/INTT 2*N1 + log2 N1 + log2 N2 + 3
// cycles (N1 to stream the rows in, the NTT latency, N1 to stream them out),
// fused NTT + key multiplication 3 more, MAS N1 + 3, AUT N1 + log2 N2 + 2;
// ins_ctrl adds 2 cycles between instructions.
// The memory set, the unit set, the fused key multiplication, the PRNG for
// ksk1 and the non-blocking ring transfer follow the paper. Issuing one
// instruction at a time, the row-stream interfaces and the XWAIT semantics
// are this design's choices.
module reed_pu
  import reed_pkg::*;
#(
  parameter int unsigned N1         = 1024,
  parameter int unsigned N2         = 64,
  parameter int unsigned MODS       = 32,
  parameter int unsigned IMEM_DEPTH = 1024,
  localparam int unsigned RW        = $clog2(N1),
  localparam int unsigned CIW       = $clog2((N1 > N2) ? N1 : N2)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // program and control
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t                        imem_wdata,
  input  logic                          exec,
  output logic                          busy,
  output logic                          halted,
  // NTT constant tables
  input  logic                          cfg_we,
  input  logic [2:0]                    cfg_kind,
  input  logic [MODW-1:0]               cfg_mod,
  input  logic [1:0]                    cfg_sel,
  input  logic [CIW-1:0]                cfg_idx,
  input  coeff_t                        cfg_data,
  // HBM side: writes into ACC0, IN, ACC1, KEY; reads from ACC0, ACC1
  input  logic                          hbm_we    [4],
  input  logic [RW-1:0]                 hbm_waddr [4],
  input  coeff_t                        hbm_wdata [4][N2],
  input  logic [RW-1:0]                 hbm_raddr [2],
  output coeff_t                        hbm_rdata [2][N2],
  // C2C ring link
  output logic                          tx_valid,
  input  logic                          tx_ready,
  output logic [RW-1:0]                 tx_row,
  output coeff_t                        tx_data [N2],
  input  logic                          rx_valid,
  output logic                          rx_ready,
  input  logic [RW-1:0]                 rx_row,
  input  coeff_t                        rx_data [N2]
);
  localparam int unsigned NMEM = 5;

  // ------------------------------------------------------------ controller
  logic   start;
  instr_t ins;
  logic [6:0] done;

  ins_ctrl #(.IMEM_DEPTH(IMEM_DEPTH)) u_ctrl (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .exec, .busy, .halted,
    .start, .instr(ins), .done
  );

  // ------------------------------------------------------------ memories
  logic [RW-1:0] m_raddr [NMEM];
  coeff_t        m_rdata [NMEM][N2];
  logic          m_we    [NMEM];
  logic [RW-1:0] m_waddr [NMEM];
  coeff_t        m_wdata [NMEM][N2];
  logic [RW-1:0] m_xraddr[NMEM];
  coeff_t        m_xrdata[NMEM][N2];
  logic          m_xwe   [NMEM];
  logic [RW-1:0] m_xwaddr[NMEM];
  coeff_t        m_xwdata[NMEM][N2];
  logic          m_swap  [NMEM];
  logic          m_active[NMEM];

  for (genvar m = 0; m < int'(NMEM); m++) begin : g_mem
    poly_mem #(
      .N1(N1), .N2(N2),
      .CWR_OTHER(m == int'(MEM_SM)),
      .XRD_OTHER(m != int'(MEM_SM))
    ) u_mem (
      .clk, .rst_n,
      .swap(m_swap[m]), .active(m_active[m]),
      .c_raddr(m_raddr[m]), .c_rdata(m_rdata[m]),
      .c_we(m_we[m]), .c_waddr(m_waddr[m]), .c_wdata(m_wdata[m]),
      .x_raddr(m_xraddr[m]), .x_rdata(m_xrdata[m]),
      .x_we(m_xwe[m]), .x_waddr(m_xwaddr[m]), .x_wdata(m_xwdata[m])
    );
    assign m_swap[m] = start && (ins.opcode == OP_SWAP) && ins.swap_mask[m];
  end

  // HBM and C2C sides
  for (genvar m = 0; m < 4; m++) begin : g_hbm
    assign m_xwe[m]    = hbm_we[m];
    assign m_xwaddr[m] = hbm_waddr[m];
    assign m_xwdata[m] = hbm_wdata[m];
  end
  assign m_xraddr[MEM_ACC0] = hbm_raddr[0];
  assign m_xraddr[MEM_ACC1] = hbm_raddr[1];
  assign m_xraddr[MEM_IN]   = '0;
  assign m_xraddr[MEM_KEY]  = '0;
  assign hbm_rdata[0]       = m_xrdata[MEM_ACC0];
  assign hbm_rdata[1]       = m_xrdata[MEM_ACC1];
  assign m_xwe[MEM_SM]      = rx_valid && rx_ready;
  assign m_xwaddr[MEM_SM]   = rx_row;
  assign m_xwdata[MEM_SM]   = rx_data;

  // ------------------------------------------------------------ row sequencer
  logic          run, rd_on, is_ntt, is_mas, is_aut, fused;
  logic [RW-1:0] rd_t, rd_row;
  logic [RW:0]   wr_cnt;
  logic          rv_valid, rv_sop;
  logic [RW-1:0] rv_row;

  assign is_ntt = (ins.opcode == OP_NTT);
  assign is_mas = (ins.opcode == OP_MAS);
  assign is_aut = (ins.opcode == OP_AUT);
  assign fused  = is_ntt && ins.keymul;
  assign rd_row = (is_ntt && !ins.inverse) ? RW'(bitrev(32'(rd_t), RW)) : rd_t;

  // ------------------------------------------------------------ units
  coeff_t        q;
  logic          ntt_ov, ntt_osop;
  logic [RW-1:0] ntt_orow;
  coeff_t        ntt_odata [N2];
  coeff_t        src_a [N2], src_b [N2], src_c [N2];

  hybrid_ntt #(.N1(N1), .N2(N2), .MODS(MODS)) u_ntt (
    .clk, .rst_n,
    .cfg_we, .cfg_kind, .cfg_mod, .cfg_sel, .cfg_idx, .cfg_data,
    .inverse(ins.inverse), .mod_idx(ins.mod_idx),
    .in_valid(rv_valid && is_ntt), .in_sop(rv_sop), .in_data(src_a),
    .out_valid(ntt_ov), .out_sop(ntt_osop), .out_row(ntt_orow),
    .out_data(ntt_odata), .q_out(q)
  );

  // operand selection for plain MAS/AUT/NTT instructions
  function automatic coeff_t pick(mem_id_e id, coeff_t rd [NMEM][N2],
                                  coeff_t rnd, int unsigned lane);
    unique case (id)
      MEM_ACC0, MEM_IN, MEM_ACC1, MEM_KEY, MEM_SM: return rd[id][lane];
      SRC_PRNG: return rnd;
      default:  return '0;
    endcase
  endfunction

  coeff_t prng_c [N2];
  logic   prng_ready, prng_next;

  always_comb begin
    for (int j = 0; j < int'(N2); j++) begin
      src_a[j] = pick(ins.src_a, m_rdata, prng_c[j], j);
      src_b[j] = pick(ins.src_b, m_rdata, prng_c[j], j);
      src_c[j] = pick(ins.src_c, m_rdata, prng_c[j], j);
    end
  end

  // fused key multiplication: NTT output row, one cycle later, meets the
  // KEY/ACC rows read at that row number.
  logic          kd_valid;
  logic [RW-1:0] kd_row;
  coeff_t        kd_data [N2];

  always_ff @(posedge clk) kd_data <= ntt_odata;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kd_valid <= 1'b0;
      kd_row   <= '0;
    end else begin
      kd_valid <= ntt_ov && fused;
      kd_row   <= ntt_orow;
    end
  end

  logic          mas_iv [2];
  logic [RW-1:0] mas_itag [2];
  mas_op_e       mas_op [2];
  coeff_t        mas_a [2][N2], mas_b [2][N2], mas_c [2][N2];
  logic          mas_ov [2];
  logic [RW-1:0] mas_otag [2];
  coeff_t        mas_y [2][N2];

  always_comb begin
    for (int u = 0; u < 2; u++) begin
      if (fused) begin
        mas_iv[u]   = kd_valid;
        mas_itag[u] = kd_row;
        mas_op[u]   = MAS_MAC;
        for (int j = 0; j < int'(N2); j++) begin
          mas_a[u][j] = kd_data[j];
          mas_b[u][j] = (u == 0) ? m_rdata[MEM_KEY][j] : prng_c[j];
          mas_c[u][j] = (u == 0) ? m_rdata[MEM_ACC0][j] : m_rdata[MEM_ACC1][j];
        end
      end else begin
        mas_iv[u]   = rv_valid && is_mas && (ins.unit == u[0]);
        mas_itag[u] = rv_row;
        mas_op[u]   = ins.mas_op;
        mas_a[u]    = src_a;
        mas_b[u]    = src_b;
        mas_c[u]    = src_c;
      end
    end
  end

  for (genvar u = 0; u < 2; u++) begin : g_mas
    mas_unit #(.N2(N2), .TAGW(RW)) u_mas (
      .clk, .rst_n, .op(mas_op[u]), .q,
      .in_valid(mas_iv[u]), .in_tag(mas_itag[u]),
      .a(mas_a[u]), .b(mas_b[u]), .c(mas_c[u]),
      .out_valid(mas_ov[u]), .out_tag(mas_otag[u]), .y(mas_y[u])
    );
  end

  logic          aut_ov [2];
  logic [RW-1:0] aut_orow [2];
  coeff_t        aut_y [2][N2];

  for (genvar u = 0; u < 2; u++) begin : g_aut
    aut_unit #(.N1(N1), .N2(N2)) u_aut (
      .clk, .rst_n, .gle(ins.imm[$clog2(2*N1*N2)-1:0]),
      .in_valid(rv_valid && is_aut && (ins.unit == u[0])),
      .in_row(rv_row), .in_data(src_a),
      .out_valid(aut_ov[u]), .out_row(aut_orow[u]), .out_data(aut_y[u])
    );
  end

  assign prng_next = fused ? kd_valid
                           : (rv_valid && is_mas && (ins.src_b == SRC_PRNG));

  prng_unit #(.N2(N2)) u_prng (
    .clk, .rst_n,
    .load(start && (ins.opcode == OP_SEED)), .seed(ins.imm),
    .next(prng_next), .q, .ready(prng_ready), .coeff(prng_c)
  );

  // ------------------------------------------------------------ write back
  logic          wb_v;
  logic [RW-1:0] wb_row;
  coeff_t        wb_data [N2];

  always_comb begin
    wb_v    = 1'b0;
    wb_row  = '0;
    wb_data = ntt_odata;
    if (is_ntt) begin
      wb_v = fused ? mas_ov[0] : ntt_ov;
      wb_row = ntt_orow;
    end else if (is_mas) begin
      wb_v    = mas_ov[ins.unit];
      wb_row  = mas_otag[ins.unit];
      wb_data = mas_y[ins.unit];
    end else if (is_aut) begin
      wb_v    = aut_ov[ins.unit];
      wb_row  = aut_orow[ins.unit];
      wb_data = aut_y[ins.unit];
    end
  end

  for (genvar m = 0; m < int'(NMEM); m++) begin : g_port
    always_comb begin
      m_raddr[m] = rd_row;
      m_we[m]    = wb_v && run && (ins.dst == mem_id_e'(m));
      m_waddr[m] = wb_row;
      m_wdata[m] = wb_data;
      if (fused && (m == int'(MEM_ACC0) || m == int'(MEM_ACC1) ||
                    m == int'(MEM_KEY))) begin
        m_raddr[m] = ntt_orow;
        m_we[m]    = 1'b0;
        if (m != int'(MEM_KEY)) begin
          m_we[m]    = mas_ov[m == int'(MEM_ACC1)] && run;
          m_waddr[m] = mas_otag[m == int'(MEM_ACC1)];
          m_wdata[m] = mas_y[m == int'(MEM_ACC1)];
        end
      end
    end
  end

  // ------------------------------------------------------------ sequencing
  logic op_done;
  assign op_done = run && wb_v && (wr_cnt == (RW+1)'(N1 - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      rd_on    <= 1'b0;
      rd_t     <= '0;
      wr_cnt   <= '0;
      rv_valid <= 1'b0;
      rv_sop   <= 1'b0;
      rv_row   <= '0;
    end else begin
      rv_valid <= rd_on;
      rv_sop   <= rd_on && (rd_t == '0);
      rv_row   <= rd_row;
      if (start && (is_ntt || is_mas || is_aut)) begin
        run    <= 1'b1;
        rd_on  <= 1'b1;
        rd_t   <= '0;
        wr_cnt <= '0;
      end else begin
        if (rd_on) begin
          rd_t <= rd_t + 1'b1;
          if (rd_t == RW'(N1 - 1)) rd_on <= 1'b0;
        end
        if (run && wb_v) wr_cnt <= wr_cnt + 1'b1;
        if (op_done) run <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ C2C transfer
  // The receive window opens with XFER and closes when XWAIT completes; rows
  // are accepted only inside it and only until a whole limb has arrived, so
  // a faster neighbour cannot overwrite the limb about to be swapped in.
  logic          tx_busy, tx_hs, rx_win;
  logic [RW:0]   rx_cnt;

  assign tx_hs              = tx_valid && tx_ready;
  assign tx_valid           = tx_busy;
  assign tx_data            = m_xrdata[MEM_SM];
  assign m_xraddr[MEM_SM]   = (!tx_busy) ? '0 : (tx_hs ? tx_row + 1'b1 : tx_row);
  assign rx_ready           = rx_win && (rx_cnt != (RW+1)'(N1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_busy <= 1'b0;
      tx_row  <= '0;
      rx_cnt  <= '0;
      rx_win  <= 1'b0;
    end else begin
      if (start && ins.opcode == OP_XFER) begin
        tx_busy <= 1'b1;
        tx_row  <= '0;
        rx_win  <= 1'b1;
        rx_cnt  <= '0;
      end else begin
        if (tx_hs) begin
          tx_row <= tx_row + 1'b1;
          if (tx_row == RW'(N1 - 1)) tx_busy <= 1'b0;
        end
        if (rx_valid && rx_ready) rx_cnt <= rx_cnt + 1'b1;
        if (ins.opcode == OP_XWAIT && done[6]) rx_win <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ done lines
  assign done[0] = op_done && is_ntt;
  assign done[1] = op_done && is_mas && !ins.unit;
  assign done[2] = op_done && is_mas &&  ins.unit;
  assign done[3] = op_done && is_aut && !ins.unit;
  assign done[4] = op_done && is_aut &&  ins.unit;
  assign done[5] = prng_ready;
  assign done[6] = !tx_busy && rx_win && (rx_cnt == (RW+1)'(N1));
endmodule
