// tb_reed_pu: runs micro-instruction programs on one processing unit.
//
// Small size: N1 = 16 rows of N2 = 4 lanes (N = 64), two RNS moduli.
// The testbench plays host, HBM and the neighbouring chiplets. It loads the
// NTT tables, fills IN, KEY, ACC0 and ACC1 through the HBM ports, and runs:
//   program A: SWAP; SEED; NTT+keymul (ACC0 += NTT(IN)*KEY,
//              ACC1 += NTT(IN)*PRNG); AUT (bottom unit) ACC1 -> IN;
//              MAS MAC (bottom unit) ACC0 = IN*PRNG + ACC0; INTT ACC0 -> SM;
//              SWAP; HALT
//   program B: XFER; NTT SM -> ACC0 under the second modulus (runs while the
//              link is busy); XWAIT; SWAP; HALT
//   program C: XFER; XWAIT; HALT  (sends what program B received)
// Results are read back through the HBM read ports and the C2C transmit
// stream and compared with a direct O(N^2) negacyclic NTT, the slot
// permutation of the automorphism and a bit-serial Trivium model of the
// PRNG. The link model holds off tx_ready at random and sends its own
// polynomial at a random pace. Cycle counts from issue to completion are
// checked for NTT (2*N1 + log2 N1 + log2 N2 + 3), fused NTT (+3), MAS
// (N1 + 3) and AUT (N1 + log2 N2 + 2), and program B must finish its NTT
// before the transfer ends (non-blocking communication).
`timescale 1ns/1ps
module tb_reed_pu;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N1 = 16, N2 = 4, N = N1 * N2, MODS = 2;
  localparam int unsigned L1 = $clog2(N1), L2 = $clog2(N2);
  localparam u64 QS [2] = '{64'h20000000140001, 64'h20000000280001};
  localparam u64 GS [2] = '{64'd3, 64'd5};
  localparam logic [63:0] SEED = 64'h0123456789abcdef;
  localparam int GLE = 5;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic imem_we = 0, exec = 0, busy, halted;
  logic [9:0] imem_addr = 0;
  instr_t imem_wdata = '0;
  logic cfg_we = 0; logic [2:0] cfg_kind = 0; logic [MODW-1:0] cfg_mod = 0;
  logic [1:0] cfg_sel = 0; logic [L1-1:0] cfg_idx = 0; coeff_t cfg_data = 0;
  logic hbm_we [4]; logic [L1-1:0] hbm_waddr [4]; coeff_t hbm_wdata [4][N2];
  logic [L1-1:0] hbm_raddr [2]; coeff_t hbm_rdata [2][N2];
  logic tx_valid, tx_ready = 0; logic [L1-1:0] tx_row; coeff_t tx_data [N2];
  logic rx_valid = 0, rx_ready; logic [L1-1:0] rx_row = 0; coeff_t rx_data [N2];

  reed_pu #(.N1(N1), .N2(N2), .MODS(MODS), .IMEM_DEPTH(1024)) dut (.*);

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog: pc=%0d opcode=%0d tx_busy=%0d rx_cnt=%0d", dut.u_ctrl.pc, dut.ins.opcode, dut.tx_busy, dut.rx_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- references
  function automatic void ntt_ref(const ref u64 a[N], input u64 q, input u64 g, ref u64 r[N]);
    u64 psi, w, x, acc;
    psi = psi_of(q, g, N);
    for (int k = 0; k < int'(N); k++) begin
      w = powm(psi, u64'(2 * k + 1), q); x = 1; acc = 0;
      for (int n = 0; n < int'(N); n++) begin
        acc = addm(acc, mulm(a[n], x, q), q); x = mulm(x, w, q);
      end
      r[k] = acc;
    end
  endfunction

  function automatic void intt_ref(const ref u64 A[N], input u64 q, input u64 g, ref u64 r[N]);
    u64 ipsi, w, x, acc, ninv;
    ipsi = invm(psi_of(q, g, N), q);
    ninv = invm(u64'(N), q);
    for (int n = 0; n < int'(N); n++) begin
      w = powm(ipsi, u64'(n), q); x = 1; acc = 0;
      for (int k = 0; k < int'(N); k++) begin
        acc = addm(acc, mulm(A[k], x, q), q);
        x = mulm(x, mulm(w, w, q), q);
      end
      r[n] = mulm(mulm(acc, powm(ipsi, u64'(n), q), q), ninv, q);
      // acc = sum_k A[k] psi^(-2kn); times psi^(-n) gives psi^(-(2k+1)n)
    end
  endfunction

  // slot k of an NTT-domain polynomial lives at row k % N1, lane k / N1;
  // coefficient n of a coefficient-domain polynomial at row n / N2, lane n % N2
  function automatic int ntt_pos(int row, int lane); return row + N1 * lane; endfunction
  function automatic int coef_pos(int row, int lane); return row * N2 + lane; endfunction

  // ---------------------------------------------------------- helpers
  task automatic hbm_fill(int m, const ref u64 v[N], input bit ntt_dom);
    for (int r = 0; r < int'(N1); r++) begin
      @(negedge clk);
      hbm_we[m] = 1; hbm_waddr[m] = L1'(r);
      for (int j = 0; j < int'(N2); j++)
        hbm_wdata[m][j] = v[ntt_dom ? ntt_pos(r, j) : coef_pos(r, j)];
    end
    @(negedge clk); hbm_we[m] = 0;
  endtask

  task automatic hbm_read(int p, ref u64 v[N], input bit ntt_dom);
    for (int r = 0; r <= int'(N1); r++) begin
      @(negedge clk);
      if (r > 0)
        for (int j = 0; j < int'(N2); j++)
          v[ntt_dom ? ntt_pos(r - 1, j) : coef_pos(r - 1, j)] = hbm_rdata[p][j];
      hbm_raddr[p] = L1'(r % N1);
    end
  endtask

  function automatic void cmp(string what, const ref u64 got[N], const ref u64 exp[N]);
    int bad = 0;
    for (int k = 0; k < int'(N); k++) begin
      checks++;
      if (got[k] != exp[k]) begin
        failures++; bad++;
        if (bad < 3) $display("%s[%0d] got %h exp %h", what, k, got[k], exp[k]);
      end
    end
  endfunction

  instr_t prog [$];
  function automatic instr_t mk(opcode_e op, mem_id_e a = MEM_IN, mem_id_e b = SRC_ZERO,
                                mem_id_e c = SRC_ZERO, mem_id_e d = MEM_ACC0);
    instr_t i = '0;
    i.opcode = op; i.src_a = a; i.src_b = b; i.src_c = c; i.dst = d;
    return i;
  endfunction

  task automatic run_prog();
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk); imem_we = 1; imem_addr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0; exec = 1;
    @(negedge clk); exec = 0;
    while (!halted) @(negedge clk);
  endtask

  // ---------------------------------------------------------- timing monitor
  int t_issue, n_ntt = 0, n_fused = 0, n_mas = 0, n_aut = 0, t_ntt_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.start) t_issue = cyc;
    if (dut.done[0]) begin
      checks++;
      t_ntt_done = cyc;
      if (dut.ins.keymul) begin
        n_fused++;
        if (cyc - t_issue != 2 * N1 + L1 + L2 + 6) begin
          failures++; $display("fused NTT took %0d", cyc - t_issue);
        end
      end else begin
        n_ntt++;
        if (cyc - t_issue != 2 * N1 + L1 + L2 + 3) begin
          failures++; $display("NTT took %0d", cyc - t_issue);
        end
      end
    end
    if (dut.done[1] || dut.done[2]) begin
      checks++; n_mas++;
      if (cyc - t_issue != N1 + 3) begin failures++; $display("MAS took %0d", cyc - t_issue); end
    end
    if (dut.done[3] || dut.done[4]) begin
      checks++; n_aut++;
      if (cyc - t_issue != N1 + L2 + 2) begin failures++; $display("AUT took %0d", cyc - t_issue); end
    end
  end

  // ---------------------------------------------------------- link model
  u64 txp [N];
  int tx_rows = 0, t_tx_end = 0, stalls = 0;
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && !tx_ready) stalls++;
    if (tx_valid && tx_ready) begin
      for (int j = 0; j < int'(N2); j++) txp[coef_pos(int'(tx_row), j)] = tx_data[j];
      tx_rows++;
      t_tx_end = cyc;
    end
  end
  always @(negedge clk) tx_ready = ($urandom % 4 == 0);

  u64 rxp [N];
  task automatic link_send();
    int order [N1];
    for (int r = 0; r < int'(N1); r++) order[r] = r;
    order.shuffle();
    for (int r = 0; r < int'(N1); r++) begin
      rx_valid = 0;
      repeat ($urandom % 5) @(negedge clk);
      rx_valid = 1; rx_row = L1'(order[r]);
      for (int j = 0; j < int'(N2); j++) rx_data[j] = rxp[coef_pos(order[r], j)];
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
      @(negedge clk);
    end
    rx_valid = 0;
  endtask

  // ---------------------------------------------------------- main
  initial begin
    u64 a [N], key [N], c0 [N], c1 [N], A [N], acc0 [N], acc1 [N], inp [N];
    u64 got [N], sm [N], b2 [N];
    u64 pw [N2][$];
    u64 pr;
    instr_t i;
    int d;
    for (int m = 0; m < 4; m++) hbm_we[m] = 0;
    for (int p = 0; p < 2; p++) hbm_raddr[p] = 0;
    for (int j = 0; j < int'(N2); j++) rx_data[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < int'(MODS); m++) begin
      cfg_t l [$];
      ntt_consts(QS[m], GS[m], N1, N2, l);
      foreach (l[k]) begin
        @(negedge clk);
        cfg_we = 1; cfg_kind = l[k].kind; cfg_sel = l[k].sel; cfg_mod = MODW'(m);
        cfg_idx = L1'(l[k].idx); cfg_data = l[k].data;
      end
    end
    @(negedge clk); cfg_we = 0;
    for (int k = 0; k < int'(N); k++) begin
      a[k] = rand54(QS[0]); key[k] = rand54(QS[0]);
      c0[k] = rand54(QS[0]); c1[k] = rand54(QS[0]);
    end
    hbm_fill(MEM_IN, a, 0);
    hbm_fill(MEM_KEY, key, 1);
    hbm_fill(MEM_ACC0, c0, 1);
    hbm_fill(MEM_ACC1, c1, 1);

    // ------------------------------------------------ program A
    i = mk(OP_SWAP); i.swap_mask = 5'b01111; prog.push_back(i);
    i = mk(OP_SEED); i.imm = SEED; prog.push_back(i);
    i = mk(OP_NTT, MEM_IN); i.keymul = 1; prog.push_back(i);
    i = mk(OP_AUT, MEM_ACC1, SRC_ZERO, SRC_ZERO, MEM_IN); i.unit = 1; i.imm = GLE;
    prog.push_back(i);
    i = mk(OP_MAS, MEM_IN, SRC_PRNG, MEM_ACC0, MEM_ACC0); i.unit = 1; i.mas_op = MAS_MAC;
    prog.push_back(i);
    i = mk(OP_NTT, MEM_ACC0, SRC_ZERO, SRC_ZERO, MEM_SM); i.inverse = 1; prog.push_back(i);
    i = mk(OP_SWAP); i.swap_mask = 5'b10101; prog.push_back(i);
    prog.push_back(mk(OP_HALT));
    run_prog();

    // expected values
    for (int j = 0; j < int'(N2); j++) trivium_ref(SEED, 80'(j), 2 * N1, pw[j]);
    ntt_ref(a, QS[0], GS[0], A);
    for (int k = 0; k < int'(N); k++) begin
      pr = pw[k / N1][k % N1] & ((64'd1 << 54) - 1);
      if (pr >= QS[0]) pr -= QS[0];
      acc0[k] = addm(montref(A[k], key[k], QS[0]), c0[k], QS[0]);
      acc1[k] = addm(montref(A[k], pr, QS[0]), c1[k], QS[0]);
    end
    for (int s = 0; s < int'(N); s++) begin
      d = (((GLE * (2 * s + 1)) % (2 * N)) - 1) / 2;
      inp[d] = acc1[s];
    end
    for (int k = 0; k < int'(N); k++) begin
      pr = pw[k / N1][N1 + k % N1] & ((64'd1 << 54) - 1);
      if (pr >= QS[0]) pr -= QS[0];
      acc0[k] = addm(montref(inp[k], pr, QS[0]), acc0[k], QS[0]);
    end
    intt_ref(acc0, QS[0], GS[0], sm);
    hbm_read(1, got, 1);
    cmp("ACC1", got, acc1);
    hbm_read(0, got, 1);
    cmp("ACC0", got, acc0);

    // ------------------------------------------------ program B
    for (int k = 0; k < int'(N); k++) rxp[k] = rand54(QS[0]);
    prog.delete();
    prog.push_back(mk(OP_XFER));
    i = mk(OP_NTT, MEM_SM); i.mod_idx = 1; prog.push_back(i);
    prog.push_back(mk(OP_XWAIT));
    i = mk(OP_SWAP); i.swap_mask = 5'b10001; prog.push_back(i);
    prog.push_back(mk(OP_HALT));
    tx_rows = 0;
    fork
      run_prog();
      link_send();
    join
    checks += 2;
    if (tx_rows != int'(N1)) failures++;
    if (t_ntt_done >= t_tx_end) begin
      failures++; $display("NTT did not overlap the transfer");
    end
    cmp("TX", txp, sm);
    ntt_ref(sm, QS[1], GS[1], b2);
    hbm_read(0, got, 1);
    cmp("NTT_q1", got, b2);

    // ------------------------------------------------ program C
    prog.delete();
    prog.push_back(mk(OP_XFER));
    prog.push_back(mk(OP_XWAIT));
    prog.push_back(mk(OP_HALT));
    tx_rows = 0;
    for (int k = 0; k < int'(N); k++) b2[k] = rxp[k];
    fork
      run_prog();
      link_send();
    join
    cmp("RX", txp, b2);

    checks += 5;
    if (n_ntt != 2 || n_fused != 1) failures++;
    if (n_mas != 1) failures++;
    if (n_aut != 1) failures++;
    if (stalls == 0) failures++;
    if (!halted) failures++;
    $display("ntt=%0d fused=%0d mas=%0d aut=%0d link_stalls=%0d",
             n_ntt, n_fused, n_mas, n_aut, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
