// tb_reed_top: end-to-end run of the four-chiplet ring (ModUp + KeyMul).
//
// Reduced size: N1 = 16, N2 = 4 (N = 64), two moduli, four chiplets. Every
// chiplet i holds one limb d_i of the polynomial being key-switched and runs
// the ring schedule of the KeySwitch dataflow:
//   INTT(d_i) -> SM; SWAP SM;
//   repeat 4 times: XFER (send the SM limb to chiplet i-1);
//                   NTT of the SM limb fused with key multiplication
//                   (ACC0 += NTT*ksk0, ksk0 streamed from HBM per step;
//                    ACC1 += NTT*PRNG);
//                   XWAIT; SWAP SM and KEY (next limb, next key);
//   AUT (conjugation) ACC1 -> IN; MAS ADD ACC0 = ACC0 + IN; SWAP ACC0, ACC1.
// So chiplet i processes the limbs of chiplets i, i+1, i+2, i+3 in that order.
// The testbench models the four links (a small queue each, random back
// pressure and random delivery) and the HBM (the next ksk0 is written into
// the inactive KEY half while the current step computes). ACC0 and ACC1 of
// every chiplet are read back over HBM and compared with a direct reference.
// Each mechanism is counted and must occur: link back-pressure stalls,
// rows held at a receiver whose window is closed,
// NTT finishing while the link is still sending (non-blocking transfer),
// fused NTT+key multiplications, ping-pong swaps, HBM prefetch during
// compute, PRNG reseeds, automorphism and MAS instructions.
`timescale 1ns/1ps
module tb_reed_top;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned R = 4, N1 = 16, N2 = 4, N = N1 * N2, MODS = 2;
  localparam int unsigned L1 = $clog2(N1);
  localparam u64 Q = 64'h20000000140001, G = 3;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic exec = 0, busy [R], halted [R];
  logic imem_we [R]; logic [9:0] imem_addr [R]; instr_t imem_wdata [R];
  logic cfg_we [R]; logic [2:0] cfg_kind [R]; logic [MODW-1:0] cfg_mod [R];
  logic [1:0] cfg_sel [R]; logic [L1-1:0] cfg_idx [R]; coeff_t cfg_data [R];
  logic hbm_we [R][4]; logic [L1-1:0] hbm_waddr [R][4]; coeff_t hbm_wdata [R][4][N2];
  logic [L1-1:0] hbm_raddr [R][2]; coeff_t hbm_rdata [R][2][N2];
  logic link_tx_valid [R], link_tx_ready [R]; logic [L1-1:0] link_tx_row [R];
  coeff_t link_tx_data [R][N2];
  logic link_rx_valid [R], link_rx_ready [R]; logic [L1-1:0] link_rx_row [R]; coeff_t link_rx_data [R][N2];

  reed_top #(.R(R), .N1(N1), .N2(N2), .MODS(MODS), .IMEM_DEPTH(1024)) dut (.*);

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- references
  function automatic void ntt_ref(const ref u64 a[N], ref u64 r[N]);
    u64 psi, w, x, acc;
    psi = psi_of(Q, G, N);
    for (int k = 0; k < int'(N); k++) begin
      w = powm(psi, u64'(2 * k + 1), Q); x = 1; acc = 0;
      for (int n = 0; n < int'(N); n++) begin
        acc = addm(acc, mulm(a[n], x, Q), Q); x = mulm(x, w, Q);
      end
      r[k] = acc;
    end
  endfunction

  function automatic void intt_ref(const ref u64 A[N], ref u64 r[N]);
    u64 ipsi, x, acc, ninv;
    ipsi = invm(psi_of(Q, G, N), Q);
    ninv = invm(u64'(N), Q);
    for (int n = 0; n < int'(N); n++) begin
      acc = 0;
      for (int k = 0; k < int'(N); k++) begin
        x = powm(ipsi, u64'(((2 * k + 1) * n) % (2 * N)), Q);
        acc = addm(acc, mulm(A[k], x, Q), Q);
      end
      r[n] = mulm(acc, ninv, Q);
    end
  endfunction

  // ---------------------------------------------------------- link models
  typedef struct { logic [L1-1:0] row; u64 d [N2]; } lrow_t;
  lrow_t lq [R][$];
  int stalls = 0, rx_ooo = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < int'(R); i++) begin
      if (link_tx_valid[i] && !link_tx_ready[i]) stalls++;
      if (link_tx_valid[i] && link_tx_ready[i]) begin
        lrow_t e;
        e.row = link_tx_row[i];
        for (int j = 0; j < int'(N2); j++) e.d[j] = link_tx_data[i][j];
        lq[i].push_back(e);
      end
    end
  end
  // a row offered on link_rx stays there until the receiver takes it
  int rx_held = 0;
  logic rx_taken [R];
  always @(posedge clk)
    for (int i = 0; i < int'(R); i++) rx_taken[i] = link_rx_valid[i] && link_rx_ready[i];
  always @(negedge clk) begin
    for (int i = 0; i < int'(R); i++) begin
      link_tx_ready[i] = (lq[i].size() < 4) && ($urandom % 3 != 0);
      if (link_rx_valid[i] && !rx_taken[i]) rx_held++;
      if (!link_rx_valid[i] || rx_taken[i]) begin
        link_rx_valid[i] = 0;
        if (lq[i].size() > 0 && $urandom % 5 == 0) begin
          lrow_t e;
          int k;
          // deliver the head, or sometimes the second row first
          k = (lq[i].size() > 1 && $urandom % 4 == 0) ? 1 : 0;
          if (k == 1) rx_ooo++;
          e = lq[i][k];
          lq[i].delete(k);
          link_rx_valid[i] = 1;
          link_rx_row[i] = e.row;
          for (int j = 0; j < int'(N2); j++) link_rx_data[i][j] = e.d[j];
        end
      end
    end
  end

  // ---------------------------------------------------------- HBM model
  u64 keys [R][5][N];     // ksk0 for step m of chiplet i (step 4 unused)
  int key_step [R];
  int prefetch = 0, key_swaps = 0;
  task automatic hbm_write(int i, int m, input u64 v[N], input bit ntt_dom);
    for (int r = 0; r < int'(N1); r++) begin
      @(negedge clk);
      if (busy[i]) prefetch++;
      hbm_we[i][m] = 1; hbm_waddr[i][m] = L1'(r);
      for (int j = 0; j < int'(N2); j++)
        hbm_wdata[i][m][j] = v[ntt_dom ? r + N1 * j : r * N2 + j];
    end
    @(negedge clk); hbm_we[i][m] = 0;
  endtask

  // feed the next key whenever chiplet i swaps KEY
  for (genvar i = 0; i < int'(R); i++) begin : g_keyfeed
    initial begin
      key_step[i] = 0;
      forever begin
        @(posedge clk);
        if (dut.g_chip[i].u_pu.m_swap[MEM_KEY]) begin
          key_swaps++;
          key_step[i]++;
          if (key_step[i] < 4) begin
            @(negedge clk);
            for (int r = 0; r < int'(N1); r++) begin
              @(negedge clk);
              if (busy[i]) prefetch++;
              hbm_we[i][MEM_KEY] = 1; hbm_waddr[i][MEM_KEY] = L1'(r);
              for (int j = 0; j < int'(N2); j++)
                hbm_wdata[i][MEM_KEY][j] = keys[i][key_step[i]][r + N1 * j];
            end
            @(negedge clk); hbm_we[i][MEM_KEY] = 0;
          end
        end
      end
    end
  end

  // ---------------------------------------------------------- event counters
  int n_fused = 0, n_overlap = 0, n_swaps = 0, n_seed = 0, n_aut = 0, n_mas = 0;
  for (genvar i = 0; i < int'(R); i++) begin : g_count
    always @(posedge clk) if (rst_n) begin
      if (dut.g_chip[i].u_pu.done[0] && dut.g_chip[i].u_pu.ins.keymul) begin
        n_fused++;
        if (dut.g_chip[i].u_pu.tx_busy) n_overlap++;
      end
      if (dut.g_chip[i].u_pu.start) begin
        unique case (dut.g_chip[i].u_pu.ins.opcode)
          OP_SWAP: n_swaps++;
          OP_SEED: n_seed++;
          OP_AUT:  n_aut++;
          OP_MAS:  n_mas++;
          default: ;
        endcase
      end
    end
  end

  function automatic instr_t mk(opcode_e op, mem_id_e a = MEM_IN, mem_id_e b = SRC_ZERO,
                                mem_id_e c = SRC_ZERO, mem_id_e d = MEM_ACC0);
    instr_t x = '0;
    x.opcode = op; x.src_a = a; x.src_b = b; x.src_c = c; x.dst = d;
    return x;
  endfunction

  // ---------------------------------------------------------- main
  initial begin
    u64 d [R][N], c0 [R][N], c1 [R][N], I [R][N];
    u64 e0 [N], e1 [N], got0 [N], got1 [N], conj [N];
    u64 pw [R][N2][$];
    u64 pr;
    instr_t prog [$];
    instr_t x;
    cfg_t l [$];
    int dd;

    for (int i = 0; i < int'(R); i++) begin
      imem_we[i] = 0; cfg_we[i] = 0; link_rx_valid[i] = 0;
      for (int m = 0; m < 4; m++) hbm_we[i][m] = 0;
      hbm_raddr[i][0] = 0; hbm_raddr[i][1] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // tables (same modulus on all chiplets; both slots hold it)
    for (int m = 0; m < int'(MODS); m++) begin
      l.delete();
      ntt_consts(Q, G, N1, N2, l);
      foreach (l[k]) begin
        @(negedge clk);
        for (int i = 0; i < int'(R); i++) begin
          cfg_we[i] = 1; cfg_kind[i] = l[k].kind; cfg_sel[i] = l[k].sel;
          cfg_mod[i] = MODW'(m); cfg_idx[i] = L1'(l[k].idx); cfg_data[i] = l[k].data;
        end
      end
    end
    @(negedge clk);
    for (int i = 0; i < int'(R); i++) cfg_we[i] = 0;

    // data
    for (int i = 0; i < int'(R); i++) begin
      for (int k = 0; k < int'(N); k++) begin
        d[i][k] = rand54(Q); c0[i][k] = rand54(Q); c1[i][k] = rand54(Q);
        for (int m = 0; m < 4; m++) keys[i][m][k] = rand54(Q);
      end
      hbm_write(i, MEM_IN, d[i], 1);    // d_i is an NTT-domain limb
      hbm_write(i, MEM_KEY, keys[i][0], 1);
      hbm_write(i, MEM_ACC0, c0[i], 1);
      hbm_write(i, MEM_ACC1, c1[i], 1);
    end

    // program (same for every chiplet but the seed)
    x = mk(OP_SWAP); x.swap_mask = 5'b01111; prog.push_back(x);
    x = mk(OP_SEED); prog.push_back(x);
    x = mk(OP_NTT, MEM_IN, SRC_ZERO, SRC_ZERO, MEM_SM); x.inverse = 1; prog.push_back(x);
    x = mk(OP_SWAP); x.swap_mask = 5'b10000; prog.push_back(x);
    for (int m = 0; m < 4; m++) begin
      prog.push_back(mk(OP_XFER));
      x = mk(OP_NTT, MEM_SM); x.keymul = 1; prog.push_back(x);
      prog.push_back(mk(OP_XWAIT));
      x = mk(OP_SWAP); x.swap_mask = 5'b11000; prog.push_back(x);
    end
    x = mk(OP_AUT, MEM_ACC1, SRC_ZERO, SRC_ZERO, MEM_IN); x.imm = 2 * N - 1; prog.push_back(x);
    x = mk(OP_MAS, MEM_IN, SRC_ZERO, MEM_ACC0, MEM_ACC0); x.mas_op = MAS_ADD; prog.push_back(x);
    x = mk(OP_SWAP); x.swap_mask = 5'b00101; prog.push_back(x);
    prog.push_back(mk(OP_HALT));
    for (int k = 0; k < prog.size(); k++) begin
      @(negedge clk);
      for (int i = 0; i < int'(R); i++) begin
        imem_we[i] = 1; imem_addr[i] = 10'(k); imem_wdata[i] = prog[k];
        if (prog[k].opcode == OP_SEED) imem_wdata[i].imm = 64'h1000 + 64'(i);
      end
    end
    @(negedge clk);
    for (int i = 0; i < int'(R); i++) imem_we[i] = 0;
    exec = 1;
    @(negedge clk); exec = 0;
    @(negedge clk);
    for (int i = 0; i < int'(R); i++) while (!halted[i]) @(negedge clk);

    // reference
    for (int i = 0; i < int'(R); i++) begin
      intt_ref(d[i], I[i]);
    end
    for (int i = 0; i < int'(R); i++) begin
      u64 Ai [N];
      for (int j = 0; j < int'(N2); j++) trivium_ref(64'h1000 + 64'(i), 80'(j), 4 * N1, pw[i][j]);
      for (int k = 0; k < int'(N); k++) begin e0[k] = c0[i][k]; e1[k] = c1[i][k]; end
      for (int m = 0; m < 4; m++) begin
        ntt_ref(I[(i + m) % R], Ai);
        for (int k = 0; k < int'(N); k++) begin
          pr = pw[i][k / N1][m * N1 + k % N1] & ((64'd1 << 54) - 1);
          if (pr >= Q) pr -= Q;
          e0[k] = addm(e0[k], montref(Ai[k], keys[i][m][k], Q), Q);
          e1[k] = addm(e1[k], montref(Ai[k], pr, Q), Q);
        end
      end
      for (int s = 0; s < int'(N); s++) begin
        dd = ((((2 * N - 1) * (2 * s + 1)) % (2 * N)) - 1) / 2;
        conj[dd] = e1[s];
      end
      for (int k = 0; k < int'(N); k++) e0[k] = addm(e0[k], conj[k], Q);
      // read back over HBM
      for (int r = 0; r <= int'(N1); r++) begin
        @(negedge clk);
        if (r > 0)
          for (int j = 0; j < int'(N2); j++) begin
            got0[(r - 1) + N1 * j] = hbm_rdata[i][0][j];
            got1[(r - 1) + N1 * j] = hbm_rdata[i][1][j];
          end
        hbm_raddr[i][0] = L1'(r % N1); hbm_raddr[i][1] = L1'(r % N1);
      end
      for (int k = 0; k < int'(N); k++) begin
        checks += 2;
        if (got0[k] != e0[k]) begin
          failures++;
          if (k == 0) $display("chiplet %0d ACC0[%0d] got %h exp %h", i, k, got0[k], e0[k]);
        end
        if (got1[k] != e1[k]) begin
          failures++;
          if (k == 0) $display("chiplet %0d ACC1[%0d] got %h exp %h", i, k, got1[k], e1[k]);
        end
      end
    end

    $display("rx_held=%0d fused=%0d overlap=%0d stalls=%0d rx_out_of_order=%0d swaps=%0d key_swaps=%0d prefetch=%0d seeds=%0d aut=%0d mas=%0d",
             rx_held, n_fused, n_overlap, stalls, rx_ooo, n_swaps, key_swaps, prefetch, n_seed, n_aut, n_mas);
    checks += 11;
    if (rx_held == 0) failures++;
    if (n_fused != 16) failures++;
    if (n_overlap == 0) failures++;
    if (stalls == 0) failures++;
    if (rx_ooo == 0) failures++;
    if (n_swaps != 4 * 7) failures++;
    if (key_swaps != 4 * 5) failures++;
    if (prefetch == 0) failures++;
    if (n_seed != 4) failures++;
    if (n_aut != 4) failures++;
    if (n_mas != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
