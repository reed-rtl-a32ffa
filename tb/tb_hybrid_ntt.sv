// tb_hybrid_ntt: checks the Hybrid NTT/INTT against a direct O(N^2) evaluation.
//
// N1=16, N2=4 (N=64), two RNS moduli of the form 2^53+qH*2^18+1. Two random
// polynomials are streamed back to back through the forward transform (rows
// fed in bit-reversed order, as the PU does); every output coefficient is
// compared with A[k] = sum a[n] psi^((2k+1)n) and the output is checked to be
// continuous (one polynomial per N1 cycles) with the expected latency. The
// results are then streamed back through the inverse transform, which must
// return the original polynomials.
`timescale 1ns/1ps
module tb_hybrid_ntt;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N1 = 16, N2 = 4, N = N1 * N2, MODS = 2;
  localparam int unsigned LAT = N1 + $clog2(N1) + $clog2(N2) + 2;
  localparam u64 QS [2] = '{64'h20000000140001, 64'h20000000280001};
  localparam u64 GS [2] = '{64'd3, 64'd5};

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0; logic [2:0] cfg_kind; logic [MODW-1:0] cfg_mod; logic [1:0] cfg_sel;
  logic [$clog2(N1)-1:0] cfg_idx; coeff_t cfg_data;
  logic inverse = 0; logic [MODW-1:0] mod_idx = 0;
  logic in_valid = 0, in_sop = 0; coeff_t in_data [N2];
  logic out_valid, out_sop; logic [$clog2(N1)-1:0] out_row; coeff_t out_data [N2]; coeff_t q_out;

  hybrid_ntt #(.N1(N1), .N2(N2), .MODS(MODS)) dut (.*);

  u64 a   [2][];
  u64 res [2][N];   // captured results, indexed by natural coefficient index
  int ocount; int first_out; int last_out; int tstart; int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collector: stores each output row in natural coefficient order
  int poly_sel;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (ocount == 0) first_out = cyc;
    last_out = cyc;
    for (int j = 0; j < int'(N2); j++) begin
      if (!inverse) res[ocount / N1][out_row + N1 * j] = out_data[j];      // column-major
      else          res[ocount / N1][out_row * N2 + j] = out_data[j];      // row-major
    end
    ocount++;
  end

  task automatic load(int m);
    cfg_t l[$];
    ntt_consts(QS[m], GS[m], N1, N2, l);
    foreach (l[i]) begin
      @(negedge clk);
      cfg_we = 1; cfg_kind = l[i].kind; cfg_sel = l[i].sel; cfg_mod = MODW'(m);
      cfg_idx = l[i].idx[$clog2(N1)-1:0]; cfg_data = l[i].data[W-1:0];
    end
    @(negedge clk) cfg_we = 0;
  endtask

  // stream two polynomials back to back; src[p] holds them in their layout
  task automatic stream(bit inv, const ref u64 src [2][N]);
    ocount = 0;
    @(negedge clk);
    inverse = inv;
    tstart = cyc;
    for (int p = 0; p < 2; p++)
      for (int t = 0; t < int'(N1); t++) begin
        int unsigned r;
        r = inv ? t : brev(t, $clog2(N1));
        in_valid = 1; in_sop = (t == 0);
        for (int j = 0; j < int'(N2); j++)
          in_data[j] = inv ? src[p][r + N1 * j][W-1:0] : src[p][r * N2 + j][W-1:0];
        @(negedge clk);
      end
    in_valid = 0; in_sop = 0;
    wait (ocount == 2 * N1);
    @(negedge clk);
    checks++;
    if (first_out - tstart != int'(LAT)) begin
      failures++; $display("latency %0d expected %0d", first_out - tstart, LAT);
    end
    checks++;
    if (last_out - first_out != int'(2 * N1 - 1)) begin
      failures++; $display("output not continuous: %0d cycles", last_out - first_out + 1);
    end
  endtask

  u64 inbuf [2][N];
  u64 fwd   [2][N];
  initial begin
    for (int j = 0; j < int'(N2); j++) in_data[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(0); load(1);
    for (int m = 0; m < 2; m++) begin
      u64 psi;
      mod_idx = MODW'(m);
      psi = psi_of(QS[m], GS[m], N);
      for (int p = 0; p < 2; p++) begin
        a[p] = new[N];
        foreach (a[p][n]) begin a[p][n] = rand54(QS[m]); inbuf[p][n] = a[p][n]; end
      end
      stream(0, inbuf);
      fwd = res;
      for (int p = 0; p < 2; p++)
        for (int k = 0; k < int'(N); k++) begin
          u64 e;
          e = ntt_ref_coeff(a[p], QS[m], psi, k);
          checks++;
          if (fwd[p][k] != e) begin
            failures++;
            if (failures < 10) $display("NTT mod%0d poly%0d k=%0d got %h exp %h", m, p, k, fwd[p][k], e);
          end
        end
      stream(1, fwd);
      for (int p = 0; p < 2; p++)
        for (int n = 0; n < int'(N); n++) begin
          checks++;
          if (res[p][n] != a[p][n]) begin
            failures++;
            if (failures < 10) $display("INTT mod%0d poly%0d n=%0d got %h exp %h", m, p, n, res[p][n], a[p][n]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
