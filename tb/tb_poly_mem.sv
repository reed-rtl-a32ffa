// tb_poly_mem: checks the ping-pong polynomial memory against a model.
//
// Two instances with N1=8 rows of N2=2 lanes are driven with the same random
// traffic on all four ports (random swaps, writes on both write ports, reads
// on both read ports, including same-row write collisions): one configured
// as an HBM buffer (compute side writes the active half, external side reads
// the inactive half) and one as the C2C buffer (compute side writes the
// inactive half, external side reads the active half). Each read is compared,
// one cycle after its address, with a behavioural two-half model kept here.
`timescale 1ns/1ps
module tb_poly_mem;
  import reed_pkg::*;
  import tb_math_pkg::*;
  localparam int unsigned N1 = 8, N2 = 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic swap = 0, c_we = 0, x_we = 0;
  logic [2:0] c_raddr = 0, c_waddr = 0, x_raddr = 0, x_waddr = 0;
  coeff_t c_wdata [N2], x_wdata [N2];
  coeff_t c_rd [2][N2], x_rd [2][N2];
  logic act [2];

  poly_mem #(.N1(N1), .N2(N2), .CWR_OTHER(0), .XRD_OTHER(1)) dut0 (
    .clk, .rst_n, .swap, .active(act[0]), .c_raddr, .c_rdata(c_rd[0]), .c_we,
    .c_waddr, .c_wdata, .x_raddr, .x_rdata(x_rd[0]), .x_we, .x_waddr, .x_wdata);
  poly_mem #(.N1(N1), .N2(N2), .CWR_OTHER(1), .XRD_OTHER(0)) dut1 (
    .clk, .rst_n, .swap, .active(act[1]), .c_raddr, .c_rdata(c_rd[1]), .c_we,
    .c_waddr, .c_wdata, .x_raddr, .x_rdata(x_rd[1]), .x_we, .x_waddr, .x_wdata);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: mdl[inst][half][row][lane], sel = active half
  u64 mdl [2][2][N1][N2];
  int sel;
  u64 exp_c [2][N2], exp_x [2][N2];
  logic chk = 0;

  initial begin
    int cwh, xwh, xrh;
    sel = 0;
    for (int j = 0; j < int'(N2); j++) begin c_wdata[j] = 0; x_wdata[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill every row of both halves of both instances through the two ports
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < int'(N1); r++) begin
        @(negedge clk);
        swap = 0; c_we = 0; x_we = 1; x_waddr = 3'(r);
        for (int j = 0; j < int'(N2); j++) x_wdata[j] = rand54(64'h20000000140001);
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < int'(N2); j++) mdl[i][1 - sel][r][j] = x_wdata[j];
        if (r == int'(N1) - 1) begin
          @(negedge clk); x_we = 0; swap = 1; sel = 1 - sel;
        end
      end
    @(negedge clk); swap = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // compare the reads issued in the previous cycle
      if (chk)
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < int'(N2); j++) begin
            checks += 2;
            if (c_rd[i][j] != exp_c[i][j]) failures++;
            if (x_rd[i][j] != exp_x[i][j]) failures++;
          end
      swap    = ($urandom % 6 == 0);
      c_we    = $urandom % 2;
      x_we    = $urandom % 2;
      c_raddr = 3'($urandom); x_raddr = 3'($urandom);
      c_waddr = 3'($urandom);
      x_waddr = ($urandom % 3 == 0) ? c_waddr : 3'($urandom);
      for (int j = 0; j < int'(N2); j++) begin
        c_wdata[j] = rand54(64'h20000000140001);
        x_wdata[j] = rand54(64'h20000000140001);
      end
      // expected read data for this cycle's addresses (read before write)
      for (int i = 0; i < 2; i++) begin
        xrh = (i == 0) ? 1 - sel : sel;
        for (int j = 0; j < int'(N2); j++) begin
          exp_c[i][j] = mdl[i][sel][c_raddr][j];
          exp_x[i][j] = mdl[i][xrh][x_raddr][j];
        end
      end
      chk = 1;
      // apply writes at the coming edge: external first, compute wins
      for (int i = 0; i < 2; i++) begin
        cwh = (i == 0) ? sel : 1 - sel;
        xwh = 1 - sel;
        for (int j = 0; j < int'(N2); j++) begin
          if (x_we) mdl[i][xwh][x_waddr][j] = x_wdata[j];
          if (c_we) mdl[i][cwh][c_waddr][j] = c_wdata[j];
        end
      end
      if (swap) sel = 1 - sel;
      checks++;
      if (act[0] != 1'(sel ^ int'(swap)) || act[1] != act[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
