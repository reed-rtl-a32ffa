// trivium_core: Trivium keystream generator producing 64 bits per cycle.
//
// Standard Trivium (288-bit state, three non-linear feedback registers of
// 93, 84 and 111 bits), unrolled 64 steps per clock. Loading a seed puts the
// 64-bit seed in the low key bits (the upper 16 key bits are zero) and iv in
// the IV bits, then runs the 4*288 = 1152 blank initialisation steps as 18
// cycles of 64 steps, matching the paper's "initializes over 18 clock
// cycles". Afterwards ready is high and word holds the next 64 keystream bits
// (bit i = output of step i); every cycle with next=1 consumes the word and
// advances the state, so the stream does not depend on idle cycles. The seed
// and IV placement are this design's choice; the paper gives only the 64-bit
// seed and the timing.
module trivium_core (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [63:0] seed,
  input  logic [79:0] iv,
  input  logic        next,
  output logic        ready,
  output logic [63:0] word
);
  localparam int unsigned INIT_CYCLES = 18;

  logic [287:0] st, st_nxt;
  logic [4:0]   init_cnt;

  // 64 Trivium steps; st[i-1] is state bit s_i of the specification
  always_comb begin
    logic [287:0] s;
    logic t1, t2, t3;
    s = st;
    for (int i = 0; i < 64; i++) begin
      t1 = s[65] ^ s[92];
      t2 = s[161] ^ s[176];
      t3 = s[242] ^ s[287];
      word[i] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[90] & s[91]) ^ s[170];
      t2 = t2 ^ (s[174] & s[175]) ^ s[263];
      t3 = t3 ^ (s[285] & s[286]) ^ s[68];
      s[92:0]    = {s[91:0], t3};
      s[176:93]  = {s[175:93], t1};
      s[287:177] = {s[286:177], t2};
    end
    st_nxt = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= '0;
      init_cnt <= '0;
      ready    <= 1'b0;
    end else if (load) begin
      st       <= {3'b111, 112'b0, iv, 13'b0, 16'b0, seed};
      init_cnt <= 5'(INIT_CYCLES);
      ready    <= 1'b0;
    end else if (init_cnt != 0) begin
      st       <= st_nxt;
      init_cnt <= init_cnt - 1'b1;
      ready    <= (init_cnt == 5'd1);
    end else if (next && ready) begin
      st <= st_nxt;
    end
  end
endmodule
