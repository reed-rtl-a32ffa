// prng_unit: on-the-fly generation of the seeded half of a switching key.
//
// The key component ksk1 = a is a uniformly random polynomial expanded from a
// public seed, so it need not be stored or fetched from HBM. This unit holds
// N2 trivium_core instances, core j using the common 64-bit seed and the IV j,
// and turns their 64-bit words into N2 coefficients per cycle, matching the
// datapath width of the MAS unit it feeds: the low W bits of each word,
// reduced once by q (2^W < 2q, so one conditional subtraction suffices).
// The coefficient is taken to be the key value in Montgomery form.
// load restarts all cores (18 cycles until ready); each cycle with next=1
// consumes one row of coefficients. The paper states one Trivium core per PU
// delivering one 64-bit word per cycle; giving one core per lane so the MAS
// gets a full row per cycle is this design's choice.
module prng_unit
  import reed_pkg::*;
#(
  parameter int unsigned N2 = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [63:0] seed,
  input  logic        next,
  input  coeff_t      q,
  output logic        ready,
  output coeff_t      coeff [N2]
);
  logic [63:0] word [N2];
  logic        rdy  [N2];

  for (genvar j = 0; j < int'(N2); j++) begin : g_core
    trivium_core u_core (
      .clk, .rst_n, .load, .seed, .iv (80'(j)), .next,
      .ready (rdy[j]), .word (word[j])
    );
    assign coeff[j] = (word[j][W-1:0] >= q) ? word[j][W-1:0] - q : word[j][W-1:0];
  end
  assign ready = rdy[0];
endmodule
