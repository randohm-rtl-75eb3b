// mtd_lfsr: seeded linear feedback shift register that supplies the random
// selections of the moving-target defence.
//
// The register is loaded from a true random number generator (seed_load and
// seed) and then advances one state per cycle in which step is high. It is a
// Galois LFSR: the state shifts right and, when the bit shifted out is 1, the
// tap mask is XORed in. With the default taps (x^16+x^14+x^13+x^11+1) it runs
// through all 2^16-1 non-zero states. A zero seed would lock it, so a zero
// seed is replaced by a fixed non-zero constant. LEAP > 1 makes one step
// advance the sequence by LEAP states at once (the single-state update
// unrolled LEAP times), so that successive states used as random numbers do
// not overlap bit for bit.
//
// Timing: state is registered; a seed or a step takes effect on the next
// clock edge. seed_load wins over step. Reset loads the substitute constant.
//
// That an LFSR initialised from a TRNG makes the selections follows the
// source; its width, polynomial and the zero-seed rule are this design's own.
module mtd_lfsr #(
  parameter int unsigned     W        = randohm_pkg::LFSR_W,
  parameter logic [W-1:0]    TAPS     = randohm_pkg::LFSR_TAPS,
  parameter logic [W-1:0]    ZERO_SUB = randohm_pkg::LFSR_ZERO_SUB,
  parameter int unsigned     LEAP     = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         seed_load,
  input  logic [W-1:0] seed,
  input  logic         step,
  output logic [W-1:0] state
);

  logic [W-1:0] next_state;

  always_comb begin
    next_state = state;
    for (int unsigned i = 0; i < LEAP; i++)
      next_state = (next_state >> 1) ^ (next_state[0] ? TAPS : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          state <= ZERO_SUB;
    else if (seed_load)  state <= (seed == '0) ? ZERO_SUB : seed;
    else if (step)       state <= next_state;
  end

  // The all-zero state must never be reached.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state != '0);

endmodule
