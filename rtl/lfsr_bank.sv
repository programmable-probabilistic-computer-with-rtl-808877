// lfsr_bank: one pseudorandom generator per p-bit.
//
// Every p-bit owns a 32-bit maximal-length LFSR (x^32+x^22+x^2+x+1). When
// its bit of adv[] is high the register advances RW (16) steps in one clock,
// so that two successive random words share no bits; rnd[i] is the upper RW
// bits of the register, read as a signed number, i.e. a uniform value
// r in [-1, +1) in units of 2^-(RW-1). Using an on-chip LFSR per p-bit
// follows the hardware described; the polynomial, the width, the 16-step
// advance and the seeding are this design's choices.
//
// Interface: seed_load (synchronous) reloads every register from seed mixed
// with the p-bit's global index IDX0+i, so that all generators start in
// different states; reset does the same with seed = 0.
// Timing: rnd[] is registered; a new word appears the clock after adv[i].
module lfsr_bank
  import dsim_pkg::*;
#(
  parameter int unsigned N    = 8214,
  parameter int unsigned IDX0 = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  seed_load,
  input  logic [LFSR_W-1:0]     seed,
  input  logic [N-1:0]          adv,
  output rnd_t                  rnd [N]
);

  logic [LFSR_W-1:0] state [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) state[i] <= lfsr_seed('0, IDX0 + i);
    end else if (seed_load) begin
      for (int unsigned i = 0; i < N; i++) state[i] <= lfsr_seed(seed, IDX0 + i);
    end else begin
      for (int unsigned i = 0; i < N; i++)
        if (adv[i]) state[i] <= lfsr_advance(state[i]);
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N; i++) rnd[i] = rnd_t'(state[i][LFSR_W-1 -: RW]);
  end

endmodule
