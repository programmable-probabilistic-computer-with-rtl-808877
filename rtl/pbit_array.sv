// pbit_array: the p-bits of one partition.
//
// Each p-bit holds a binary state m_i (1 stands for +1, 0 for -1). When
// upd[i] is high, p-bit i draws a new state from
//     m_i = sgn( tanh(I_i) + r_i ),
// the p-bit equation of the machine, where I_i is its clamped local field
// in s{4}{1} and r_i a uniform random number in [-1,+1) from its own LFSR
// (lfsr_bank). tanh is a 64-entry table over every s{4}{1} code, computed at
// elaboration; the comparison tanh + r >= 0 gives m = +1 with probability
// (1 + tanh I)/2. Table, comparator and tie rule (>= 0 gives +1) are this
// design's choices; the equation is the machine's.
//
// Interface: fld[] the local fields, upd[] the p-bits to update this cycle
// (one color group), m[] the states; seed_load/seed reseed the generators.
// Timing: m[i] changes on the clock edge at which upd[i] is high, one cycle
// per update; reset clears every state to -1.
// Lint note: the reset fill of a state vector wider than 8192 bits draws
// a replication-limit warning; the fill is intended.
module pbit_array
  import dsim_pkg::*;
#(
  parameter int unsigned N    = 8214,
  parameter int unsigned IDX0 = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              seed_load,
  input  logic [LFSR_W-1:0] seed,
  input  fix_t              fld [N],
  input  logic [N-1:0]      upd,
  output logic [N-1:0]      m
);

  localparam tanh_lut_t TANH = build_tanh_lut();

  rnd_t rnd [N];

  lfsr_bank #(.N(N), .IDX0(IDX0)) u_rng (
    .clk, .rst_n, .seed_load, .seed, .adv(upd), .rnd
  );

  function automatic logic decide(fix_t f, rnd_t r);
    logic signed [RW:0] s;
    s = (RW+1)'(TANH[unsigned'(f)]) + (RW+1)'(r);
    return ~s[RW];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m <= '0;
    end else begin
      for (int unsigned i = 0; i < N; i++)
        if (upd[i]) m[i] <= decide(fld[i], rnd[i]);
    end
  end

endmodule
