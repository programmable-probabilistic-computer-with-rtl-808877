// dsim_pkg: types, number formats and lattice helpers shared by the
// distributed sparse Ising machine (DSIM).
//
// Number format. Weights J_ij, biases h_i, the inverse temperature beta and
// the clamped local field I_i all use the signed fixed-point format s{4}{1}
// the EA experiments are run with: one sign bit, four integer bits and one
// fractional bit, six bits in all (range -16.0 .. +15.5, step 0.5). The
// value 0.5 step is exactly the step of the beta schedule 0.5, 1.0 .. 5.0.
// Reading "s{4}{1}" as sign + 4 integer + 1 fraction bits is this design's
// reading of the notation.
//
// Graph. The machine is built for the 3D Edwards-Anderson lattice: L x L x L
// sites, nearest-neighbour couplings, open boundaries in x and y and a
// periodic boundary in z. Each p-bit therefore has six coupling slots
// (-x,+x,-y,+y,-z,+z); a slot with no neighbour is ignored. The lattice is
// cut into slabs along x, one slab per partition (this design's choice of
// partition, see partition.sv).
//
// Coloring. Neighbouring p-bits must never update together. With L even a
// checkerboard (x+y+z) mod 2 needs two colors; with L odd the periodic z ring
// is an odd cycle and three colors are used: color = (x + y + zc(z)) mod 3
// where zc(z) = z mod 2 for z < L-1 and zc(L-1) = 2. This gives 2 colors for
// L = 100 and 3 for L = 37, the counts the EA runs use.
//
// Lint note: not every module uses every constant of the package, so
// lint reports some of them as unused parameters.
package dsim_pkg;

  // ---- fixed point s{4}{1} ----------------------------------------------
  localparam int unsigned FX_INT  = 4;
  localparam int unsigned FX_FRAC = 1;
  localparam int unsigned FX_W    = 1 + FX_INT + FX_FRAC;   // 6 bits
  typedef logic signed [FX_W-1:0] fix_t;

  localparam fix_t FX_MAX = fix_t'((1 << (FX_W - 1)) - 1);
  localparam fix_t FX_MIN = fix_t'(-(1 << (FX_W - 1)));

  // ---- couplings ---------------------------------------------------------
  localparam int unsigned NDIR = 6;
  typedef enum logic [2:0] {
    DIR_XM = 3'd0, DIR_XP = 3'd1, DIR_YM = 3'd2,
    DIR_YP = 3'd3, DIR_ZM = 3'd4, DIR_ZP = 3'd5
  } dir_e;
  // Slot index used by the host for the bias h_i (after the six J slots).
  localparam int unsigned SLOT_H = 6;

  // Sum of h plus six +-J terms: seven s{4}{1} values need three more bits.
  localparam int unsigned SUM_W = FX_W + 3;
  typedef logic signed [SUM_W-1:0] sum_t;

  // ---- random numbers ----------------------------------------------------
  localparam int unsigned LFSR_W = 32;
  localparam int unsigned RW     = 16;   // width of r and of tanh()
  typedef logic signed [RW-1:0] rnd_t;

  // One Fibonacci step of the maximal-length LFSR x^32+x^22+x^2+x+1.
  function automatic logic [LFSR_W-1:0] lfsr_step(logic [LFSR_W-1:0] s);
    return {s[LFSR_W-2:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
  endfunction

  // RW steps at once, so that successive random words share no bits.
  function automatic logic [LFSR_W-1:0] lfsr_advance(logic [LFSR_W-1:0] s);
    logic [LFSR_W-1:0] v;
    v = s;
    for (int k = 0; k < RW; k++) v = lfsr_step(v);
    return v;
  endfunction

  // Per-p-bit seed: mixes the run seed with the global p-bit index and never
  // returns zero (the all-zero state locks an LFSR).
  function automatic logic [LFSR_W-1:0] lfsr_seed(logic [LFSR_W-1:0] seed,
                                                 int unsigned idx);
    logic [LFSR_W-1:0] v;
    v = seed ^ (LFSR_W'(idx) * 32'h9E37_79B9) ^ 32'h6A09_E667;
    v = v ^ (v >> 15);
    v = v * 32'h2C1B_3C6D;
    v = v ^ (v >> 12);
    if (v == '0) v = 32'h0000_0001;
    return v;
  endfunction

  // ---- tanh lookup -------------------------------------------------------
  // tanh of every s{4}{1} value, scaled to a signed RW-bit word.
  localparam int unsigned TANH_N = 1 << FX_W;
  typedef logic signed [RW-1:0] tanh_lut_t [TANH_N];

  function automatic tanh_lut_t build_tanh_lut();
    tanh_lut_t lut;
    real x, t;
    for (int k = 0; k < int'(TANH_N); k++) begin
      // entry k holds the value whose 6-bit code is k
      x = real'((k >= int'(TANH_N / 2)) ? k - int'(TANH_N) : k) / 2.0;
      t = $tanh(x) * real'((1 << (RW - 1)) - 1);
      lut[k] = RW'($rtoi(t + ((t >= 0.0) ? 0.5 : -0.5)));
    end
    return lut;
  endfunction

  // ---- lattice geometry --------------------------------------------------
  function automatic int unsigned ncolor_for(int unsigned lz);
    return (lz % 2 == 0) ? 2 : 3;
  endfunction

  function automatic int unsigned color_of(int unsigned x, int unsigned y,
                                           int unsigned z, int unsigned lz);
    int unsigned zc;
    if (lz % 2 == 0) return (x + y + z) % 2;
    zc = (z == lz - 1) ? 2 : (z % 2);
    return (x + y + zc) % 3;
  endfunction

  // First x plane of partition k when L planes are cut into np slabs.
  function automatic int unsigned slab_x0(int unsigned k, int unsigned l,
                                          int unsigned np);
    return (k * l) / np;
  endfunction

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
