// color_sched: graph-colored update schedule of one slab partition.
//
// The p-bits are split into color groups that contain no two neighbours
// (dsim_pkg::color_of; 2 groups for an even L, 3 for an odd L). While run is
// high the scheduler enables one group per clock, in the order 0,1,..,
// NCOLOR-1, so one sweep (one Monte Carlo sweep, every p-bit updated once)
// takes NCOLOR clocks of clk. The p-bit update rate f_p-bit of the machine
// is therefore f_clk / NCOLOR, and every p-bit is updated once per p-bit
// clock period, as in the colored architecture. Stepping colors on one fast
// clock, instead of using phase-shifted clocks, is this design's choice.
//
// Interface: upd is the mask of the group enabled this cycle (all zero when
// run is low), color its number, n_upd its size; sweep_done pulses in the
// cycle of the last group; sweeps counts completed sweeps. clear restarts at
// group 0 and zeroes the sweep count.
// Timing: upd is combinational from the color register, so p-bits update on
// the same edge at which color advances.
// Lint note: at the full size the masks are wider than 8192 bits and the
// zero fills of such vectors draw a replication-limit warning; the fill
// is intended.
module color_sched
  import dsim_pkg::*;
#(
  parameter int unsigned NX     = 6,
  parameter int unsigned LY     = 37,
  parameter int unsigned LZ     = 37,
  parameter int unsigned X0     = 0,
  parameter int unsigned SWEEP_W = 48,
  localparam int unsigned N      = NX * LY * LZ,
  localparam int unsigned NCOLOR = ncolor_for(LZ),
  localparam int unsigned CW     = clog2_min1(NCOLOR),
  localparam int unsigned UW     = clog2_min1(N + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               run,
  output logic [N-1:0]       upd,
  output logic [CW-1:0]      color,
  output logic [UW-1:0]      n_upd,
  output logic               sweep_done,
  output logic [SWEEP_W-1:0] sweeps
);

  typedef logic [N-1:0] mask_t;
  typedef mask_t masks_t [NCOLOR];
  typedef logic [UW-1:0] sizes_t [NCOLOR];

  // Mask of color c, built most significant bit first.
  function automatic mask_t build_mask(int unsigned c);
    mask_t v;
    v = '0;
    for (int xl = int'(NX) - 1; xl >= 0; xl--)
      for (int y = int'(LY) - 1; y >= 0; y--)
        for (int z = int'(LZ) - 1; z >= 0; z--)
          v = (v << 1) | mask_t'(color_of(X0 + xl, y, z, LZ) == c);
    return v;
  endfunction

  function automatic int unsigned color_size(int unsigned c);
    int unsigned n;
    n = 0;
    for (int unsigned xl = 0; xl < NX; xl++)
      for (int unsigned y = 0; y < LY; y++)
        for (int unsigned z = 0; z < LZ; z++)
          if (color_of(X0 + xl, y, z, LZ) == c) n++;
    return n;
  endfunction

  masks_t mask_tab;
  sizes_t size_tab;
  for (genvar c = 0; c < int'(NCOLOR); c++) begin : g_color
    localparam mask_t       M = build_mask(c);
    localparam int unsigned S = color_size(c);
    assign mask_tab[c] = M;
    assign size_tab[c] = UW'(S);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      color  <= '0;
      sweeps <= '0;
    end else if (clear) begin
      color  <= '0;
      sweeps <= '0;
    end else if (run) begin
      if (32'(color) == NCOLOR - 1) begin
        color  <= '0;
        sweeps <= sweeps + 1'b1;
      end else begin
        color <= color + 1'b1;
      end
    end
  end

  always_comb begin
    upd        = run ? mask_tab[color] : '0;
    n_upd      = run ? size_tab[color] : '0;
    sweep_done = run && (32'(color) == NCOLOR - 1);
  end

endmodule
