// local_field: local fields of all p-bits of one slab partition.
//
// For every p-bit i it forms
//     S_i = h_i + sum_d J[i][d] * m_nb(i,d)      (m = +-1, so a +-J term)
//     I_i = clamp( beta * S_i )                  (in s{4}{1})
// over the six lattice neighbours. The slab holds NX planes of LY x LZ
// sites; local index i = (xl*LY + y)*LZ + z. Neighbours in y are open, in z
// periodic. A -x neighbour of plane 0 is read from halo_l (the last
// boundary states received from the partition on the left), a +x neighbour
// of plane NX-1 from halo_r; at the ends of the chain (HAS_LEFT/HAS_RIGHT
// = 0) the lattice is open and the term is dropped. With isolate high all
// halo terms are dropped, as if the boundary links were disconnected.
// beta*S_i carries two fractional bits; it is shifted right by one
// (rounding toward minus infinity) and saturated to the s{4}{1} range.
// The field equation is the machine's; rounding and saturation are this
// design's.
//
// Interface: purely combinational. halo index = y*LZ + z.
// Lint note: the loop index variables are 32 bits wide and only their low
// bits are used, which draws an unused-bits warning.
module local_field
  import dsim_pkg::*;
#(
  parameter int unsigned NX        = 6,
  parameter int unsigned LY        = 37,
  parameter int unsigned LZ        = 37,
  parameter bit          HAS_LEFT  = 1'b1,
  parameter bit          HAS_RIGHT = 1'b1,
  localparam int unsigned N        = NX * LY * LZ,
  localparam int unsigned NB       = LY * LZ
) (
  input  logic [N-1:0]  m,
  input  logic [NB-1:0] halo_l,
  input  logic [NB-1:0] halo_r,
  input  logic          isolate,
  input  fix_t          J [N][NDIR],
  input  fix_t          h [N],
  input  fix_t          beta,
  output fix_t          fld [N]
);

  localparam int unsigned PW = SUM_W + FX_W;   // product width
  typedef logic signed [PW-1:0] prod_t;

  function automatic sum_t term(fix_t w, logic s);
    return s ? sum_t'(w) : -sum_t'(w);
  endfunction

  function automatic fix_t clamp(prod_t p);
    prod_t q;
    q = p >>> 1;                               // 2 -> 1 fractional bits
    if (q > prod_t'(FX_MAX)) return FX_MAX;
    if (q < prod_t'(FX_MIN)) return FX_MIN;
    return fix_t'(q);
  endfunction

  always_comb begin
    for (int unsigned xl = 0; xl < NX; xl++) begin
      for (int unsigned y = 0; y < LY; y++) begin
        for (int unsigned z = 0; z < LZ; z++) begin
          int unsigned i, hb, zm, zp;
          sum_t s;
          i  = (xl * LY + y) * LZ + z;
          hb = y * LZ + z;
          zm = (z == 0) ? LZ - 1 : z - 1;
          zp = (z == LZ - 1) ? 0 : z + 1;
          s  = sum_t'(h[i]);
          // -x
          if (xl > 0)                   s = s + term(J[i][DIR_XM], m[i - LY*LZ]);
          else if (HAS_LEFT && !isolate) s = s + term(J[i][DIR_XM], halo_l[hb]);
          // +x
          if (xl < NX - 1)              s = s + term(J[i][DIR_XP], m[i + LY*LZ]);
          else if (HAS_RIGHT && !isolate) s = s + term(J[i][DIR_XP], halo_r[hb]);
          // y (open)
          if (y > 0)      s = s + term(J[i][DIR_YM], m[i - LZ]);
          if (y < LY - 1) s = s + term(J[i][DIR_YP], m[i + LZ]);
          // z (periodic); a ring of one or two sites has no distinct pair
          if (LZ > 2) begin
            s = s + term(J[i][DIR_ZM], m[i - z + zm]);
            s = s + term(J[i][DIR_ZP], m[i - z + zp]);
          end else if (LZ == 2) begin
            s = s + term(J[i][DIR_ZP], m[i - z + zp]);
          end
          fld[i] = clamp(prod_t'(s) * prod_t'(beta));
        end
      end
    end
  end

endmodule
