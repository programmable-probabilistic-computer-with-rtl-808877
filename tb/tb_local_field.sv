// tb_local_field: random states, halos, weights, biases and beta into two
// small slabs (one in the middle of the chain, one at its left end) and a
// comparison of every local field with a model that works on real
// numbers: I = beta * (h + sum J m), with open x/y and periodic z
// boundaries, halos at the slab faces, then floor to a multiple of 0.5
// and saturation to [-16, 15.5]. Also checks the isolate mode.
module tb_local_field;
  import dsim_pkg::*;
  localparam int NX = 3, LY = 3, LZ = 4;
  localparam int N = NX * LY * LZ, NB = LY * LZ;

  logic [N-1:0] m;
  logic [NB-1:0] halo_l, halo_r;
  logic isolate;
  fix_t J [N][NDIR];
  fix_t h [N];
  fix_t beta;
  fix_t fld_mid [N], fld_end [N];
  int checks = 0, failures = 0;

  local_field #(.NX(NX), .LY(LY), .LZ(LZ), .HAS_LEFT(1), .HAS_RIGHT(1)) dut_mid (
    .m, .halo_l, .halo_r, .isolate, .J, .h, .beta, .fld(fld_mid));
  local_field #(.NX(NX), .LY(LY), .LZ(LZ), .HAS_LEFT(0), .HAS_RIGHT(1)) dut_end (
    .m, .halo_l, .halo_r, .isolate, .J, .h, .beta, .fld(fld_end));

  function automatic real spin(logic b); return b ? 1.0 : -1.0; endfunction

  function automatic int model(int i, bit has_left);
    int x, y, z; real s, f; int q;
    x = i / (LY * LZ); y = (i / LZ) % LY; z = i % LZ;
    s = real'(h[i]) / 2.0;
    if (x > 0) s += real'(J[i][0]) / 2.0 * spin(m[i - LY*LZ]);
    else if (has_left && !isolate) s += real'(J[i][0]) / 2.0 * spin(halo_l[y*LZ + z]);
    if (x < NX - 1) s += real'(J[i][1]) / 2.0 * spin(m[i + LY*LZ]);
    else if (!isolate) s += real'(J[i][1]) / 2.0 * spin(halo_r[y*LZ + z]);
    if (y > 0) s += real'(J[i][2]) / 2.0 * spin(m[i - LZ]);
    if (y < LY - 1) s += real'(J[i][3]) / 2.0 * spin(m[i + LZ]);
    s += real'(J[i][4]) / 2.0 * spin(m[(x*LY + y)*LZ + (z + LZ - 1) % LZ]);
    s += real'(J[i][5]) / 2.0 * spin(m[(x*LY + y)*LZ + (z + 1) % LZ]);
    f = real'(beta) / 2.0 * s;
    q = int'($floor(f * 2.0));        // in units of 0.5
    if (q > 31) q = 31;
    if (q < -32) q = -32;
    return q;
  endfunction

  initial begin
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N; i++) m[i] = 1'($urandom);
      halo_l = NB'($urandom); halo_r = NB'($urandom);
      isolate = (t % 5) == 4;
      for (int i = 0; i < N; i++) begin
        h[i] = fix_t'($urandom);
        for (int d = 0; d < NDIR; d++) J[i][d] = fix_t'($urandom);
        if (t < 100) begin   // small values, away from saturation
          h[i] = fix_t'($signed(3'($urandom)));
          for (int d = 0; d < NDIR; d++) J[i][d] = fix_t'($signed(2'($urandom)));
        end
      end
      beta = (t < 100) ? fix_t'($urandom % 4) : fix_t'($urandom % 32);
      #1;
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (int'(fld_mid[i]) != model(i, 1)) begin
          failures++; if (failures < 10) $display("mid i=%0d got %0d expected %0d", i, fld_mid[i], model(i, 1));
        end
        if (int'(fld_end[i]) != model(i, 0)) begin
          failures++; if (failures < 10) $display("end i=%0d got %0d expected %0d", i, fld_end[i], model(i, 0));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
