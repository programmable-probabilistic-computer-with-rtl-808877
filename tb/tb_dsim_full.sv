// tb_dsim_full: one complete run of the machine at its default size: a
// 37 x 37 x 37 Edwards-Anderson spin glass (50,653 p-bits) on six
// partitions in a chain, the links at their default pin counts.
//
// Operation, as a host would do it:
//  1. Load every coupling J = +-1 of the instance into every partition. A
//     bond cut by a partition boundary is written into both partitions
//     (its shadow copy), with the same sign. Signs come from a fixed hash
//     of the bond, so the testbench can recompute them at any time.
//  2. Program the annealing ladder beta = 0.5, 1.0 .. 5.0 with SPB sweeps
//     per level and start all partitions; open one common run window.
//  3. Read back every state and count sweeps and flips.
// Checks: every partition finished its ladder and stopped with the window;
// sweeps match f_clk / NCOLOR over the window; flip counts equal N per
// sweep; no framing errors; the final energy per spin is far below the
// random-state value 0, and the bonds that cross partition boundaries are
// satisfied about as often as those inside partitions (which only happens
// if boundary states really travel over the links).
// Clocks: each partition has its own update clock (periods 60/62/58/60/
// 64/56 time units) and a 2-unit link clock during the run, so
// eta = f_comm / f_pbit is about 30. While the weights load, all update
// clocks share one period and the link clocks are slowed, only to keep
// the load simple and the simulation short.
module tb_dsim_full;
  import dsim_pkg::*;
  localparam int L = 37, NP = 6, AW = 20, NB = L * L, NC = 3;
  localparam int C = 1 << (AW - 1);
  localparam int SPB = 8;                       // sweeps per beta level

  logic [NP-1:0] clk_pbit = '0, clk_comm = '0;
  logic clk_ref = 0, rst_n = 0;
  logic [NP-1:0] host_we = '0;
  logic [AW-1:0] host_addr [NP], host_raddr [NP];
  logic [31:0] host_wdata [NP];
  logic [63:0] host_rdata [NP];
  logic [47:0] sweeps [NP];
  logic [NP-1:0] anneal_done;
  logic run_start = 0, run_stop = 0, run_en, run_done;
  logic [47:0] run_preset = '0, run_elapsed;
  int checks = 0, failures = 0;

  dsim_top dut (.*);

  int hp [NP] = '{30, 30, 30, 30, 30, 30};
  int hc = 40;                                  // link clock half period
  for (genvar k = 0; k < NP; k++) begin : g_clk
    always #(hp[k]) clk_pbit[k] = ~clk_pbit[k];
    always #(hc + k % 2) clk_comm[k] = ~clk_comm[k];
  end
  always #4 clk_ref = ~clk_ref;

  function automatic int x0(int k);
    return (k * L) / NP;
  endfunction
  function automatic int nloc(int k);
    return (x0(k + 1) - x0(k)) * NB;
  endfunction
  // sign of the bond from site (x,y,z) to its + neighbour along axis a
  function automatic bit jpos(int x, int y, int z, int a);
    logic [31:0] v;
    v = 32'(((x * L + y) * L + z) * 3 + a) * 32'h9E37_79B9;
    v = v ^ (v >> 16);
    v = v * 32'h85EB_CA6B;
    v = v ^ (v >> 13);
    return v[7];
  endfunction
  function automatic int jcode(bit p);
    return p ? 2 : -2;                          // +-1.0 in s{4}{1}
  endfunction

  function automatic int wcode(int k, int i, int sl);
    int x, y, z;
    x = x0(k) + i / NB; y = (i / L) % L; z = i % L;
    case (sl)
      DIR_XM: return (x > 0)     ? jcode(jpos(x - 1, y, z, 0)) : 0;
      DIR_XP: return (x < L - 1) ? jcode(jpos(x, y, z, 0)) : 0;
      DIR_YM: return (y > 0)     ? jcode(jpos(x, y - 1, z, 1)) : 0;
      DIR_YP: return (y < L - 1) ? jcode(jpos(x, y, z, 1)) : 0;
      DIR_ZM: return jcode(jpos(x, y, (z + L - 1) % L, 2));
      default: return jcode(jpos(x, y, z, 2));
    endcase
  endfunction

  // All partitions are written in the same cycles; during the load every
  // update clock runs at the same period and phase.
  task automatic load_all();
    for (int i = 0; i < nloc(NP - 1); i++)
      for (int sl = 0; sl < 6; sl++) begin
        @(negedge clk_pbit[0]);
        for (int k = 0; k < NP; k++) begin
          host_we[k] = (i < nloc(k));
          host_addr[k] = AW'((i << 3) | sl);
          host_wdata[k] = 32'(wcode(k, i, sl));
        end
      end
    @(negedge clk_pbit[0]);
    host_we = '0;
  endtask

  task automatic wr(int k, int a, int d);
    @(negedge clk_pbit[k]);
    host_we[k] = 1; host_addr[k] = AW'(a); host_wdata[k] = 32'(d);
    @(negedge clk_pbit[k]);
    host_we[k] = 0;
  endtask
  logic [63:0] v;
  task automatic rd(int k, int a);
    host_raddr[k] = AW'(a); #1; v = host_rdata[k];
  endtask

  logic [L*L*L-1:0] g;

  initial begin
    #400000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t0, s0 [NP];
    for (int k = 0; k < NP; k++) begin host_addr[k] = '0; host_raddr[k] = '0; host_wdata[k] = '0; end
    #100 rst_n = 1;
    // ---- 1. weights ----
    load_all();
    hp = '{30, 31, 29, 30, 32, 28};
    $display("weights loaded at t=%0t", $time);
    // ---- 2. anneal ----
    hc = 1;
    repeat (200) @(negedge clk_ref);
    for (int k = 0; k < NP; k++) begin
      wr(k, C | 0, 1); wr(k, C | 1, 1); wr(k, C | 2, 10); wr(k, C | 3, SPB);
      wr(k, C | 4, 32'hC0FFEE + k); wr(k, C | 5, 3);       // reseed + start
    end
    @(negedge clk_ref); t0 = $time;
    run_preset = 48'(12 * SPB * 3 * 64 / 8); run_start = 1;  // ~12 levels' worth
    @(negedge clk_ref); run_start = 0;
    while (!run_done) @(negedge clk_ref);
    repeat (100) @(negedge clk_ref);
    $display("run done at t=%0t, elapsed %0d", $time, run_elapsed);
    checks++;
    if (run_elapsed != run_preset) begin failures++; $display("elapsed %0d", run_elapsed); end
    // ---- 3. read back ----
    for (int k = 0; k < NP; k++) begin
      longint fl;
      int exp_sw;
      rd(k, C | 1); s0[k] = longint'(v);
      exp_sw = int'(run_preset) * 8 / (2 * hp[k] * NC);
      checks += 3;
      if (s0[k] < exp_sw - 3 || s0[k] > exp_sw + 3) begin
        failures++; $display("partition %0d: %0d sweeps, expected %0d", k, s0[k], exp_sw);
      end
      fl = 0;
      for (int c = 0; c < NC; c++) begin rd(k, C | (2 + c)); fl += longint'(v); end
      if (fl < s0[k] * nloc(k) || fl > (s0[k] + 1) * nloc(k)) begin
        failures++; $display("partition %0d: %0d flips for %0d sweeps", k, fl, s0[k]);
      end
      rd(k, C | 8);
      if (v[1:0] != 2'b10) begin failures++; $display("partition %0d: done/run = %b", k, v[1:0]); end
      rd(k, C | 9);  checks++; if (v != 0) begin failures++; $display("left frame errors"); end
      rd(k, C | 10); checks++; if (v != 0) begin failures++; $display("right frame errors"); end
      rd(k, C | 15); checks++; if (int'(v) != nloc(k)) begin failures++; $display("N = %0d", v); end
      $display("partition %0d: x0=%0d N=%0d sweeps=%0d flips=%0d", k, x0(k), nloc(k), s0[k], fl);
    end
    repeat (100) @(negedge clk_ref);
    for (int k = 0; k < NP; k++) begin
      rd(k, C | 1); checks++;
      if (longint'(v) != s0[k]) begin failures++; $display("partition %0d kept running", k); end
    end
    for (int k = 0; k < NP; k++)
      for (int i = 0; i < nloc(k); i++) begin
        rd(k, i << 3); g[x0(k) * NB + i] = v[0];
      end
    begin
      int e, nin, sin, ncut, scut;
      real epn, fin, fcut;
      e = 0; nin = 0; sin = 0; ncut = 0; scut = 0;
      for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
        int i; bit s, cut;
        i = (x * L + y) * L + z;
        for (int a = 0; a < 3; a++) begin
          int j;
          if (a == 0 && x == L - 1) continue;
          if (a == 1 && y == L - 1) continue;
          j = (a == 0) ? i + NB : (a == 1) ? i + L : (x * L + y) * L + (z + 1) % L;
          s = (g[i] == g[j]) == jpos(x, y, z, a);          // bond satisfied
          e += s ? -1 : 1;
          cut = 0;
          for (int k = 1; k < NP; k++) if (a == 0 && x + 1 == x0(k)) cut = 1;
          if (cut) begin ncut++; scut += int'(s); end
          else begin nin++; sin += int'(s); end
        end
      end
      epn = real'(e) / real'(L * L * L);
      fin = real'(sin) / real'(nin);
      fcut = real'(scut) / real'(ncut);
      $display("energy per spin %f, satisfied bonds inside %f, across cuts %f", epn, fin, fcut);
      checks += 2;
      if (epn > -1.3) begin failures++; $display("energy too high"); end
      if (fcut < fin - 0.05) begin failures++; $display("cut bonds not relaxed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
