// tb_dsim_top: end-to-end run of a three-partition machine on a 6x6x6
// lattice, each partition on its own update and link clocks.
//  A. Transport over two hops: partition 0 is pinned to a pattern by its
//     biases; partition 1 copies it through the link (J = +15.5 to its
//     left halo), partition 2 copies the complement (J = -15.5). All six
//     planes must show the expected pattern, again after the pattern flips.
//  B. Annealing a ferromagnet: J = +1 on every bond, shadow weights
//     written on both sides of each cut, beta 0.5 .. 5.0. The chain must
//     end almost fully ordered, across the cuts as well, which only
//     happens if boundary states are exchanged.
//  C. Broadcast stop: a run_ctrl window stops every partition; each must
//     have made f_clk / (NCOLOR) sweeps per unit time, stop counting after
//     the window and hold flip counts equal to N per sweep.
//  D. Mode switches: isolate, link disable, reseed.
// Each mechanism is counted and one that never happened is a failure.
module tb_dsim_top;
  import dsim_pkg::*;
  localparam int L = 6, NP = 3, AW = 12, NB = L * L;
  localparam int C = 1 << (AW - 1);

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
  int n_refresh = 0, n_stop = 0, n_anneal = 0, n_isolate = 0, n_linkoff = 0, n_reseed = 0, n_flip = 0;

  dsim_top #(.L(L), .NPART(NP), .LINK_PINS('{5, 3, 4, 4, 4}), .HOST_AW(AW)) dut (.*);

  // independent clocks (half periods)
  always #10 clk_pbit[0] = ~clk_pbit[0];
  always #12 clk_pbit[1] = ~clk_pbit[1];
  always #8  clk_pbit[2] = ~clk_pbit[2];
  always #3  clk_comm[0] = ~clk_comm[0];
  always #2  clk_comm[1] = ~clk_comm[1];
  always #4  clk_comm[2] = ~clk_comm[2];
  always #4  clk_ref = ~clk_ref;

  function automatic int nloc(int k);
    return (((k + 1) * L) / NP - (k * L) / NP) * NB;
  endfunction

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
  // global lattice state, index ((x*L)+y)*L+z
  logic [L*L*L-1:0] g;
  task automatic read_all();
    for (int k = 0; k < NP; k++)
      for (int i = 0; i < nloc(k); i++) begin
        rd(k, i << 3); g[((k * L) / NP) * NB + i] = v[0];
      end
  endtask
  task automatic run_for(int refcycles);
    @(negedge clk_ref); run_preset = 48'(refcycles); run_start = 1;
    @(negedge clk_ref); run_start = 0;
    while (!run_done) @(negedge clk_ref);
    repeat (10) @(negedge clk_ref);
  endtask
  task automatic start_all(int b0, int st, int be, int spb);
    for (int k = 0; k < NP; k++) begin
      wr(k, C | 0, b0); wr(k, C | 1, st); wr(k, C | 2, be); wr(k, C | 3, spb); wr(k, C | 5, 1);
    end
  endtask
  task automatic clear_weights();
    for (int k = 0; k < NP; k++)
      for (int i = 0; i < nloc(k); i++)
        for (int sl = 0; sl < 7; sl++) wr(k, (i << 3) | sl, 0);
  endtask
  longint refr0;
  task automatic total_refresh(output longint r);
    r = 0;
    for (int k = 0; k < NP; k++) begin rd(k, C | 13); r += longint'(v); rd(k, C | 14); r += longint'(v); end
  endtask

  initial begin
    #60000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NB-1:0] pat;
    longint r1, r2;
    for (int k = 0; k < NP; k++) begin host_addr[k] = '0; host_raddr[k] = '0; host_wdata[k] = '0; end
    #50 rst_n = 1;
    // ---------------- A: transport over two links ----------------
    pat = NB'({$urandom, $urandom});
    for (int i = 0; i < nloc(0); i++) wr(0, (i << 3) | SLOT_H, pat[i % NB] ? 31 : -31);
    for (int i = 0; i < nloc(1); i++) wr(1, (i << 3) | DIR_XM, 31);
    for (int i = 0; i < NB; i++)      wr(2, (i << 3) | DIR_XM, -31);
    for (int i = NB; i < nloc(2); i++) wr(2, (i << 3) | DIR_XM, 31);
    start_all(10, 0, 10, 1000);
    for (int round = 0; round < 2; round++) begin
      if (round == 1) begin
        pat = ~pat;
        for (int i = 0; i < nloc(0); i++) wr(0, (i << 3) | SLOT_H, pat[i % NB] ? 31 : -31);
      end
      total_refresh(r1);
      run_for(1500);
      total_refresh(r2);
      if (r2 > r1) n_refresh++;
      read_all();
      for (int x = 0; x < L; x++) begin
        checks++;
        if (g[x*NB +: NB] != ((x < 4) ? pat : ~pat)) begin
          failures++; $display("A round %0d: plane %0d wrong", round, x);
        end
      end
    end
    // ---------------- D1: isolate breaks the chain ----------------
    for (int k = 0; k < NP; k++) wr(k, C | 6, 3);
    n_isolate++;
    run_for(1500);
    read_all();
    checks++;
    if (g[4*NB +: NB] == ~pat) begin failures++; $display("isolate: plane 4 still follows"); end
    for (int k = 0; k < NP; k++) wr(k, C | 6, 2);
    // ---------------- D2: links disabled, no refresh ----------------
    for (int k = 0; k < NP; k++) wr(k, C | 6, 0);
    run_for(200);                               // drain words in flight
    total_refresh(r1); run_for(1500); total_refresh(r2);
    checks++;
    if (r2 != r1) begin failures++; $display("refresh with links off"); end
    else n_linkoff++;
    for (int k = 0; k < NP; k++) wr(k, C | 6, 2);
    // ---------------- B: ferromagnet anneal ----------------
    clear_weights();
    for (int k = 0; k < NP; k++) begin
      int x0; x0 = (k * L) / NP;
      for (int i = 0; i < nloc(k); i++) begin
        int x, y;
        x = x0 + i / NB; y = (i / L) % L;
        if (x > 0)     wr(k, (i << 3) | DIR_XM, 2);
        if (x < L - 1) wr(k, (i << 3) | DIR_XP, 2);
        if (y > 0)     wr(k, (i << 3) | DIR_YM, 2);
        if (y < L - 1) wr(k, (i << 3) | DIR_YP, 2);
        wr(k, (i << 3) | DIR_ZM, 2); wr(k, (i << 3) | DIR_ZP, 2);
      end
    end
    for (int k = 0; k < NP; k++) begin wr(k, C | 4, 32'h1234 + k); wr(k, C | 5, 2); end
    n_reseed++;
    start_all(1, 1, 10, 30);                    // 10 levels x 30 sweeps
    run_for(6000);
    checks++;
    if (anneal_done != '1) begin failures++; $display("anneal not done: %b", anneal_done); end
    else n_anneal++;
    read_all();
    begin
      int sat, tot, csat, ctot;
      sat = 0; tot = 0; csat = 0; ctot = 0;
      for (int x = 0; x < L; x++) for (int y = 0; y < L; y++) for (int z = 0; z < L; z++) begin
        int i; i = (x*L + y)*L + z;
        if (x < L - 1) begin
          tot++; sat += int'(g[i] == g[i + NB]);
          if (x == 1 || x == 3) begin ctot++; csat += int'(g[i] == g[i + NB]); end
        end
        if (y < L - 1) begin tot++; sat += int'(g[i] == g[i + L]); end
        tot++; sat += int'(g[i] == g[(x*L + y)*L + (z + 1) % L]);
      end
      checks += 2;
      if (sat * 100 < tot * 90) begin failures++; $display("ferromagnet: %0d of %0d bonds satisfied", sat, tot); end
      if (csat * 100 < ctot * 90) begin failures++; $display("ferromagnet: %0d of %0d cut bonds satisfied", csat, ctot); end
    end
    // ---------------- C: broadcast stop and flip counts ----------------
    start_all(10, 0, 10, 1000);
    run_for(5000);                              // 40000 time units
    begin
      longint s0 [NP]; longint fl;
      for (int k = 0; k < NP; k++) begin rd(k, C | 1); s0[k] = longint'(v); end
      repeat (200) @(negedge clk_ref);
      for (int k = 0; k < NP; k++) begin
        int per, exp_sw;
        per = (k == 0) ? 20 : (k == 1) ? 24 : 16;
        exp_sw = 40000 / (per * 2);             // L even: 2 colors
        rd(k, C | 1);
        checks += 3;
        if (longint'(v) != s0[k]) begin failures++; $display("partition %0d kept running", k); end
        if (s0[k] < exp_sw - 3 || s0[k] > exp_sw + 3) begin
          failures++; $display("partition %0d: %0d sweeps, expected %0d", k, s0[k], exp_sw);
        end
        fl = 0;
        for (int c = 0; c < 2; c++) begin rd(k, C | (2 + c)); fl += longint'(v); end
        if (fl < s0[k] * nloc(k) || fl > (s0[k] + 1) * nloc(k)) begin
          failures++; $display("partition %0d: %0d flips for %0d sweeps", k, fl, s0[k]);
        end
        else n_flip++;
      end
      n_stop++;
      checks++;
      if (run_elapsed != 5000) begin failures++; $display("elapsed %0d", run_elapsed); end
    end
    // framing errors never
    for (int k = 0; k < NP; k++) begin
      rd(k, C | 9); checks++; if (v != 0) failures++;
      rd(k, C | 10); checks++; if (v != 0) failures++;
    end
    // every mechanism seen
    $display("mechanisms: refresh=%0d isolate=%0d linkoff=%0d reseed=%0d anneal=%0d stop=%0d flips=%0d",
             n_refresh, n_isolate, n_linkoff, n_reseed, n_anneal, n_stop, n_flip);
    checks += 7;
    if (n_refresh == 0) failures++;
    if (n_isolate == 0) failures++;
    if (n_linkoff == 0) failures++;
    if (n_reseed == 0) failures++;
    if (n_anneal == 0) failures++;
    if (n_stop == 0) failures++;
    if (n_flip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
