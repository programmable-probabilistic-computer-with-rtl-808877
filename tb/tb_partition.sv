// tb_partition: one middle partition of a 6x6x6 lattice cut into three
// slabs (planes 2 and 3), with the testbench playing both neighbours over
// the source-synchronous links on clocks of their own.
//  * Boundary path: plane 2 is coupled only to the left halo with
//    J = +15.5, plane 3 only to the right halo with J = -15.5, at beta = 5:
//    plane 2 must copy the word the left neighbour sends, plane 3 the
//    complement of the right neighbour's word, again after both words
//    change. The words the partition sends back must equal its face planes.
//  * isolate: with the halos ignored the same planes become random.
//  * flip counters: after a run window the per-color counts must add up
//    to N per completed sweep, and the sweep rate must be f_clk / NCOLOR.
//  * beta ladder, anneal_done, refresh counters and framing errors.
module tb_partition;
  import dsim_pkg::*;
  localparam int L = 6, NPART = 3, K = 1, PL = 5, PR = 3, AW = 12;
  localparam int NB = L * L, NX = 2, N = NX * NB;
  localparam int NFL = (NB + PL - 1) / PL, NFR = (NB + PR - 1) / PR;

  logic clk = 0, clk_comm = 0, clk_l = 0, clk_r = 0, rst_n = 0, run_en = 0;
  logic host_we = 0;
  logic [AW-1:0] host_addr = '0, host_raddr = '0;
  logic [31:0] host_wdata = '0;
  logic [63:0] host_rdata;
  logic [47:0] sweeps;
  logic anneal_done;
  logic l_tx_clk, l_tx_sync, r_tx_clk, r_tx_sync;
  logic [PL-1:0] l_tx_data; logic [PR-1:0] r_tx_data;
  logic l_rx_sync = 0, r_rx_sync = 0;
  logic [PL-1:0] l_rx_data = '0; logic [PR-1:0] r_rx_data = '0;
  int checks = 0, failures = 0;

  partition #(.L(L), .NPART(NPART), .K(K), .PL(PL), .PR(PR), .HOST_AW(AW)) dut (
    .clk, .clk_comm, .rst_n, .run_en, .host_we, .host_addr, .host_wdata,
    .host_raddr, .host_rdata, .sweeps, .anneal_done,
    .l_tx_clk, .l_tx_sync, .l_tx_data, .l_rx_clk(clk_l), .l_rx_sync, .l_rx_data,
    .r_tx_clk, .r_tx_sync, .r_tx_data, .r_rx_clk(clk_r), .r_rx_sync, .r_rx_data);

  always #10 clk = ~clk;        // update clock, 20 units
  always #3  clk_comm = ~clk_comm;
  always #4  clk_l = ~clk_l;
  always #5  clk_r = ~clk_r;

  // ---- neighbours: stream words continuously ----
  logic [NB-1:0] wl = '0, wr = '0;
  int fl = 0, fr = 0;
  always @(posedge clk_l) begin
    logic [NFL*PL-1:0] p; p = (NFL*PL)'(wl);
    l_rx_sync <= (fl == 0); l_rx_data <= p[fl*PL +: PL];
    fl <= (fl == NFL - 1) ? 0 : fl + 1;
  end
  always @(posedge clk_r) begin
    logic [NFR*PR-1:0] p; p = (NFR*PR)'(wr);
    r_rx_sync <= (fr == 0); r_rx_data <= p[fr*PR +: PR];
    fr <= (fr == NFR - 1) ? 0 : fr + 1;
  end
  // ---- neighbours: reassemble what the partition sends ----
  logic [NFL*PL-1:0] al; logic [NFR*PR-1:0] ar;
  logic [NB-1:0] got_l = '0, got_r = '0;
  int gl = -1, gr = -1;
  always @(posedge l_tx_clk) begin
    if (l_tx_sync) begin al[PL-1:0] = l_tx_data; gl = 1; end
    else if (gl > 0 && gl < NFL) begin al[gl*PL +: PL] = l_tx_data; gl++; end
    if (gl == NFL) begin got_l = NB'(al); gl = -1; end
  end
  always @(posedge r_tx_clk) begin
    if (r_tx_sync) begin ar[PR-1:0] = r_tx_data; gr = 1; end
    else if (gr > 0 && gr < NFR) begin ar[gr*PR +: PR] = r_tx_data; gr++; end
    if (gr == NFR) begin got_r = NB'(ar); gr = -1; end
  end

  // ---- host helpers ----
  task automatic wr_reg(int a, logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = AW'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic wr_w(int i, int slot, int code);
    wr_reg((i << 3) | slot, 32'(code));
  endtask
  logic [63:0] v;
  task automatic rd(int a);
    host_raddr = AW'(a); #1; v = host_rdata;
  endtask
  localparam int C = 1 << (AW - 1);
  logic [N-1:0] s;
  task automatic states();
    for (int i = 0; i < N; i++) begin host_raddr = AW'(i << 3); #1; s[i] = host_rdata[0]; end
  endtask

  initial begin
    #4000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int match;
    repeat (3) @(posedge clk); rst_n = 1;
    rd(C | 15); checks++; if (v != 64'(N)) begin failures++; $display("N readback"); end
    // couplings: plane 2 (local x 0) to the left halo, plane 3 to the right halo
    for (int i = 0; i < NB; i++) begin
      wr_w(i, DIR_XM, 31);            // +15.5
      wr_w(NB + i, DIR_XP, -31);      // -15.5
    end
    wr_reg(C | 0, 10); wr_reg(C | 1, 0); wr_reg(C | 2, 10); wr_reg(C | 3, 1000);
    wr_reg(C | 5, 1);                 // start: beta = 5.0
    for (int round = 0; round < 3; round++) begin
      wl = NB'({$urandom, $urandom}); wr = NB'({$urandom, $urandom});
      run_en = 1;
      repeat (40) @(posedge clk);     // link latency plus a few sweeps
      run_en = 0; repeat (4) @(posedge clk);
      states();
      checks += 4;
      if (s[NB-1:0] != wl)      begin failures++; $display("round %0d: plane 2 does not follow the left halo", round); end
      if (s[N-1:NB] != ~wr)     begin failures++; $display("round %0d: plane 3 does not follow the right halo", round); end
      repeat (60) @(posedge clk);     // let the outgoing snapshots drain
      if (got_l != s[NB-1:0])   begin failures++; $display("round %0d: left outgoing word", round); end
      if (got_r != s[N-1:NB])   begin failures++; $display("round %0d: right outgoing word", round); end
    end
    // isolate: halos ignored, fields 0, planes random
    wr_reg(C | 6, 3);
    match = 0;
    for (int t = 0; t < 20; t++) begin
      run_en = 1; repeat (8) @(posedge clk); run_en = 0; repeat (4) @(posedge clk);
      states();
      match += $countones(~(s[NB-1:0] ^ wl));
    end
    checks++;
    if (match < 20 * NB / 4 || match > 20 * NB * 3 / 4) begin
      failures++; $display("isolate: %0d of %0d matched", match, 20 * NB);
    end
    wr_reg(C | 6, 2);
    // flip counters and sweep rate over a fresh window
    wr_reg(C | 0, 1); wr_reg(C | 1, 1); wr_reg(C | 2, 10); wr_reg(C | 3, 2);
    wr_reg(C | 5, 1);
    run_en = 1;
    repeat (200) @(posedge clk);
    run_en = 0; repeat (4) @(posedge clk);
    begin
      longint tot; longint sw;
      tot = 0;
      for (int c = 0; c < 2; c++) begin rd(C | (2 + c)); tot += longint'(v); end
      rd(C | 1); sw = longint'(v);
      checks += 4;
      if (tot < sw * N || tot > (sw + 1) * N) begin failures++; $display("flips %0d for %0d sweeps", tot, sw); end
      if (sw < 98 || sw > 101) begin failures++; $display("%0d sweeps in 200 clocks, 2 colors", sw); end
      // 100 sweeps at 2 per beta step: the ladder 0.5..5.0 (10 levels) is done
      rd(C | 0);
      if (v != 10) begin failures++; $display("beta %0d", v); end
      if (!anneal_done) begin failures++; $display("anneal not done"); end
    end
    checks += 4;
    rd(C | 9);  if (v != 0) begin failures++; $display("left framing errors"); end
    rd(C | 10); if (v != 0) begin failures++; $display("right framing errors"); end
    rd(C | 13); if (v == 0) begin failures++; $display("no left halo refresh"); end
    rd(C | 14); if (v == 0) begin failures++; $display("no right halo refresh"); end
    rd(C | 11); if (v == 0) begin failures++; $display("no left words"); end
    rd(C | 12); if (v == 0) begin failures++; $display("no right words"); end
    rd(C | 1);  checks++; if (sweeps != v[47:0]) failures++;
    checks += 2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
