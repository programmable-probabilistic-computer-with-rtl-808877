// tb_color_sched: runs two small schedulers, one on an odd ring (LZ = 5,
// three colors, slab starting at X0 = 1) and one on an even ring (LZ = 4,
// two colors), and checks that every enabled group holds no two lattice
// neighbours, that each sweep updates every p-bit exactly once in NCOLOR
// cycles, that n_upd is the group size, sweep_done and the sweep count,
// and that nothing is enabled while run is low.
module tb_color_sched;
  localparam int NX = 2, LY = 3;

  logic clk = 0, rst_n = 0, clear = 0, run = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // odd ring
  localparam int LZA = 5, NA = NX * LY * LZA;
  logic [NA-1:0] upd_a; logic [1:0] color_a; logic [$clog2(NA+1)-1:0] n_a;
  logic sd_a; logic [47:0] sw_a;
  color_sched #(.NX(NX), .LY(LY), .LZ(LZA), .X0(1)) dut_a (
    .clk, .rst_n, .clear, .run, .upd(upd_a), .color(color_a), .n_upd(n_a),
    .sweep_done(sd_a), .sweeps(sw_a));
  // even ring
  localparam int LZB = 4, NBB = NX * LY * LZB;
  logic [NBB-1:0] upd_b; logic [0:0] color_b; logic [$clog2(NBB+1)-1:0] n_b;
  logic sd_b; logic [47:0] sw_b;
  color_sched #(.NX(NX), .LY(LY), .LZ(LZB), .X0(1)) dut_b (
    .clk, .rst_n, .clear, .run, .upd(upd_b), .color(color_b), .n_upd(n_b),
    .sweep_done(sd_b), .sweeps(sw_b));

  // true when the mask holds two neighbours
  function automatic bit conflict(logic [NA-1:0] mk, int lz);
    for (int i = 0; i < NX*LY*lz; i++) if (mk[i]) begin
      int x, y, z;
      x = i / (LY*lz); y = (i / lz) % LY; z = i % lz;
      if (x + 1 < NX && mk[i + LY*lz]) return 1;
      if (y + 1 < LY && mk[i + lz]) return 1;
      if (mk[(x*LY + y)*lz + (z + 1) % lz]) return 1;
    end
    return 0;
  endfunction

  // Watches cycles cycles of one scheduler while it runs.
  task automatic watch(int cycles, int ncol, int lz, bit is_a);
    logic [NA-1:0] seen, cur; int n, col; logic sd; bit started;
    seen = '0; started = 0;
    for (int t = 0; t < cycles; t++) begin
      @(negedge clk);
      cur = is_a ? upd_a : NA'(upd_b);
      n   = is_a ? int'(n_a) : int'(n_b);
      sd  = is_a ? sd_a : sd_b;
      col = is_a ? int'(color_a) : int'(color_b);
      checks += 4;
      if (conflict(cur, lz)) begin failures++; $display("neighbours share a color (lz=%0d)", lz); end
      if ($countones(cur) != n) begin failures++; $display("n_upd %0d vs %0d", n, $countones(cur)); end
      if (sd != (col == ncol - 1)) begin failures++; $display("sweep_done at color %0d", col); end
      if (col >= ncol) begin failures++; $display("color %0d out of range", col); end
      if (col == 0) begin started = 1; seen = '0; end
      if (started) begin
        if ((seen & cur) != '0) begin failures++; $display("p-bit updated twice in a sweep"); end
        seen |= cur;
        if (sd) begin
          checks++;
          if (seen != ({NA{1'b1}} >> (NA - NX*LY*lz))) begin failures++; $display("sweep missed p-bits"); end
        end
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks += 2;
    if (upd_a != '0 || upd_b != '0) failures++;
    if (sw_a != 0 || sw_b != 0) failures++;
    run = 1;
    watch(60, 3, LZA, 1);
    run = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++; if (sw_a != 0 || color_a != 0) begin failures++; $display("clear"); end
    run = 1;
    watch(60, 2, LZB, 0);
    // sweep count while running continuously for 30 cycles
    run = 0; @(negedge clk); clear = 1; @(negedge clk); clear = 0; run = 1;
    repeat (30) @(negedge clk);
    checks += 2;
    if (sw_a != 10) begin failures++; $display("3-color sweeps %0d after 30 cycles", sw_a); end
    if (sw_b != 15) begin failures++; $display("2-color sweeps %0d after 30 cycles", sw_b); end
    run = 0; @(negedge clk);
    checks++; if (upd_a != '0 || n_a != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
