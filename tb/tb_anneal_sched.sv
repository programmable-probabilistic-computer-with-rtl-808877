// tb_anneal_sched: runs the schedule 0.5, 1.0, ..., 5.0 with 3 sweeps per
// step and checks beta after every sweep pulse against the expected
// ladder, the done flag, a restart, a ladder whose step overshoots the end
// value, and that pulses arriving while done change nothing.
module tb_anneal_sched;
  import dsim_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, sweep_done = 0;
  fix_t beta0, beta_step, beta_end, beta;
  logic [31:0] spb;
  logic done;
  int checks = 0, failures = 0;

  anneal_sched dut (.clk, .rst_n, .start, .sweep_done, .beta0, .beta_step,
                    .beta_end, .sweeps_per_beta(spb), .beta, .done);
  always #5 clk = ~clk;

  task automatic pulse_start();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  endtask

  // sweeps pulses, expecting beta = b0 + floor(k/spb)*step capped at bend
  task automatic run_ladder(real b0, real st, real bend, int sp, int nsweeps);
    real e; int level; int nlev;
    nlev = int'($ceil((bend - b0) / st)) + 1;
    for (int k = 0; k < nsweeps; k++) begin
      level = k / sp;
      e = b0 + level * st; if (e > bend) e = bend;
      checks += 2;
      if (real'(beta) / 2.0 != e) begin
        failures++; $display("sweep %0d beta %f expected %f", k, real'(beta)/2.0, e);
      end
      if (done != (k >= nlev * sp)) begin failures++; $display("done=%0d at sweep %0d", done, k); end
      @(negedge clk); sweep_done = 1; @(negedge clk); sweep_done = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    beta0 = 1; beta_step = 1; beta_end = 10; spb = 3;
    repeat (2) @(posedge clk); rst_n = 1;
    pulse_start();
    run_ladder(0.5, 0.5, 5.0, 3, 36);        // 10 levels x 3 sweeps, then held
    checks++; if (!done) failures++;
    // restart mid-way with a step that overshoots: 1.0, 4.0, 7.0 -> capped at 8.5
    beta0 = 2; beta_step = 6; beta_end = 17; spb = 2;
    pulse_start();
    checks++; if (done || beta != 2) begin failures++; $display("restart"); end
    run_ladder(1.0, 3.0, 8.5, 2, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
