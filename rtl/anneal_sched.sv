// anneal_sched: simulated-annealing schedule of the inverse temperature.
//
// beta starts at beta0 and is raised by beta_step after every
// sweeps_per_beta completed sweeps until it reaches beta_end, where it
// stays (a linear ladder such as 0.5, 1.0, ..., 5.0, all in s{4}{1}).
// The ladder values are the machine's; that the ladder is stepped on chip,
// by a sweep count, is this design's choice.
//
// Interface: start (pulse) loads beta0 and restarts the count; sweep_done
// is the sweep pulse of color_sched; done is high once beta_end has been
// held for sweeps_per_beta sweeps. sweeps_per_beta = 0 is treated as 1.
// Timing: beta changes on the clock after the sweep that completes a step.
module anneal_sched
  import dsim_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             sweep_done,
  input  fix_t             beta0,
  input  fix_t             beta_step,
  input  fix_t             beta_end,
  input  logic [CNT_W-1:0] sweeps_per_beta,
  output fix_t             beta,
  output logic             done
);

  logic [CNT_W-1:0] cnt;
  logic [CNT_W-1:0] limit;
  logic signed [FX_W:0] next;

  assign limit = (sweeps_per_beta == '0) ? CNT_W'(1) : sweeps_per_beta;
  assign next  = (FX_W+1)'(beta) + (FX_W+1)'(beta_step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beta <= '0;
      cnt  <= '0;
      done <= 1'b0;
    end else if (start) begin
      beta <= beta0;
      cnt  <= '0;
      done <= 1'b0;
    end else if (sweep_done && !done) begin
      if (cnt == limit - 1'b1) begin
        cnt <= '0;
        if (beta >= beta_end) done <= 1'b1;
        else if (next > (FX_W+1)'(beta_end)) beta <= beta_end;
        else beta <= fix_t'(next);
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
