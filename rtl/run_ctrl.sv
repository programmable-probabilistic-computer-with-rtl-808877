// run_ctrl: common run counter and broadcast disable.
//
// Runs on the reference clock (125 MHz on the machine). start opens a run:
// run_en goes high and the counter counts reference cycles; when it reaches
// the programmable preset, run_en drops (the broadcast disable that stops
// every partition and every flip counter at once) and done rises. The
// elapsed count gives the annealing time as elapsed / f_ref. The same
// counter serves the flip-rate window (for example a preset of 50,000).
// stop_req ends a run early. A preset of 0 ends the run after one cycle.
//
// Interface: preset is sampled at start. Timing: run_en is registered; it
// is high for exactly max(preset,1) reference cycles.
module run_ctrl #(
  parameter int unsigned CNT_W = 48
) (
  input  logic             clk_ref,
  input  logic             rst_n,
  input  logic             start,
  input  logic             stop_req,
  input  logic [CNT_W-1:0] preset,
  output logic             run_en,
  output logic             done,
  output logic [CNT_W-1:0] elapsed
);

  logic [CNT_W-1:0] limit;

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      run_en  <= 1'b0;
      done    <= 1'b0;
      elapsed <= '0;
      limit   <= '0;
    end else if (start) begin
      run_en  <= 1'b1;
      done    <= 1'b0;
      elapsed <= '0;
      limit   <= (preset == '0) ? CNT_W'(1) : preset;
    end else if (run_en) begin
      if (stop_req || (elapsed + 1'b1 == limit)) begin
        run_en <= 1'b0;
        done   <= 1'b1;
      end
      elapsed <= elapsed + 1'b1;
    end
  end

endmodule
