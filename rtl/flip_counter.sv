// flip_counter: on-chip flip-rate counters, one per color group.
//
// While en is high, each cycle adds the number of p-bits updated in that
// cycle (n_upd, from color_sched) to the counter of the active color. en is
// the broadcast enable of run_ctrl, brought into this clock domain, so all
// partitions stop counting together when the run window closes; the host
// then sums the per-color counts over all partitions and divides by the
// window length to obtain flips per second. A "flip" here is one p-bit
// update, whatever its outcome: with every p-bit updated once per p-bit
// clock this gives N * f_p-bit, the flip rates the machine is quoted with.
//
// Interface: clear zeroes all counters; cnt[c] is the count of color c.
// Timing: a count appears the cycle after the update it counts.
module flip_counter #(
  parameter int unsigned NCOLOR = 3,
  parameter int unsigned UW     = 14,
  parameter int unsigned CNT_W  = 48,
  localparam int unsigned CW    = (NCOLOR <= 2) ? 1 : $clog2(NCOLOR)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en,
  input  logic [CW-1:0]    color,
  input  logic [UW-1:0]    n_upd,
  output logic [CNT_W-1:0] cnt [NCOLOR]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < NCOLOR; c++) cnt[c] <= '0;
    end else if (clear) begin
      for (int unsigned c = 0; c < NCOLOR; c++) cnt[c] <= '0;
    end else if (en && (32'(color) < NCOLOR)) begin
      cnt[color] <= cnt[color] + CNT_W'(n_upd);
    end
  end

endmodule
