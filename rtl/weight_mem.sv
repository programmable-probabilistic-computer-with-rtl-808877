// weight_mem: on-chip coupling and bias memory of one partition.
//
// Every p-bit i has six coupling slots J[i][d] (d = -x,+x,-y,+y,-z,+z, see
// dsim_pkg::dir_e) and a bias h[i], all s{4}{1}. A coupling to a p-bit in a
// neighbouring partition is a shadow weight: the host writes the same J_ij
// into both partitions, so each side computes its local fields from its own
// memory and only 1-bit states cross the partition boundary. All weights are
// read in parallel every cycle, as the fully parallel p-bit array needs, so
// the memory is a register array rather than a block RAM; that, and the
// one-word-per-write host port, are this design's choices.
//
// Interface: host port in the partition clock domain. wr_en writes wr_data
// into slot wr_slot (0..5 = J, 6 = h) of p-bit wr_idx. Writes to slot 7 or
// to an index >= N are ignored.
// Timing: a write is visible on J/h the cycle after wr_en. Reset clears all.
module weight_mem
  import dsim_pkg::*;
#(
  parameter int unsigned N  = 8214,
  localparam int unsigned IW = clog2_min1(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_idx,
  input  logic [2:0]    wr_slot,
  input  fix_t          wr_data,
  output fix_t          J [N][NDIR],
  output fix_t          h [N]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) begin
        h[i] <= '0;
        for (int unsigned d = 0; d < NDIR; d++) J[i][d] <= '0;
      end
    end else if (wr_en && (32'(wr_idx) < N)) begin
      if (wr_slot == 3'(SLOT_H)) h[wr_idx] <= wr_data;
      else if (32'(wr_slot) < NDIR) J[wr_idx][wr_slot] <= wr_data;
    end
  end

endmodule
