// dsim_top: distributed sparse Ising machine, NPART partitions in a chain.
//
// The L x L x L Edwards-Anderson lattice is cut into NPART slabs along x,
// one per partition (device). Neighbouring partitions are joined by a
// duplex source-synchronous link: partition k sends its +x face plane to
// k+1 over LINK_PINS[k] data pins plus a sync line and a forwarded clock,
// and k+1 sends its -x face back over as many pins. Every coupling weight,
// including the shadow copies of cut edges, lives in the partition that
// uses it, so only 1-bit states cross the links. Each partition may run on
// its own update clock clk_pbit[k] and link clock clk_comm[k]; nothing ties
// their phases, which is what lets eta = f_comm / f_p-bit be set freely.
// One run_ctrl on the reference clock broadcasts run_en to all partitions,
// starting and stopping every update and flip counter together.
//
// The defaults are the six-board chain of the 50,653-p-bit (L = 37)
// machine, with the pin counts of its five links. With a slab partition
// all cut edges join neighbours, so no multi-hop relaying is built.
// Links past the fifth use PINS_DEFAULT pins.
//
// Lint notes: the forward slot of the last partition and the backward
// slot of the first carry signals no partition reads, and the two end
// partitions have a link side tied off; the unused-signal warnings for
// those bits are expected.
//
// Ports: per partition k a host write/read port (see partition.sv for the
// address map), its sweep count and anneal-done flag; run control on
// clk_ref (run_start, run_stop, run_preset in reference cycles, run_en,
// run_done, run_elapsed).
module dsim_top
  import dsim_pkg::*;
#(
  parameter int unsigned L              = 37,
  parameter int unsigned NPART          = 6,
  parameter int unsigned LINK_PINS [5]  = '{54, 30, 54, 26, 54},
  parameter int unsigned PINS_DEFAULT   = 26,
  parameter int unsigned HOST_AW        = 20,
  parameter int unsigned RUN_W          = 48
) (
  input  logic [NPART-1:0]   clk_pbit,
  input  logic [NPART-1:0]   clk_comm,
  input  logic               clk_ref,
  input  logic               rst_n,
  // host ports, one per partition, each in its partition's clk_pbit domain
  input  logic [NPART-1:0]   host_we,
  input  logic [HOST_AW-1:0] host_addr  [NPART],
  input  logic [31:0]        host_wdata [NPART],
  input  logic [HOST_AW-1:0] host_raddr [NPART],
  output logic [63:0]        host_rdata [NPART],
  output logic [47:0]        sweeps     [NPART],
  output logic [NPART-1:0]   anneal_done,
  // run control, clk_ref domain
  input  logic               run_start,
  input  logic               run_stop,
  input  logic [RUN_W-1:0]   run_preset,
  output logic               run_en,
  output logic               run_done,
  output logic [RUN_W-1:0]   run_elapsed
);

  function automatic int unsigned pins(int unsigned k);
    return (k < 5) ? LINK_PINS[k] : PINS_DEFAULT;
  endfunction

  function automatic int unsigned pins_max();
    int unsigned p;
    p = 1;
    for (int unsigned k = 0; k + 1 < NPART; k++) if (pins(k) > p) p = pins(k);
    return p;
  endfunction

  localparam int unsigned PMAX = pins_max();

  // link k joins partition k (its right side) and k+1 (its left side)
  logic [PMAX-1:0] fw_data [NPART];   // k -> k+1
  logic [PMAX-1:0] bw_data [NPART];   // k+1 -> k
  logic [NPART-1:0] fw_sync, fw_clk, bw_sync, bw_clk;

  run_ctrl #(.CNT_W(RUN_W)) u_run (
    .clk_ref, .rst_n, .start(run_start), .stop_req(run_stop), .preset(run_preset),
    .run_en, .done(run_done), .elapsed(run_elapsed)
  );

  for (genvar k = 0; k < int'(NPART); k++) begin : g_part
    localparam int unsigned PL = (k > 0) ? pins(k - 1) : 1;
    localparam int unsigned PR = (k + 1 < int'(NPART)) ? pins(k) : 1;

    logic          l_rx_clk, l_rx_sync, r_rx_clk, r_rx_sync;
    logic [PL-1:0] l_rx_data, l_tx_data;
    logic [PR-1:0] r_rx_data, r_tx_data;
    logic          l_tx_clk, l_tx_sync, r_tx_clk, r_tx_sync;

    partition #(
      .L(L), .NPART(NPART), .K(k), .PL(PL), .PR(PR), .HOST_AW(HOST_AW)
    ) u_part (
      .clk        (clk_pbit[k]),
      .clk_comm   (clk_comm[k]),
      .rst_n,
      .run_en,
      .host_we    (host_we[k]),
      .host_addr  (host_addr[k]),
      .host_wdata (host_wdata[k]),
      .host_raddr (host_raddr[k]),
      .host_rdata (host_rdata[k]),
      .sweeps     (sweeps[k]),
      .anneal_done(anneal_done[k]),
      .l_tx_clk, .l_tx_sync, .l_tx_data, .l_rx_clk, .l_rx_sync, .l_rx_data,
      .r_tx_clk, .r_tx_sync, .r_tx_data, .r_rx_clk, .r_rx_sync, .r_rx_data
    );

    // outgoing: right side drives link k forward, left side drives link k-1 back
    assign fw_clk[k]  = r_tx_clk;
    assign fw_sync[k] = r_tx_sync;
    assign fw_data[k] = PMAX'(r_tx_data);
    if (k > 0) begin : g_bw
      assign bw_clk[k-1]  = l_tx_clk;
      assign bw_sync[k-1] = l_tx_sync;
      assign bw_data[k-1] = PMAX'(l_tx_data);
    end
    // incoming
    if (k > 0) begin : g_lin
      assign l_rx_clk  = fw_clk[k-1];
      assign l_rx_sync = fw_sync[k-1];
      assign l_rx_data = fw_data[k-1][PL-1:0];
    end else begin : g_lnone
      assign l_rx_clk  = 1'b0;
      assign l_rx_sync = 1'b0;
      assign l_rx_data = '0;
    end
    if (k + 1 < int'(NPART)) begin : g_rin
      assign r_rx_clk  = bw_clk[k];
      assign r_rx_sync = bw_sync[k];
      assign r_rx_data = bw_data[k][PR-1:0];
    end else begin : g_rnone
      assign r_rx_clk  = 1'b0;
      assign r_rx_sync = 1'b0;
      assign r_rx_data = '0;
    end
  end

  // the last backward slot has no driver partition
  assign bw_clk[NPART-1]  = 1'b0;
  assign bw_sync[NPART-1] = 1'b0;
  assign bw_data[NPART-1] = '0;

endmodule
