// partition: one device of the distributed sparse Ising machine.
//
// A partition holds one slab of the L x L x L lattice (planes X0 .. X0+NX-1
// of NPART slabs cut along x; the slab cut is this design's choice, the
// machine itself uses a min-cut or topology-aware partitioner) together
// with everything needed to anneal it locally: the weight memory with the
// shadow weights of its cut edges, the local-field units, the p-bits with
// their LFSRs, the color schedule, the beta schedule and the flip counters.
// Only 1-bit states leave it: the plane at each face is snapshotted,
// carried into the link clock, and sent to the neighbour as frames over a
// source-synchronous link; the neighbour's face plane arrives the same way
// and is held in a halo register that the local fields read. Local updates
// never wait for the links, so the boundary states they read are as stale
// as the link makes them; the ratio eta = f_comm / f_p-bit sets how stale.
//
// Clocks: clk is the local update clock (one color group per cycle, so
// f_p-bit = f_clk / NCOLOR); clk_comm drives both transmitters; l_rx_clk and
// r_rx_clk are the clocks forwarded by the neighbours. run_en is the
// broadcast enable from run_ctrl (any clock) and is synchronized here.
// rst_n is asynchronous and is assumed to be released cleanly in each
// domain by the board.
//
// Lint notes: an end partition has no neighbour on one side, so the link
// inputs of that side are tied off outside and left unread here; the
// busy flags of the handshakes are not needed because the sender reloads
// only when the previous plane has been delivered.
//
// Host port (clk domain), HOST_AW address bits:
//   write, addr[HOST_AW-1] = 0: {p-bit index, slot[2:0]}, slot 0..5 = J, 6 = h
//   write, addr[HOST_AW-1] = 1, addr[3:0]:
//     0 beta0  1 beta_step  2 beta_end  3 sweeps_per_beta  4 seed
//     5 command: bit0 start anneal (load beta0, clear sweep and flip
//       counts), bit1 reseed the LFSRs
//     6 config: bit0 isolate (ignore boundary states), bit1 links enabled
//   read (combinational), addr[HOST_AW-1] = 0: state of p-bit addr[.. :3]
//   read, addr[HOST_AW-1] = 1, addr[3:0]:
//     0 beta  1 sweeps  2.. flip count of color 0..NCOLOR-1
//     8 {anneal_done, run}  9 left frame errors  10 right frame errors
//     11 left words sent  12 right words sent  13 left halo refreshes
//     14 right halo refreshes  15 N
module partition
  import dsim_pkg::*;
#(
  parameter int unsigned L       = 37,
  parameter int unsigned NPART   = 6,
  parameter int unsigned K       = 1,
  parameter int unsigned PL      = 54,
  parameter int unsigned PR      = 30,
  parameter int unsigned HOST_AW = 20,
  localparam int unsigned X0     = slab_x0(K, L, NPART),
  localparam int unsigned NX     = slab_x0(K + 1, L, NPART) - X0,
  localparam int unsigned N      = NX * L * L,
  localparam int unsigned NB     = L * L,
  localparam bit          HAS_L  = (K > 0),
  localparam bit          HAS_R  = (K + 1 < NPART),
  localparam int unsigned NCOLOR = ncolor_for(L),
  localparam int unsigned CW     = clog2_min1(NCOLOR),
  localparam int unsigned UW     = clog2_min1(N + 1),
  localparam int unsigned IW     = clog2_min1(N)
) (
  input  logic               clk,
  input  logic               clk_comm,
  input  logic               rst_n,
  input  logic               run_en,
  // host
  input  logic               host_we,
  input  logic [HOST_AW-1:0] host_addr,
  input  logic [31:0]        host_wdata,
  input  logic [HOST_AW-1:0] host_raddr,
  output logic [63:0]        host_rdata,
  output logic [47:0]        sweeps,
  output logic               anneal_done,
  // link to the left neighbour
  output logic               l_tx_clk,
  output logic               l_tx_sync,
  output logic [PL-1:0]      l_tx_data,
  input  logic               l_rx_clk,
  input  logic               l_rx_sync,
  input  logic [PL-1:0]      l_rx_data,
  // link to the right neighbour
  output logic               r_tx_clk,
  output logic               r_tx_sync,
  output logic [PR-1:0]      r_tx_data,
  input  logic               r_rx_clk,
  input  logic               r_rx_sync,
  input  logic [PR-1:0]      r_rx_data
);

  if ((N * 8) > (1 << (HOST_AW - 1))) begin : g_aw_check
    $error("partition: HOST_AW too small for %0d p-bits", N);
  end

  // ---------------------------------------------------------------- host regs
  fix_t        beta0_q, beta_step_q, beta_end_q;
  logic [31:0] spb_q, seed_q;
  logic        isolate_q, link_en_q;
  logic        cmd_start, cmd_seed;

  logic wr_w, wr_c;
  assign wr_w = host_we && !host_addr[HOST_AW-1];
  assign wr_c = host_we &&  host_addr[HOST_AW-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beta0_q     <= fix_t'(1);        // 0.5
      beta_step_q <= fix_t'(1);        // 0.5
      beta_end_q  <= fix_t'(10);       // 5.0
      spb_q       <= 32'd1;
      seed_q      <= 32'h1;
      isolate_q   <= 1'b0;
      link_en_q   <= 1'b1;
      cmd_start   <= 1'b0;
      cmd_seed    <= 1'b0;
    end else begin
      cmd_start <= 1'b0;
      cmd_seed  <= 1'b0;
      if (wr_c) begin
        unique case (host_addr[3:0])
          4'd0: beta0_q     <= fix_t'(host_wdata[FX_W-1:0]);
          4'd1: beta_step_q <= fix_t'(host_wdata[FX_W-1:0]);
          4'd2: beta_end_q  <= fix_t'(host_wdata[FX_W-1:0]);
          4'd3: spb_q       <= host_wdata;
          4'd4: seed_q      <= host_wdata;
          4'd5: begin
            cmd_start <= host_wdata[0];
            cmd_seed  <= host_wdata[1];
          end
          4'd6: begin
            isolate_q <= host_wdata[0];
            link_en_q <= host_wdata[1];
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- core
  fix_t        J [N][NDIR];
  fix_t        h [N];
  fix_t        fld [N];
  fix_t        beta;
  logic [N-1:0] m, upd;
  logic [NB-1:0] halo_l, halo_r;
  logic [CW-1:0] color;
  logic [UW-1:0] n_upd;
  logic          sweep_done, run_s;
  logic [47:0]   flips [NCOLOR];

  sync_2ff u_run_sync (.clk, .rst_n, .d(run_en), .q(run_s));

  weight_mem #(.N(N)) u_wmem (
    .clk, .rst_n,
    .wr_en  (wr_w),
    .wr_idx (host_addr[3 +: IW]),
    .wr_slot(host_addr[2:0]),
    .wr_data(fix_t'(host_wdata[FX_W-1:0])),
    .J, .h
  );

  local_field #(.NX(NX), .LY(L), .LZ(L), .HAS_LEFT(HAS_L), .HAS_RIGHT(HAS_R)) u_field (
    .m, .halo_l, .halo_r, .isolate(isolate_q), .J, .h, .beta, .fld
  );

  color_sched #(.NX(NX), .LY(L), .LZ(L), .X0(X0)) u_sched (
    .clk, .rst_n, .clear(cmd_start), .run(run_s),
    .upd, .color, .n_upd, .sweep_done, .sweeps
  );

  pbit_array #(.N(N), .IDX0(X0 * L * L)) u_pbits (
    .clk, .rst_n, .seed_load(cmd_seed), .seed(seed_q),
    .fld, .upd, .m
  );

  anneal_sched u_anneal (
    .clk, .rst_n, .start(cmd_start), .sweep_done,
    .beta0(beta0_q), .beta_step(beta_step_q), .beta_end(beta_end_q),
    .sweeps_per_beta(spb_q), .beta, .done(anneal_done)
  );

  flip_counter #(.NCOLOR(NCOLOR), .UW(UW), .CNT_W(48)) u_flips (
    .clk, .rst_n, .clear(cmd_start), .en(run_s), .color, .n_upd, .cnt(flips)
  );

  // ---------------------------------------------------------------- links
  logic [31:0] l_err, r_err, l_words, r_words, l_ref, r_ref;

  if (HAS_L) begin : g_left
    logic [NB-1:0] snap, rxw;
    logic          snap_v, rxw_v, halo_v, busy_tx, busy_rx;

    // p-bit clock -> link clock: snapshot of plane 0
    cdc_handshake #(.W(NB)) u_tx_cdc (
      .src_clk(clk), .src_rst_n(rst_n), .src_load(1'b1), .src_data(m[NB-1:0]),
      .src_busy(busy_tx),
      .dst_clk(clk_comm), .dst_rst_n(rst_n), .dst_data(snap), .dst_valid(snap_v)
    );
    link_tx #(.B(NB), .P(PL)) u_tx (
      .clk(clk_comm), .rst_n, .en(link_en_q), .pl_valid(snap_v), .pl_data(snap),
      .tx_clk(l_tx_clk), .tx_sync(l_tx_sync), .tx_data(l_tx_data), .words(l_words)
    );
    link_rx #(.B(NB), .P(PL)) u_rx (
      .rx_clk(l_rx_clk), .rst_n, .rx_sync(l_rx_sync), .rx_data(l_rx_data),
      .word(rxw), .word_valid(rxw_v), .err_cnt(l_err)
    );
    // forwarded clock -> p-bit clock
    cdc_handshake #(.W(NB)) u_rx_cdc (
      .src_clk(l_rx_clk), .src_rst_n(rst_n), .src_load(rxw_v), .src_data(rxw),
      .src_busy(busy_rx),
      .dst_clk(clk), .dst_rst_n(rst_n), .dst_data(halo_l), .dst_valid(halo_v)
    );
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) l_ref <= '0;
      else if (halo_v) l_ref <= l_ref + 1'b1;
  end else begin : g_no_left
    assign halo_l    = '0;
    assign l_tx_clk  = 1'b0;
    assign l_tx_sync = 1'b0;
    assign l_tx_data = '0;
    assign {l_err, l_words, l_ref} = '0;
  end

  if (HAS_R) begin : g_right
    logic [NB-1:0] snap, rxw;
    logic          snap_v, rxw_v, halo_v, busy_tx, busy_rx;

    cdc_handshake #(.W(NB)) u_tx_cdc (
      .src_clk(clk), .src_rst_n(rst_n), .src_load(1'b1), .src_data(m[N-1 -: NB]),
      .src_busy(busy_tx),
      .dst_clk(clk_comm), .dst_rst_n(rst_n), .dst_data(snap), .dst_valid(snap_v)
    );
    link_tx #(.B(NB), .P(PR)) u_tx (
      .clk(clk_comm), .rst_n, .en(link_en_q), .pl_valid(snap_v), .pl_data(snap),
      .tx_clk(r_tx_clk), .tx_sync(r_tx_sync), .tx_data(r_tx_data), .words(r_words)
    );
    link_rx #(.B(NB), .P(PR)) u_rx (
      .rx_clk(r_rx_clk), .rst_n, .rx_sync(r_rx_sync), .rx_data(r_rx_data),
      .word(rxw), .word_valid(rxw_v), .err_cnt(r_err)
    );
    cdc_handshake #(.W(NB)) u_rx_cdc (
      .src_clk(r_rx_clk), .src_rst_n(rst_n), .src_load(rxw_v), .src_data(rxw),
      .src_busy(busy_rx),
      .dst_clk(clk), .dst_rst_n(rst_n), .dst_data(halo_r), .dst_valid(halo_v)
    );
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) r_ref <= '0;
      else if (halo_v) r_ref <= r_ref + 1'b1;
  end else begin : g_no_right
    assign halo_r    = '0;
    assign r_tx_clk  = 1'b0;
    assign r_tx_sync = 1'b0;
    assign r_tx_data = '0;
    assign {r_err, r_words, r_ref} = '0;
  end

  // ---------------------------------------------------------------- readout
  always_comb begin
    host_rdata = '0;
    if (!host_raddr[HOST_AW-1]) begin
      if (32'(host_raddr[3 +: IW]) < N) host_rdata = 64'(m[host_raddr[3 +: IW]]);
    end else begin
      unique case (host_raddr[3:0])
        4'd0:  host_rdata = 64'($unsigned(beta));
        4'd1:  host_rdata = 64'(sweeps);
        4'd8:  host_rdata = {62'b0, anneal_done, run_s};
        4'd9:  host_rdata = 64'(l_err);
        4'd10: host_rdata = 64'(r_err);
        4'd11: host_rdata = 64'(l_words);
        4'd12: host_rdata = 64'(r_words);
        4'd13: host_rdata = 64'(l_ref);
        4'd14: host_rdata = 64'(r_ref);
        4'd15: host_rdata = 64'(N);
        default: begin
          for (int unsigned c = 0; c < NCOLOR; c++)
            if (32'(host_raddr[3:0]) == 2 + c) host_rdata = 64'(flips[c]);
        end
      endcase
    end
  end

endmodule
