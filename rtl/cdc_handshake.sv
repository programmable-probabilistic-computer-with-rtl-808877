// cdc_handshake: moves a W-bit word of boundary states from one clock
// domain to another.
//
// The machine runs each partition on its own local clock and its links on
// separate communication clocks, so boundary words cross clock domains
// twice: from the p-bit clock into the transmit clock, and from the
// forwarded receive clock into the p-bit clock of the neighbour. This block
// does it with a toggle request/acknowledge handshake: the source captures
// the word into a holding register and toggles req; the destination sees
// the synchronized toggle, copies the (now stable) holding register and
// toggles ack back. While a transfer is in flight (src_busy) new words are
// refused, so the destination always reads a complete, consistent word; a
// refused word is simply superseded by a later one, which is acceptable for
// state snapshots. The scheme is this design's choice.
//
// Interface: src_load with src_data starts a transfer when !src_busy.
// dst_data holds the last word received, dst_valid pulses for one dst_clk
// cycle when it changes. Timing: about 3 dst_clk cycles to deliver, about
// 3 src_clk cycles more before src_busy falls.
module cdc_handshake #(
  parameter int unsigned W = 1369
) (
  input  logic         src_clk,
  input  logic         src_rst_n,
  input  logic         src_load,
  input  logic [W-1:0] src_data,
  output logic         src_busy,
  input  logic         dst_clk,
  input  logic         dst_rst_n,
  output logic [W-1:0] dst_data,
  output logic         dst_valid
);

  logic [W-1:0] hold;
  logic         req, ack_s;          // source domain
  logic         req_d, ack;          // destination domain

  // ---- source domain ----
  sync_2ff u_ack_sync (.clk(src_clk), .rst_n(src_rst_n), .d(ack), .q(ack_s));

  assign src_busy = req ^ ack_s;

  always_ff @(posedge src_clk or negedge src_rst_n) begin
    if (!src_rst_n) begin
      hold <= '0;
      req  <= 1'b0;
    end else if (src_load && !src_busy) begin
      hold <= src_data;
      req  <= ~req;
    end
  end

  // ---- destination domain ----
  sync_2ff u_req_sync (.clk(dst_clk), .rst_n(dst_rst_n), .d(req), .q(req_d));

  always_ff @(posedge dst_clk or negedge dst_rst_n) begin
    if (!dst_rst_n) begin
      ack       <= 1'b0;
      dst_data  <= '0;
      dst_valid <= 1'b0;
    end else begin
      dst_valid <= 1'b0;
      if (req_d != ack) begin
        dst_data  <= hold;
        ack       <= req_d;
        dst_valid <= 1'b1;
      end
    end
  end

endmodule
