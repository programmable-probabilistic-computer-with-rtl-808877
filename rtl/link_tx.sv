// link_tx: source-synchronous boundary-state transmitter.
//
// A boundary word of B one-bit p-bit states is larger than the P data pins
// of a link, so it is sent as NF = ceil(B/P) frames that time-multiplex the
// pins, one frame per clock of the link clock clk, which is forwarded with
// the data (tx_clk) so that the receiver samples relative to it and needs
// no phase relation to any other clock. Frame 0 of a word is marked by
// tx_sync, an extra line beside the P data pins (this design's framing
// choice). Bits b*P .. b*P+P-1 of the word travel in frame b, LSB on pin 0;
// the last frame is zero-padded.
// The transmitter streams without gaps: at the end of every word it starts
// the newest word it has been given (pl_data/pl_valid, a new snapshot of
// the sender's boundary p-bits) or, if none arrived, repeats the last one.
// Capturing the snapshot and registering each frame are the packing stage.
//
// Interface: en low keeps the link idle (sync and data low). words counts
// words started. Timing: frame b of a word is on the pins b+1 clocks after
// the word starts; a word occupies NF clocks.
module link_tx #(
  parameter int unsigned B  = 1369,
  parameter int unsigned P  = 26,
  localparam int unsigned NF = (B + P - 1) / P,
  localparam int unsigned FW = (NF <= 2) ? 1 : $clog2(NF)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         pl_valid,
  input  logic [B-1:0] pl_data,
  output logic         tx_clk,
  output logic         tx_sync,
  output logic [P-1:0] tx_data,
  output logic [31:0]  words
);

  logic [NF*P-1:0] cur, pend;
  logic [FW-1:0]   f;

  assign tx_clk = clk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
    end else if (pl_valid) begin
      pend <= (NF*P)'(pl_data);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur     <= '0;
      f       <= '0;
      tx_sync <= 1'b0;
      tx_data <= '0;
      words   <= '0;
    end else if (!en) begin
      f       <= '0;
      tx_sync <= 1'b0;
      tx_data <= '0;
    end else begin
      if (f == '0) begin
        // start a word: take the newest snapshot
        cur     <= pend;
        tx_data <= pend[P-1:0];
        tx_sync <= 1'b1;
        words   <= words + 1'b1;
      end else begin
        tx_data <= cur[32'(f)*P +: P];
        tx_sync <= 1'b0;
      end
      f <= (32'(f) == NF - 1) ? '0 : f + 1'b1;
    end
  end

endmodule
