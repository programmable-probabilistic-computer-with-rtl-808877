// link_rx: source-synchronous boundary-state receiver.
//
// Runs on the clock forwarded by the sending link_tx (rx_clk). A frame with
// rx_sync high starts a word at frame 0; the following NF-1 frames fill it
// in order (frame b carries bits b*P .. b*P+P-1). When the last frame has
// been taken, the complete word is presented on word with word_valid high
// for one rx_clk cycle; this is the unpacking stage. A sync arriving in the
// middle of a word aborts that word and counts a framing error (err_cnt),
// which makes link test patterns and lost frames visible to the host.
//
// Interface: word stays valid until the next word completes.
// Timing: word and word_valid are registered by the edge that samples the
// last frame.
module link_rx #(
  parameter int unsigned B  = 1369,
  parameter int unsigned P  = 26,
  localparam int unsigned NF = (B + P - 1) / P,
  localparam int unsigned FW = (NF <= 1) ? 1 : $clog2(NF + 1)
) (
  input  logic         rx_clk,
  input  logic         rst_n,
  input  logic         rx_sync,
  input  logic [P-1:0] rx_data,
  output logic [B-1:0] word,
  output logic         word_valid,
  output logic [31:0]  err_cnt
);

  logic [NF*P-1:0] asm_q;
  logic [FW-1:0]   f;        // next frame index; NF = idle, waiting for sync

  always_ff @(posedge rx_clk or negedge rst_n) begin
    if (!rst_n) begin
      asm_q      <= '0;
      f          <= FW'(NF);
      word       <= '0;
      word_valid <= 1'b0;
      err_cnt    <= '0;
    end else begin
      word_valid <= 1'b0;
      if (rx_sync) begin
        if (32'(f) != NF) err_cnt <= err_cnt + 1'b1;
        asm_q[P-1:0] <= rx_data;
        if (NF == 1) begin
          word       <= B'((NF*P)'(rx_data));
          word_valid <= 1'b1;
          f          <= FW'(NF);
        end else begin
          f <= FW'(1);
        end
      end else if (32'(f) < NF) begin
        asm_q[32'(f)*P +: P] <= rx_data;
        if (32'(f) == NF - 1) begin
          word       <= B'((asm_q & ~({{(NF*P-P){1'b0}}, {P{1'b1}}} << (32'(f)*P)))
                           | ((NF*P)'(rx_data) << (32'(f)*P)));
          word_valid <= 1'b1;
        end
        f <= f + 1'b1;
      end
    end
  end

endmodule
