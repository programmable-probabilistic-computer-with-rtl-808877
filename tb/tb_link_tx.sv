// tb_link_tx: a 100-bit boundary word over 7 pins (15 frames). The
// testbench offers new snapshots at random times, reassembles the frames
// it sees on the pins and checks that every word equals the newest
// snapshot offered before that word started, that sync marks frame 0 only
// and words arrive back to back every 15 clocks, that the word counter
// counts, and that the link stays idle while disabled.
module tb_link_tx;
  localparam int B = 100, P = 7, NF = (B + P - 1) / P;
  logic clk = 0, rst_n = 0, en = 0, pl_valid = 0;
  logic [B-1:0] pl_data = '0;
  logic tx_clk, tx_sync;
  logic [P-1:0] tx_data;
  logic [31:0] words;
  int checks = 0, failures = 0;

  link_tx #(.B(B), .P(P)) dut (.*);
  always #5 clk = ~clk;

  logic [B-1:0] newest = '0;
  logic [B-1:0] expq [$];
  logic [NF*P-1:0] asm_w;
  int f = -1, since_sync = 0, nwords = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // monitor on the forwarded clock
  always @(posedge tx_clk) if (rst_n && en) begin
    if (tx_sync) begin
      if (f >= 0) begin
        checks += 2;
        if (f != NF) begin failures++; $display("word of %0d frames", f); end
        if (expq.size() == 0 || B'(asm_w) != expq[0]) begin failures++; $display("word mismatch"); end
        if (expq.size() > 0) void'(expq.pop_front());
        nwords++;
      end
      asm_w = '0; asm_w[P-1:0] = tx_data; f = 1;
    end else if (f >= 1 && f < NF) begin
      asm_w[f*P +: P] = tx_data; f++;
    end else if (f >= 0) begin
      failures++; $display("missing sync after %0d frames", f);
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    checks++; if (tx_sync || tx_data != 0) begin failures++; $display("not idle"); end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      en = 1;
      pl_valid = ($urandom % 9) == 0;
      if (pl_valid) pl_data = {$urandom, $urandom, $urandom, 4'($urandom)};
      // dut takes the word at the edge where its frame counter is 0; the
      // snapshot it takes is the one registered before that edge
      if (dut.f == '0) expq.push_back(newest);
      @(posedge clk);
      if (pl_valid) newest = pl_data;
    end
    checks += 2;
    if (nwords < 3000 / NF - 2) begin failures++; $display("only %0d words", nwords); end
    if (words < 32'(3000 / NF)) begin failures++; $display("word counter %0d", words); end
    @(negedge clk); en = 0; f = -1; expq.delete();
    repeat (3) @(negedge clk);
    checks++; if (tx_sync || tx_data != 0) begin failures++; $display("not idle after disable"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
