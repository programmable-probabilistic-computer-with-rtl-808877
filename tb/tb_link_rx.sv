// tb_link_rx: the testbench plays a source-synchronous sender: random
// 100-bit words as 15 frames of 7 pins, sync on frame 0, with idle gaps,
// and now and then a word cut short by an early sync. Every complete word
// must appear on word with one word_valid pulse, right after its last
// frame; cut words must not appear and must each count a framing error.
// A second instance checks the one-frame case (B <= P).
module tb_link_rx;
  localparam int B = 100, P = 7, NF = (B + P - 1) / P;
  logic rx_clk = 0, rst_n = 0, rx_sync = 0;
  logic [P-1:0] rx_data = '0;
  logic [B-1:0] word;
  logic word_valid;
  logic [31:0] err_cnt;
  int checks = 0, failures = 0;

  link_rx #(.B(B), .P(P)) dut (.*);

  // single-frame instance
  logic s1 = 0; logic [7:0] d1 = 0; logic [4:0] w1; logic v1; logic [31:0] e1;
  link_rx #(.B(5), .P(8)) dut1 (.rx_clk, .rst_n, .rx_sync(s1), .rx_data(d1),
    .word(w1), .word_valid(v1), .err_cnt(e1));

  always #5 rx_clk = ~rx_clk;

  int nvalid = 0, nexp_err = 0, ngood = 0;
  logic [B-1:0] last_good;
  always @(posedge rx_clk) if (rst_n && word_valid) nvalid++;

  task automatic send(logic [B-1:0] w, int cut);
    logic [NF*P-1:0] pw;
    pw = (NF*P)'(w);
    for (int b = 0; b < NF; b++) begin
      if (cut != 0 && b == cut) return;
      @(negedge rx_clk);
      rx_sync = (b == 0); rx_data = pw[b*P +: P];
    end
    @(negedge rx_clk); rx_sync = 0; rx_data = P'($urandom);   // garbage while idle
    // word_valid now visible
    checks += 2;
    if (!word_valid) begin failures++; $display("no word_valid"); end
    if (word != w) begin failures++; $display("word mismatch"); end
  endtask

  initial begin
    repeat (200000) @(posedge rx_clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge rx_clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [B-1:0] w;
      int cut;
      w = {$urandom, $urandom, $urandom, 4'($urandom)};
      cut = (t < 199 && ($urandom % 6) == 0) ? 1 + $urandom % (NF - 1) : 0;
      if (cut != 0) begin
        send(w, cut);
        nexp_err++;
      end else begin
        send(w, 0);
        ngood++;
        repeat ($urandom % 4) begin @(negedge rx_clk); rx_data = P'($urandom); end
      end
    end
    @(negedge rx_clk); @(negedge rx_clk);
    // a cut word is followed directly by a sync of the next word, which is
    // the error; the last word is never cut in a way that leaves it pending
    checks += 2;
    if (nvalid != ngood) begin failures++; $display("%0d valid pulses for %0d words", nvalid, ngood); end
    if (err_cnt != 32'(nexp_err)) begin failures++; $display("err %0d expected %0d", err_cnt, nexp_err); end
    // one-frame words
    for (int t = 0; t < 20; t++) begin
      logic [4:0] w;
      w = 5'($urandom);
      @(negedge rx_clk); s1 = 1; d1 = {3'($urandom), w};
      @(negedge rx_clk); s1 = 0;
      checks++; if (!v1 || w1 != w) begin failures++; $display("one-frame word"); end
    end
    checks++; if (e1 != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
