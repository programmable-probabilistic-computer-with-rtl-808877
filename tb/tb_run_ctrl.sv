// tb_run_ctrl: the run window of run_ctrl must be exactly preset reference
// cycles long (checked by counting run_en cycles for several presets,
// including 50,000, the flip-rate window), elapsed must equal the window,
// done must rise at its end, and stop_req must cut a run short.
module tb_run_ctrl;
  logic clk_ref = 0, rst_n = 0, start = 0, stop_req = 0;
  logic [47:0] preset = 0, elapsed;
  logic run_en, done;
  int checks = 0, failures = 0;

  run_ctrl #(.CNT_W(48)) dut (.*);
  always #4 clk_ref = ~clk_ref;   // 125 MHz

  task automatic window(int p, int stop_at);
    int n;
    @(negedge clk_ref); preset = 48'(p); start = 1;
    @(negedge clk_ref); start = 0;
    n = 0;
    while (run_en) begin
      n++;
      if (n == stop_at) stop_req = 1;
      @(negedge clk_ref);
      stop_req = 0;
      if (n > p + 10) break;
    end
    checks += 3;
    if (stop_at == 0) begin
      if (n != ((p == 0) ? 1 : p)) begin failures++; $display("preset %0d: window %0d", p, n); end
    end else if (n != stop_at) begin failures++; $display("stop at %0d: window %0d", stop_at, n); end
    if (!done) begin failures++; $display("done missing"); end
    if (elapsed != 48'(n)) begin failures++; $display("elapsed %0d vs %0d", elapsed, n); end
  endtask

  initial begin
    #10000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk_ref); rst_n = 1;
    @(negedge clk_ref);
    checks++; if (run_en || done) failures++;
    window(1, 0); window(7, 0); window(0, 0); window(50000, 0); window(100, 40);
    repeat (5) begin window(1 + $urandom % 300, 0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
