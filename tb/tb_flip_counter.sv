// tb_flip_counter: random colors, group sizes and enable pattern into a
// three-color flip_counter, checked cycle by cycle against per-color sums
// kept by the testbench; then a clear.
module tb_flip_counter;
  localparam int NC = 3, UW = 10, CW = 2;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [CW-1:0] color = 0;
  logic [UW-1:0] n_upd = 0;
  logic [47:0] cnt [NC];
  longint unsigned model [NC];
  int checks = 0, failures = 0;

  flip_counter #(.NCOLOR(NC), .UW(UW), .CNT_W(48)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (model[c]) model[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      en = ($urandom % 5) != 0;
      color = CW'(t % NC);
      n_upd = UW'($urandom);
      if (t == 1500) clear = 1; else clear = 0;
      if (clear) foreach (model[c]) model[c] = 0;
      else if (en) model[color] += n_upd;
      @(posedge clk); #1;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (cnt[c] != model[c]) begin
          failures++; if (failures < 10) $display("t=%0d color %0d: %0d vs %0d", t, c, cnt[c], model[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
