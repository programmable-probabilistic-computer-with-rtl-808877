// tb_weight_mem: writes random couplings and biases through the host port
// of a small weight_mem, with writes to an unused slot and to indices past
// the end mixed in, and checks every stored word against a model array.
module tb_weight_mem;
  import dsim_pkg::*;
  localparam int N = 10;
  localparam int IW = 4;

  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [IW-1:0] wr_idx = '0;
  logic [2:0] wr_slot = '0;
  fix_t wr_data = '0;
  fix_t J [N][NDIR];
  fix_t h [N];
  fix_t mj [N][NDIR];
  fix_t mh [N];
  int checks = 0, failures = 0;

  weight_mem #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic compare_all();
    for (int i = 0; i < N; i++) begin
      checks++; if (h[i] !== mh[i]) failures++;
      for (int d = 0; d < NDIR; d++) begin
        checks++;
        if (J[i][d] !== mj[i][d]) begin
          failures++; if (failures < 10) $display("J[%0d][%0d]=%0d expected %0d", i, d, J[i][d], mj[i][d]);
        end
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin mh[i] = 0; for (int d = 0; d < NDIR; d++) mj[i][d] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); compare_all();
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      wr_en = ($urandom % 4) != 0;
      wr_idx = IW'($urandom % 16);
      wr_slot = 3'($urandom);
      wr_data = fix_t'($urandom);
      if (wr_en && wr_idx < N) begin
        if (wr_slot == 6) mh[wr_idx] = wr_data;
        else if (wr_slot < 6) mj[wr_idx][wr_slot] = wr_data;
      end
      @(posedge clk); #1;
      compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
