// tb_lfsr_bank: checks every generator of lfsr_bank against a separate
// model of the LFSR (x^32+x^22+x^2+x+1, 16 steps per draw) and of the seed
// mixing, through reset, random advance masks and a reseed; also checks
// that the words are roughly zero-mean.
module tb_lfsr_bank;
  import dsim_pkg::*;
  localparam int N = 8, IDX0 = 3;

  logic clk = 0, rst_n = 0, seed_load = 0;
  logic [31:0] seed = 0;
  logic [N-1:0] adv = '0;
  rnd_t rnd [N];
  int checks = 0, failures = 0;

  lfsr_bank #(.N(N), .IDX0(IDX0)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] ref_seed(logic [31:0] s, int unsigned idx);
    logic [31:0] v;
    v = s ^ (idx * 32'h9E3779B9) ^ 32'h6A09E667;
    v = v ^ (v >> 15); v = v * 32'h2C1B3C6D; v = v ^ (v >> 12);
    return (v == 0) ? 32'd1 : v;
  endfunction
  function automatic logic [31:0] ref_adv(logic [31:0] s);
    for (int k = 0; k < 16; k++) s = {s[30:0], ^(s & 32'h8020_0003)};
    return s;
  endfunction

  logic [31:0] model [N];
  real acc = 0.0; int nacc = 0;

  task automatic compare();
    for (int i = 0; i < N; i++) begin
      checks++;
      if (rnd[i] !== rnd_t'(model[i][31:16])) begin
        failures++;
        if (failures < 10) $display("mismatch p-bit %0d: %h vs %h", i, rnd[i], model[i][31:16]);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) model[i] = ref_seed(0, IDX0 + i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); compare();
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      adv = N'($urandom);
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) if (adv[i]) model[i] = ref_adv(model[i]);
      compare();
      for (int i = 0; i < N; i++) begin acc += real'(rnd[i]); nacc++; end
    end
    // reseed
    @(negedge clk); adv = '0; seed = 32'hCAFE_F00D; seed_load = 1;
    @(negedge clk); seed_load = 0;
    for (int i = 0; i < N; i++) model[i] = ref_seed(32'hCAFE_F00D, IDX0 + i);
    compare();
    // distinct streams
    for (int i = 1; i < N; i++) begin checks++; if (rnd[i] == rnd[0]) failures++; end
    // mean of r is near zero (|mean| < 0.03 of full scale)
    checks++;
    if ((acc / nacc) > 1000.0 || (acc / nacc) < -1000.0) begin failures++; $display("mean %f", acc/nacc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
