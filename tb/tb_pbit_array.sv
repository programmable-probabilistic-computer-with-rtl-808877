// tb_pbit_array: drives random local fields and update masks into a small
// pbit_array and checks every update against a separate model of
// m = sgn(tanh(I) + r) (tanh computed here in floating point, r from a
// model of the LFSR); p-bits not selected must hold. It then checks the
// sampled probability P(m=+1) = (1 + tanh I)/2 at several fields.
module tb_pbit_array;
  import dsim_pkg::*;
  localparam int N = 16, IDX0 = 5;

  logic clk = 0, rst_n = 0, seed_load = 0;
  logic [31:0] seed = 0;
  fix_t fld [N];
  logic [N-1:0] upd = '0, m;
  int checks = 0, failures = 0;

  pbit_array #(.N(N), .IDX0(IDX0)) dut (.*);

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
  function automatic logic ref_m(fix_t f, logic [31:0] st);
    real t; int ti; int r;
    t  = $tanh(real'(f) / 2.0) * 32767.0;
    ti = (t >= 0.0) ? int'($floor(t + 0.5)) : -int'($floor(-t + 0.5));
    r  = int'($signed(st[31:16]));
    return (ti + r) >= 0;
  endfunction

  logic [31:0] model [N];
  logic [N-1:0] mexp;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin model[i] = ref_seed(0, IDX0 + i); fld[i] = '0; end
    mexp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // exact comparison under random fields and masks
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      upd = N'($urandom);
      for (int i = 0; i < N; i++) fld[i] = fix_t'($urandom);
      for (int i = 0; i < N; i++)
        if (upd[i]) begin mexp[i] = ref_m(fld[i], model[i]); model[i] = ref_adv(model[i]); end
      @(posedge clk); #1;
      checks++;
      if (m !== mexp) begin
        failures++;
        if (failures < 10) $display("t=%0d m=%h expected %h", t, m, mexp);
      end
    end
    // statistics: P(+1) against (1+tanh I)/2 for I = -2, 0, 1, 3
    begin
      fix_t codes [4] = '{fix_t'(-4), fix_t'(0), fix_t'(2), fix_t'(6)};
      foreach (codes[c]) begin
        int ones; real p, pe;
        ones = 0;
        @(negedge clk);
        for (int i = 0; i < N; i++) fld[i] = codes[c];
        upd = '1;
        for (int t = 0; t < 1000; t++) begin
          @(posedge clk); #1;
          for (int i = 0; i < N; i++) ones += int'(m[i]);
        end
        p  = real'(ones) / real'(1000 * N);
        pe = (1.0 + $tanh(real'(codes[c]) / 2.0)) / 2.0;
        checks++;
        if (p - pe > 0.02 || pe - p > 0.02) begin
          failures++; $display("I=%0d/2: P(+1)=%f expected %f", codes[c], p, pe);
        end
      end
      upd = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
