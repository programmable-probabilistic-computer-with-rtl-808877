// tb_cdc_handshake: a 40-bit word crosses from a 7-unit clock to a
// 13-unit clock and, in a second instance, from a slow to a fast clock.
// The source offers a new random word every cycle; every word the
// destination presents must be one the source had accepted, in order and
// untorn, and the destination must see a steady stream of them.
module tb_cdc_handshake;
  localparam int W = 40;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic ca = 0, cb = 0;
  always #7 ca = ~ca;
  always #13 cb = ~cb;

  // instance 1: ca -> cb ; instance 2: cb -> ca
  logic [W-1:0] sd1, dd1, sd2, dd2;
  logic busy1, dv1, busy2, dv2;
  cdc_handshake #(.W(W)) u1 (.src_clk(ca), .src_rst_n(rst_n), .src_load(1'b1), .src_data(sd1),
    .src_busy(busy1), .dst_clk(cb), .dst_rst_n(rst_n), .dst_data(dd1), .dst_valid(dv1));
  cdc_handshake #(.W(W)) u2 (.src_clk(cb), .src_rst_n(rst_n), .src_load(1'b1), .src_data(sd2),
    .src_busy(busy2), .dst_clk(ca), .dst_rst_n(rst_n), .dst_data(dd2), .dst_valid(dv2));

  logic [W-1:0] acc1 [$], acc2 [$];
  int got1 = 0, got2 = 0;

  always @(posedge ca) if (rst_n) begin
    if (!busy1) acc1.push_back(sd1);
    sd1 <= {$urandom, 8'($urandom)};
  end
  always @(posedge cb) if (rst_n) begin
    if (!busy2) acc2.push_back(sd2);
    sd2 <= {$urandom, 8'($urandom)};
  end
  always @(posedge cb) if (rst_n && dv1) begin
    checks++; got1++;
    if (acc1.size() == 0 || acc1[0] != dd1) begin failures++; $display("1: word %h not expected", dd1); end
    if (acc1.size() > 0) void'(acc1.pop_front());
  end
  always @(posedge ca) if (rst_n && dv2) begin
    checks++; got2++;
    if (acc2.size() == 0 || acc2[0] != dd2) begin failures++; $display("2: word %h not expected", dd2); end
    if (acc2.size() > 0) void'(acc2.pop_front());
  end

  initial begin
    #2000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sd1 = '0; sd2 = '0;
    #50 rst_n = 1;
    #100000;
    // a transfer takes a handful of cycles of the slower clock: expect at
    // least one word per 12 slow cycles (26 units each)
    checks += 2;
    if (got1 < 100000 / (26 * 12)) begin failures++; $display("only %0d words 1", got1); end
    if (got2 < 100000 / (26 * 12)) begin failures++; $display("only %0d words 2", got2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
