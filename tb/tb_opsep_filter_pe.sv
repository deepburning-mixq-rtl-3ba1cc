// tb_opsep_filter_pe -- self-checking test of filter packing with operand
// separation: 5-bit two's complement weights split into a 2-bit high and a
// 3-bit low half against 8-bit activations (3 taps x 1 activation), and
// 6-bit weights (3 + 3) against 2-bit activations (3 taps x 2 activations,
// one guard bit on each half); and 8-bit activations split into two
// unsigned 4-bit halves against 4-bit weights (3 taps x 2 activations).
module tb_opsep_filter_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int   c0, c1, c2, f0, f1, f2;
  logic d0, d1, d2;

  tb_fpe_harness #(.AB(8), .WB(5), .KP(3), .NP(1), .GB(0), .GB_L(0), .OPSEP(1))
    h0 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  tb_fpe_harness #(.AB(2), .WB(6), .KP(3), .NP(2), .GB(1), .GB_L(1), .OPSEP(1))
    h1 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));
  tb_fpe_harness #(.AB(8), .WB(4), .KP(3), .NP(2), .GB(1), .GB_L(1), .OPSEP(1),
                   .SEP_ACT(1))
    h2 (.clk, .rst_n, .checks(c2), .failures(f2), .done(d2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule
