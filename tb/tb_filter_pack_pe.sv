// tb_filter_pack_pe -- self-checking test of the filter-packing PE in six
// configurations: W3/A2 3-tap x 3 activations with 2 guard bits; the same
// with 1-bit overpacking and one extra guard bit (DSP accumulation of two
// products); W2/A2 with the activations on the 27-bit port (3 x 5); and an
// unsigned 3-bit filter against 8-bit activations (the low half of an
// operand-separated weight); W4/A4 3-tap x 2 activations with 1 guard bit;
// W3/A2 3-tap x 4 activations on the 27-bit port (12 products per DSP).
module tb_filter_pack_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int   c [6], f [6];
  logic d [6];

  tb_fpe_harness #(.AB(2), .WB(3), .KP(3), .NP(3), .GB(2))
    h0 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .done(d[0]));
  tb_fpe_harness #(.AB(2), .WB(3), .KP(3), .NP(3), .GB(3), .OVERPACK(1))
    h1 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .done(d[1]));
  tb_fpe_harness #(.AB(2), .WB(2), .KP(3), .NP(5), .GB(2), .W_ON_WIDE(0))
    h2 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .done(d[2]));
  tb_fpe_harness #(.AB(8), .WB(3), .KP(3), .NP(1), .GB(0), .W_SIGNED(0))
    h3 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .done(d[3]));
  tb_fpe_harness #(.AB(4), .WB(4), .KP(3), .NP(2), .GB(1))
    h4 (.clk, .rst_n, .checks(c[4]), .failures(f[4]), .done(d[4]));
  tb_fpe_harness #(.AB(2), .WB(3), .KP(3), .NP(4), .GB(2), .W_ON_WIDE(0))
    h5 (.clk, .rst_n, .checks(c[5]), .failures(f[5]), .done(d[5]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2]+c[3]+c[4]+c[5], f[0]+f[1]+f[2]+f[3]+f[4]+f[5]);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2]+c[3]+c[4]+c[5], f[0]+f[1]+f[2]+f[3]+f[4]+f[5]+1);
    $finish;
  end
endmodule
