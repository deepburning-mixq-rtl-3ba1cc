// tb_lut_filter_pe -- self-checking test of the LUT filter PE with the same
// random stimulus and reference as the packed filter PE: W3/A2 3 taps x 3
// activations with accumulation of up to two beats, W2/A2 3 x 5, and an
// unsigned 3-bit filter against 8-bit activations.  Each result must equal
// the reference coefficients and arrive 4 cycles after the last beat, the
// latency of the packed PE it replaces.
module tb_lut_filter_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int   c [3], f [3];
  logic d [3];

  tb_fpe_harness #(.AB(2), .WB(3), .KP(3), .NP(3), .GB(3), .LUT(1))
    h0 (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .done(d[0]));
  tb_fpe_harness #(.AB(2), .WB(2), .KP(3), .NP(5), .GB(2), .LUT(1))
    h1 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .done(d[1]));
  tb_fpe_harness #(.AB(8), .WB(3), .KP(3), .NP(1), .GB(0), .W_SIGNED(0), .LUT(1))
    h2 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .done(d[2]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2], f[0]+f[1]+f[2]);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c[0]+c[1]+c[2], f[0]+f[1]+f[2]+1);
    $finish;
  end
endmodule
