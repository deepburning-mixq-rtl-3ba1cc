// tb_kernel_pack_pe -- self-checking test of the kernel-packing PE in two
// configurations: W2/A3 with 3 x 2 products per DSP and 2 guard bits, and
// W3/A3 with 2 x 2 products per DSP using 1-bit overpacking.
module tb_kernel_pack_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c0, f0, c1, f1;
  logic d0, d1;
  int checks, failures;

  tb_kpe_harness #(.AB(3), .WB(2), .ND(3), .NE(2), .GB(2), .OVERPACK(0))
    h0 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  tb_kpe_harness #(.AB(3), .WB(3), .ND(2), .NE(2), .GB(1), .OVERPACK(1))
    h1 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    checks = c0 + c1; failures = f0 + f1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
