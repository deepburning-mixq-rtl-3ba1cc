// tb_pw_conv_stage -- self-checking test of the point-wise convolution
// stage: W2/A3 kernel packing, 2 x 2 products per DSP, one LUT PE and one
// DSP PE, DSP accumulation over 4 input channels; and a second instance
// with W3/A3, 1-bit overpacking and DSP PEs only.  Reference in
// tb_pw_harness.
module tb_pw_conv_stage;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int   c0, c1, f0, f1;
  logic d0, d1;

  tb_pw_harness #(.CIN(8), .COUT(8), .AB(3), .WB(2), .OB(8), .ND(2), .NE(2),
                  .GB(2), .PF(2), .PF_LUT(1), .ACC_N(4), .SHIFT(4))
    h0 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  tb_pw_harness #(.CIN(6), .COUT(4), .AB(3), .WB(3), .OB(4), .ND(2), .NE(2),
                  .GB(1), .OVERPACK(1), .PF(1), .PF_LUT(0), .ACC_N(2), .SHIFT(3))
    h1 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
