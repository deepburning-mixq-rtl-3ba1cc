// tb_conv3x3_stage -- self-checking test of the 3x3 convolution stage in five
// configurations:
//  - W3/A2 filter packing with 1-bit overpacking, 3 activations per DSP and
//    DSP accumulation of two beats, one DSP PE next to one LUT PE;
//  - W5/A8 operand separation of the weight, one activation per DSP;
//  - W3/A3 with the kernel row split into a 2-tap and a 1-tap sub-filter,
//    4 activations on the 27-bit port;
//  - W8/A8 with one tap and 2 activations per DSP (3 sub-filters per row)
//    and DSP accumulation of two beats;
//  - W4/A8 with the activations split into two 4-bit halves (operand
//    separation, 3 taps x 2 activations).
// Small frames keep the run short; the reference model is in
// tb_conv_harness.
module tb_conv3x3_stage;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int   c0, c1, c2, c3, c4, f0, f1, f2, f3, f4;
  logic d0, d1, d2, d3, d4;

  tb_conv_harness #(.H(5), .W(6), .CIN(3), .COUT(4), .AB(2), .WB(3), .OB(3),
                    .NP(3), .GB(3), .OVERPACK(1), .PF(2), .PF_LUT(1), .ACC_N(2),
                    .SHIFT(6))
    h0 (.clk, .rst_n, .checks(c0), .failures(f0), .done(d0));
  tb_conv_harness #(.H(4), .W(4), .CIN(3), .COUT(4), .AB(8), .WB(5), .OB(2),
                    .NP(1), .GB(0), .GB_L(0), .OVERPACK(0), .OPSEP(1), .PF(2),
                    .ACC_N(1), .SHIFT(10))
    h1 (.clk, .rst_n, .checks(c1), .failures(f1), .done(d1));
  tb_conv_harness #(.H(4), .W(7), .CIN(2), .COUT(4), .AB(3), .WB(3), .OB(3),
                    .KP(2), .NP(4), .GB(1), .W_ON_WIDE(0), .OVERPACK(0), .PF(2),
                    .ACC_N(1), .SHIFT(5))
    h2 (.clk, .rst_n, .checks(c2), .failures(f2), .done(d2));
  tb_conv_harness #(.H(4), .W(5), .CIN(2), .COUT(2), .AB(8), .WB(8), .OB(4),
                    .KP(1), .NP(2), .GB(1), .W_ON_WIDE(0), .OVERPACK(0), .PF(1),
                    .ACC_N(2), .SHIFT(14))
    h3 (.clk, .rst_n, .checks(c3), .failures(f3), .done(d3));
  tb_conv_harness #(.H(3), .W(5), .CIN(2), .COUT(2), .AB(8), .WB(4), .OB(3),
                    .NP(2), .GB(1), .GB_L(1), .OVERPACK(0), .OPSEP(1),
                    .SEP_ACT(1), .PF(2), .ACC_N(1), .SHIFT(11))
    h4 (.clk, .rst_n, .checks(c4), .failures(f4), .done(d4));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2 && d3 && d4);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3 + c4, f0 + f1 + f2 + f3 + f4);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3 + c4, f0 + f1 + f2 + f3 + f4 + 1);
    $finish;
  end
endmodule
