// tb_bn_relu_quant -- self-checking test of batch normalisation, ReLU and
// requantisation: random sums, scales and biases (including values that
// saturate at both ends) against y = clamp((acc*scale+bias) >> 8, 0, 15)
// computed here with 64-bit arithmetic.
module tb_bn_relu_quant;
  logic signed [15:0] acc, scale;
  logic signed [31:0] bias;
  logic        [3:0]  y;

  bn_relu_quant #(.IW(16), .SW(16), .BW(32), .SHIFT(8), .OB(4)) dut (.acc, .scale, .bias, .y);

  int checks = 0, failures = 0;
  int n_zero = 0, n_sat = 0, n_mid = 0;

  initial begin
    for (int n = 0; n < 5000; n++) begin
      longint t, e;
      acc   = 16'($urandom_range(0, 600)) - 16'sd300;
      scale = 16'($urandom_range(0, 40)) - 16'sd10;
      bias  = 32'($urandom_range(0, 8000)) - 32'sd2000;
      #1;
      t = (longint'(acc) * longint'(scale) + longint'(bias)) >>> 8;
      e = (t < 0) ? 0 : (t > 15) ? 15 : t;
      if (t < 0) n_zero++; else if (t > 15) n_sat++; else n_mid++;
      checks++;
      if (longint'(y) != e) begin
        failures++;
        $display("FAIL: acc=%0d scale=%0d bias=%0d y=%0d expected %0d", acc, scale, bias, y, e);
      end
    end
    // every region of the transfer function must have been exercised
    checks++;
    if (n_zero == 0 || n_sat == 0 || n_mid == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
