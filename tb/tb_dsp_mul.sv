// tb_dsp_mul -- self-checking test of the DSP multiply-accumulate primitive.
// Drives random 27 x 18 signed operands, in accumulation runs of random
// length, and checks P three cycles after each beat against a reference
// accumulation computed in the testbench with 64-bit integers.
module tb_dsp_mul;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               in_valid, accum, p_valid;
  logic signed [26:0] a;
  logic signed [17:0] b;
  logic signed [47:0] p;

  dsp_mul dut (.clk, .rst_n, .in_valid, .accum, .a, .b, .p, .p_valid);

  int checks = 0, failures = 0;
  longint ref_q[$];
  longint acc_ref;
  int     lat_q[$];
  int     cyc = 0;

  always @(posedge clk) cyc++;

  initial begin
    in_valid = 0; accum = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    acc_ref = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      accum    = ($urandom_range(0, 4) != 0);
      a = 27'($urandom) ^ (27'($urandom_range(0,1)) << 26);
      b = 18'($urandom);
      if (in_valid) begin
        acc_ref = (accum ? acc_ref : 0) + longint'(a) * longint'(b);
        ref_q.push_back(acc_ref);
        lat_q.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    if (ref_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", ref_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (p_valid) begin
      longint exp_v;
      int     c0;
      checks++;
      exp_v = ref_q.pop_front();
      c0    = lat_q.pop_front();
      if (longint'(p) != exp_v) begin
        failures++;
        $display("FAIL: p=%0d expected %0d", p, exp_v);
      end
      // latency: beat sampled at edge c0+1, result visible after edge c0+3
      if (cyc - c0 != 3) begin
        failures++;
        $display("FAIL: latency %0d", cyc - c0);
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
