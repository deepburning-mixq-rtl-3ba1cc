// tb_kpe_harness -- drives one kernel-packing-style PE (kernel_pack_pe, or
// lut_mac_pe when LUT = 1) with random activations and weights in
// accumulation runs of random length (1 .. 2^GB beats, with random idle
// cycles), and checks every result block res[i + ND*j] = sum act[i]*wgt[j]
// against sums computed here, and that it arrives 4 cycles after the last
// beat.  Reports through its checks/failures/done ports.
module tb_kpe_harness #(
  parameter int AB = 3, parameter int WB = 2, parameter int ND = 3,
  parameter int NE = 2, parameter int GB = 2, parameter bit OVERPACK = 0,
  parameter bit LUT = 0, parameter int RUNS = 300
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int NF = ND * NE;
  localparam int FW = AB + WB + GB + 1;

  logic                 in_valid, first, last, out_valid;
  logic        [AB-1:0] act [ND];
  logic signed [WB-1:0] wgt [NE];
  logic signed [FW-1:0] res [NF];

  if (LUT) begin : g_lut
    lut_mac_pe #(.AB(AB), .WB(WB), .ND(ND), .NE(NE), .GB(GB)) dut (
      .clk, .rst_n, .in_valid, .first, .last, .act, .wgt, .out_valid, .res);
  end else begin : g_dsp
    kernel_pack_pe #(.AB(AB), .WB(WB), .ND(ND), .NE(NE), .GB(GB),
                     .OVERPACK(OVERPACK)) dut (
      .clk, .rst_n, .in_valid, .first, .last, .act, .wgt, .out_valid, .res);
  end

  typedef struct { int v [NF]; int cyc; } exp_t;
  exp_t exp_q[$];
  int   cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    checks = 0; failures = 0; done = 0;
    in_valid = 0; first = 0; last = 0;
    foreach (act[i]) act[i] = '0;
    foreach (wgt[j]) wgt[j] = '0;
    wait (rst_n);
    for (int r = 0; r < RUNS; r++) begin
      exp_t e;
      int len;
      len = $urandom_range(1, 1 << GB);
      foreach (e.v[k]) e.v[k] = 0;
      for (int t = 0; t < len; t++) begin
        while ($urandom_range(0, 4) == 0) begin
          @(negedge clk) in_valid = 0;
        end
        @(negedge clk);
        in_valid = 1; first = (t == 0); last = (t == len - 1);
        foreach (act[i]) act[i] = AB'($urandom);
        foreach (wgt[j]) wgt[j] = WB'($urandom);
        for (int j = 0; j < NE; j++)
          for (int i = 0; i < ND; i++)
            e.v[i + ND*j] += int'(wgt[j]) * int'({1'b0, act[i]});
        if (last) begin
          e.cyc = cyc;
          exp_q.push_back(e);
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (8) @(negedge clk);
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", exp_q.size());
    end
    done = 1;
  end

  always @(negedge clk) begin
    if (out_valid) begin
      exp_t e;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result");
      end else begin
        e = exp_q.pop_front();
        checks++;
        if (cyc - e.cyc != 4) begin
          failures++;
          $display("FAIL: latency %0d", cyc - e.cyc);
        end
        for (int k = 0; k < NF; k++) begin
          checks++;
          if (int'(res[k]) != e.v[k]) begin
            failures++;
            $display("FAIL: res[%0d]=%0d expected %0d", k, res[k], e.v[k]);
          end
        end
      end
    end
  end
endmodule
