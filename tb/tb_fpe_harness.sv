// tb_fpe_harness -- drives one filter-packing PE (filter_pack_pe, or
// opsep_filter_pe when OPSEP = 1, splitting the activation when SEP_ACT = 1,
// or its LUT counterpart lut_filter_pe when LUT = 1) with random filters and activation chunks
// in accumulation runs of random length (1 .. 2^E_g beats, with random idle
// cycles), and checks every coefficient c[k] = sum_{i+j=k} f[i]*s[j] (summed
// over the run) against values computed here, and the 4-cycle latency from
// the last beat.  Weights are two's complement unless W_SIGNED = 0.
module tb_fpe_harness #(
  parameter int AB = 2, parameter int WB = 3, parameter int KP = 3,
  parameter int NP = 3, parameter int GB = 2, parameter int GB_L = 0,
  parameter bit OVERPACK = 0, parameter bit W_SIGNED = 1,
  parameter bit W_ON_WIDE = 1, parameter bit OPSEP = 0, parameter bit SEP_ACT = 0,
  parameter bit LUT = 0,
  parameter int RUNS = 300
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int NF    = KP + NP - 1;
  localparam int MINKN = (KP < NP) ? KP : NP;
  localparam int EG    = GB - $clog2(MINKN);
  localparam int FW    = !OPSEP ? AB + WB + GB + 1
                       : SEP_ACT ? mixq_pkg::opsep_fw(WB, AB, GB, GB_L)
                       : mixq_pkg::opsep_fw(AB, WB, GB, GB_L);

  logic                 in_valid, first, last, out_valid;
  logic [WB-1:0]        f [KP];
  logic [AB-1:0]        s [NP];
  logic signed [FW-1:0] coef [NF];

  if (OPSEP) begin : g_sep
    opsep_filter_pe #(.AB(AB), .WB(WB), .KP(KP), .NP(NP), .GB_H(GB),
                      .GB_L(GB_L), .OVERPACK(OVERPACK), .SEP_ACT(SEP_ACT)) dut (
      .clk, .rst_n, .in_valid, .first, .last, .f, .s, .out_valid, .coef);
  end else if (LUT) begin : g_lut
    lut_filter_pe #(.AB(AB), .WB(WB), .KP(KP), .NP(NP), .GB(GB),
                    .W_SIGNED(W_SIGNED)) dut (
      .clk, .rst_n, .in_valid, .first, .last, .f, .s, .out_valid, .coef);
  end else begin : g_pack
    filter_pack_pe #(.AB(AB), .WB(WB), .KP(KP), .NP(NP), .GB(GB),
                     .OVERPACK(OVERPACK), .W_SIGNED(W_SIGNED),
                     .W_ON_WIDE(W_ON_WIDE)) dut (
      .clk, .rst_n, .in_valid, .first, .last, .f, .s, .out_valid, .coef);
  end

  typedef struct { int v [NF]; int cyc; } exp_t;
  exp_t exp_q[$];
  int   cyc = 0;
  always @(posedge clk) cyc++;

  function automatic int wval(logic [WB-1:0] x);
    return W_SIGNED ? int'(signed'(x)) : int'({1'b0, x});
  endfunction

  initial begin
    checks = 0; failures = 0; done = 0;
    in_valid = 0; first = 0; last = 0;
    foreach (f[i]) f[i] = '0;
    foreach (s[j]) s[j] = '0;
    wait (rst_n);
    for (int r = 0; r < RUNS; r++) begin
      exp_t e;
      int len;
      len = $urandom_range(1, 1 << EG);
      foreach (e.v[k]) e.v[k] = 0;
      for (int t = 0; t < len; t++) begin
        while ($urandom_range(0, 4) == 0) begin
          @(negedge clk) in_valid = 0;
        end
        @(negedge clk);
        in_valid = 1; first = (t == 0); last = (t == len - 1);
        foreach (f[i]) f[i] = WB'($urandom);
        foreach (s[j]) s[j] = AB'($urandom);
        // corner values now and then
        if ($urandom_range(0, 7) == 0) begin
          foreach (f[i]) f[i] = W_SIGNED ? {1'b1, {(WB-1){1'b0}}} : '1;
          foreach (s[j]) s[j] = '1;
        end
        for (int i = 0; i < KP; i++)
          for (int j = 0; j < NP; j++)
            e.v[i + j] += wval(f[i]) * int'({1'b0, s[j]});
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
          if (int'(coef[k]) != e.v[k]) begin
            failures++;
            $display("FAIL: coef[%0d]=%0d expected %0d", k, coef[k], e.v[k]);
          end
        end
      end
    end
  end
endmodule
