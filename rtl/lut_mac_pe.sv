// lut_mac_pe -- LUT-arithmetic processing element.
//
// Computes exactly what kernel_pack_pe computes -- the ND x NE block of
// sums act[i] * wgt[j] over an accumulation -- but with ND*NE small
// multipliers built from LUTs instead of one packed DSP.  A stage can
// replace some of its DSP PEs with these to trade LUTs for DSPs when bit
// widths are small (the paper's "LUT replacement", Pf_lut in its deployment
// table).  The paper gives only the function; this form is the simplest
// one: a use_dsp = "no" product register per pair and one accumulator per
// pair, pipelined to the same PE_LAT = 4 latency and the same ports and
// result width as kernel_pack_pe so that the two are interchangeable.
//
// Interface: as kernel_pack_pe.  res[i + ND*j] = sum of act[i]*wgt[j].
module lut_mac_pe #(
  parameter int unsigned AB       = 3,
  parameter int unsigned WB       = 2,
  parameter int unsigned ND       = 3,
  parameter int unsigned NE       = 2,
  parameter int unsigned GB       = 2,
  localparam int unsigned NF      = ND * NE,
  localparam int unsigned FW      = AB + WB + GB + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic        [AB-1:0] act [ND],
  input  logic signed [WB-1:0] wgt [NE],
  output logic                 out_valid,
  output logic signed [FW-1:0] res [NF]
);
  logic        [AB-1:0]   act_r [ND];
  logic signed [WB-1:0]   wgt_r [NE];
  (* use_dsp = "no" *) logic signed [AB+WB:0] prod [NF];
  logic signed [FW-1:0]   acc [NF];
  logic                   v1, v2, f1, f2, l1, l2, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; f1 <= 1'b0; f2 <= 1'b0; l1 <= 1'b0; l2 <= 1'b0;
      last_q <= 1'b0; out_valid <= 1'b0;
      for (int i = 0; i < ND; i++) act_r[i] <= '0;
      for (int j = 0; j < NE; j++) wgt_r[j] <= '0;
      for (int k = 0; k < NF; k++) begin
        prod[k] <= '0; acc[k] <= '0; res[k] <= '0;
      end
    end else begin
      // stage 1: operand registers
      v1 <= in_valid; f1 <= first; l1 <= last;
      if (in_valid) begin
        act_r <= act;
        wgt_r <= wgt;
      end
      // stage 2: LUT multipliers
      v2 <= v1; f2 <= f1; l2 <= l1;
      if (v1)
        for (int j = 0; j < NE; j++)
          for (int i = 0; i < ND; i++)
            prod[i + ND*j] <= wgt_r[j] * $signed({1'b0, act_r[i]});
      // stage 3: accumulators
      last_q <= v2 & l2;
      if (v2)
        for (int k = 0; k < NF; k++)
          acc[k] <= (f2 ? '0 : acc[k]) + FW'(prod[k]);
      // stage 4: result register
      out_valid <= last_q;
      if (last_q) res <= acc;
    end
  end
endmodule
