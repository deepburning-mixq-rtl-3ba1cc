// lut_filter_pe -- LUT-arithmetic processing element for filter packing.
//
// Computes exactly what filter_pack_pe computes -- the KP+NP-1 coefficients
// c[k] = sum_{i+j=k} f[i]*s[j] of a KP-tap filter against NP activations,
// summed over an accumulation from `first` to `last` -- with KP*NP small
// LUT multipliers instead of one packed DSP.  A 3x3 convolution stage can
// replace some of its DSP PEs with these to spend LUTs instead of DSPs
// (LUT replacement applies to every stage in the paper; it gives only the
// function, so this is the simplest form).  One use_dsp = "no" product
// register per tap/activation pair, then an adder per coefficient that also
// accumulates, and an output register: the same PE_LAT = 4 cycles, the same
// ports and the same result width as filter_pack_pe, so the two are
// interchangeable.  Unlike the packed PE it has no port-width limit; GB only
// sets the result width, as it does for the PE it stands in for.
//
// Interface: as filter_pack_pe (taps two's complement unless W_SIGNED = 0,
// activations unsigned).
module lut_filter_pe #(
  parameter int unsigned AB       = 2,
  parameter int unsigned WB       = 3,
  parameter int unsigned KP       = 3,
  parameter int unsigned NP       = 3,
  parameter int unsigned GB       = 2,
  parameter bit          W_SIGNED = 1'b1,
  localparam int unsigned NF      = KP + NP - 1,
  localparam int unsigned FW      = AB + WB + GB + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic [WB-1:0]        f [KP],
  input  logic [AB-1:0]        s [NP],
  output logic                 out_valid,
  output logic signed [FW-1:0] coef [NF]
);
  logic [WB-1:0]          f_r [KP];
  logic [AB-1:0]          s_r [NP];
  (* use_dsp = "no" *) logic signed [AB+WB:0] prod [KP][NP];
  logic signed [FW-1:0]   acc [NF];
  logic signed [FW-1:0]   csum [NF];
  logic                   v1, v2, f1, f2, l1, l2, last_q;

  // sum of the products that fall on each coefficient
  always_comb
    for (int k = 0; k < NF; k++) begin
      csum[k] = '0;
      for (int i = 0; i < KP; i++)
        if (k - i >= 0 && k - i < NP) csum[k] += FW'(prod[i][k - i]);
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; f1 <= 1'b0; f2 <= 1'b0; l1 <= 1'b0; l2 <= 1'b0;
      last_q <= 1'b0; out_valid <= 1'b0;
      for (int i = 0; i < KP; i++) f_r[i] <= '0;
      for (int j = 0; j < NP; j++) s_r[j] <= '0;
      for (int i = 0; i < KP; i++)
        for (int j = 0; j < NP; j++) prod[i][j] <= '0;
      for (int k = 0; k < NF; k++) begin
        acc[k] <= '0; coef[k] <= '0;
      end
    end else begin
      // stage 1: operand registers
      v1 <= in_valid; f1 <= first; l1 <= last;
      if (in_valid) begin
        f_r <= f;
        s_r <= s;
      end
      // stage 2: LUT multipliers
      v2 <= v1; f2 <= f1; l2 <= l1;
      if (v1)
        for (int i = 0; i < KP; i++)
          for (int j = 0; j < NP; j++)
            prod[i][j] <= $signed({W_SIGNED & f_r[i][WB-1], f_r[i]})
                          * $signed({1'b0, s_r[j]});
      // stage 3: coefficient sums and accumulation
      last_q <= v2 & l2;
      if (v2)
        for (int k = 0; k < NF; k++)
          acc[k] <= (f2 ? '0 : acc[k]) + csum[k];
      // stage 4: result register
      out_valid <= last_q;
      if (last_q) coef <= acc;
    end
  end
endmodule
