// kernel_pack_pe -- kernel-packing processing element (one DSP).
//
// Kernel packing puts ND activations of adjacent pixels on the DSP's narrow
// port D, spaced PB bits apart, and NE weights of NE different output
// channels (adjacent 1x1 kernels) on the wide port E, spaced ND*PB bits apart:
//   D = sum_i act[i] * 2^(i*PB),  E = sum_j wgt[j] * 2^(j*ND*PB)
// so that D*E holds the ND*NE independent products act[i]*wgt[j] in segment
// i + ND*j.  PB = AB + WB + GB - OVERPACK; the GB guard bits let the DSP's own
// accumulator sum up to 2^GB packed products (over input channels) before the
// segments are decoded.  With OVERPACK = 1 the pitch is one bit narrower than
// the products need and the overlap is repaired by pack_decoder from the
// XOR-accumulated LSB products computed here in logic.
//
// The packing equation, its port constraints and the overpacking correction
// follow the paper.  Activations are unsigned (they come from ReLU) and
// weights two's complement; the first/last framing of an accumulation and
// the placement of weights on the wide port are this design's choices.
//
// Interface: one beat per cycle when in_valid.  `first` starts a new
// accumulation, `last` ends it; res is valid (out_valid, one cycle) PE_LAT = 4
// cycles after the `last` beat.  res[i + ND*j] = sum over the beats of
// act[i] * wgt[j].
module kernel_pack_pe
  import mixq_pkg::*;
#(
  parameter int unsigned AB       = 3,   // activation width (unsigned)
  parameter int unsigned WB       = 2,   // weight width (two's complement)
  parameter int unsigned ND       = 3,   // activations per DSP (port D)
  parameter int unsigned NE       = 2,   // weights per DSP (port E)
  parameter int unsigned GB       = 2,   // guard bits
  parameter bit          OVERPACK = 1'b0,
  localparam int unsigned PB      = AB + WB + GB - OVERPACK,
  localparam int unsigned NF      = ND * NE,
  localparam int unsigned FW      = PB + OVERPACK + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        first,
  input  logic                        last,
  input  logic        [AB-1:0]        act [ND],
  input  logic signed [WB-1:0]        wgt [NE],
  output logic                        out_valid,
  output logic signed [FW-1:0]        res [NF]
);
  // Port constraints of the packing (unsigned activations keep the sign bit
  // of the narrow port clear).
  if (AB + (ND - 1) * PB > DSP_NARROW_W - 1) begin : g_chk_d
    $error("kernel_pack_pe: activations do not fit port D");
  end
  if (WB + (NE - 1) * ND * PB > DSP_WIDE_W) begin : g_chk_e
    $error("kernel_pack_pe: weights do not fit port E");
  end

  logic signed [DSP_WIDE_W-1:0]   port_e;
  logic signed [DSP_NARROW_W-1:0] port_d;
  logic        [NF-1:0]           par_now;

  always_comb begin
    logic signed [DSP_P_W-1:0] e_sum, d_sum;
    e_sum = '0;
    d_sum = '0;
    for (int i = 0; i < ND; i++)
      d_sum += DSP_P_W'($unsigned(act[i])) <<< (i * PB);
    for (int j = 0; j < NE; j++)
      e_sum += DSP_P_W'(wgt[j]) <<< (j * ND * PB);
    port_d = DSP_NARROW_W'(d_sum);
    port_e = DSP_WIDE_W'(e_sum);
    for (int j = 0; j < NE; j++)
      for (int i = 0; i < ND; i++)
        par_now[i + ND*j] = act[i][0] & wgt[j][0];
  end

  logic signed [DSP_P_W-1:0] p;
  logic                      p_valid;

  dsp_mul #(.AW(DSP_WIDE_W), .BW(DSP_NARROW_W), .PW(DSP_P_W)) u_dsp (
    .clk, .rst_n, .in_valid, .accum(!first), .a(port_e), .b(port_d),
    .p, .p_valid
  );

  // LSB-parity side path, aligned with the DSP pipeline (only needed for
  // overpacking; otherwise it is unused and removed by synthesis).
  logic [NF-1:0] par1, par2, par_acc;
  logic          v1, v2, f1, f2, l1, l2, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par1 <= '0; par2 <= '0; par_acc <= '0;
      v1 <= 1'b0; v2 <= 1'b0; f1 <= 1'b0; f2 <= 1'b0; l1 <= 1'b0; l2 <= 1'b0;
      last_q <= 1'b0;
    end else begin
      v1 <= in_valid; f1 <= first; l1 <= last; par1 <= par_now;
      v2 <= v1;       f2 <= f1;    l2 <= l1;   par2 <= par1;
      if (v2) par_acc <= f2 ? par2 : (par_acc ^ par2);
      last_q <= v2 & l2;
    end
  end

  logic signed [FW-1:0] seg [NF];

  pack_decoder #(.NF(NF), .PB(PB), .SIGNED(1'b1), .OVERPACK(OVERPACK),
                 .PW(DSP_P_W)) u_dec (
    .p, .par(par_acc), .seg
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < NF; k++) res[k] <= '0;
    end else begin
      out_valid <= last_q;
      if (last_q) res <= seg;
    end
  end

  // The guard bits bound how many packed products the DSP may accumulate.
  int unsigned acc_cnt;
  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc_cnt <= first ? 1 : acc_cnt + 1;
      assert (first || acc_cnt < (1 << GB))
        else $error("kernel_pack_pe: more than 2^GB accumulations");
    end
  end
endmodule
