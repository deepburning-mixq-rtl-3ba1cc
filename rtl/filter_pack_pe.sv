// filter_pack_pe -- filter-packing processing element (one DSP).
//
// Filter packing treats a KP-tap filter f and NP consecutive activations s
// as polynomials evaluated at 2^PB:
//   F = sum_i f[i] * 2^(i*PB),  S = sum_j s[j] * 2^(j*PB)
//   F * S = sum_k c[k] * 2^(k*PB),  c[k] = sum_{i+j=k} f[i]*s[j]
// so one DSP multiplication yields the KP+NP-1 coefficients of the 1-D
// convolution f * s.  Each coefficient already sums up to min(KP,NP)
// products, so the guard bits must be at least ceil(log2(min(KP,NP))); any
// further guard bits (E_g) let the DSP accumulate 2^E_g packed products (for
// example over kernel rows and input channels) before decoding.  PB = AB +
// WB + GB - OVERPACK; with OVERPACK = 1 the overlapped bits are repaired by
// pack_decoder from LSB parities computed here in logic.
//
// To obtain a correlation (what a CNN layer computes) the caller stores the
// filter reversed, f[i] = w[KP-1-i], as the paper's filter-packing figure
// shows (w0 at the most significant position); coefficient c[k] is then the
// window output whose last tap meets s[k-KP+1].  Longer filters and
// sequences are split into sub-tasks whose coefficients the caller
// overlap-adds (see conv3x3_stage).
//
// The polynomial packing, its port constraints, the guard-bit rule and the
// overpacking correction follow the paper.  Activations are unsigned;
// weights are two's complement unless W_SIGNED = 0 (used for the low half
// of a separated operand).  W_ON_WIDE selects whether the filter or the
// activations use the 27-bit port (the paper leaves this to the optimizer).
//
// Interface: one beat per cycle when in_valid; `first` starts and `last`
// ends a DSP accumulation.  coef is valid (out_valid, one cycle) PE_LAT = 4
// cycles after the `last` beat.
module filter_pack_pe
  import mixq_pkg::*;
#(
  parameter int unsigned AB        = 2,
  parameter int unsigned WB        = 3,
  parameter int unsigned KP        = 3,
  parameter int unsigned NP        = 3,
  parameter int unsigned GB        = 2,
  parameter bit          OVERPACK  = 1'b0,
  parameter bit          W_SIGNED  = 1'b1,
  parameter bit          W_ON_WIDE = 1'b1,
  localparam int unsigned PB       = AB + WB + GB - OVERPACK,
  localparam int unsigned NF       = KP + NP - 1,
  localparam int unsigned FW       = PB + OVERPACK + 1,
  localparam int unsigned MINKN    = (KP < NP) ? KP : NP,
  localparam int unsigned EG       = GB - $clog2(MINKN)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic [WB-1:0]        f [KP],   // packed filter taps (signed if W_SIGNED)
  input  logic [AB-1:0]        s [NP],   // activations (unsigned)
  output logic                 out_valid,
  output logic signed [FW-1:0] coef [NF]
);
  localparam int unsigned W_PORT = W_ON_WIDE ? DSP_WIDE_W : DSP_NARROW_W;
  localparam int unsigned A_PORT = W_ON_WIDE ? DSP_NARROW_W : DSP_WIDE_W;

  if (GB < $clog2(MINKN)) begin : g_chk_gb
    $error("filter_pack_pe: guard bits below ceil(log2(min(KP,NP)))");
  end
  if (WB + (KP - 1) * PB > W_PORT - (W_SIGNED ? 0 : 1)) begin : g_chk_w
    $error("filter_pack_pe: filter does not fit its port");
  end
  if (AB + (NP - 1) * PB > A_PORT - 1) begin : g_chk_a
    $error("filter_pack_pe: activations do not fit their port");
  end

  logic signed [DSP_WIDE_W-1:0]   port_a;
  logic signed [DSP_NARROW_W-1:0] port_b;
  logic        [NF-1:0]           par_now;

  always_comb begin
    logic signed [DSP_P_W-1:0] f_sum, s_sum;
    f_sum = '0;
    s_sum = '0;
    for (int i = 0; i < KP; i++)
      f_sum += (W_SIGNED ? DSP_P_W'(signed'(f[i])) : DSP_P_W'(f[i])) <<< (i * PB);
    for (int j = 0; j < NP; j++)
      s_sum += DSP_P_W'(s[j]) <<< (j * PB);
    if (W_ON_WIDE) begin
      port_a = DSP_WIDE_W'(f_sum);
      port_b = DSP_NARROW_W'(s_sum);
    end else begin
      port_a = DSP_WIDE_W'(s_sum);
      port_b = DSP_NARROW_W'(f_sum);
    end
    par_now = '0;
    for (int i = 0; i < KP; i++)
      for (int j = 0; j < NP; j++)
        par_now[i+j] ^= f[i][0] & s[j][0];
  end

  logic signed [DSP_P_W-1:0] p;
  logic                      p_valid;

  dsp_mul #(.AW(DSP_WIDE_W), .BW(DSP_NARROW_W), .PW(DSP_P_W)) u_dsp (
    .clk, .rst_n, .in_valid, .accum(!first), .a(port_a), .b(port_b),
    .p, .p_valid
  );

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

  pack_decoder #(.NF(NF), .PB(PB), .SIGNED(W_SIGNED), .OVERPACK(OVERPACK),
                 .PW(DSP_P_W)) u_dec (
    .p, .par(par_acc), .seg
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < NF; k++) coef[k] <= '0;
    end else begin
      out_valid <= last_q;
      if (last_q) coef <= seg;
    end
  end

  // The extra guard bits bound how many packed products the DSP accumulates.
  int unsigned acc_cnt;
  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc_cnt <= first ? 1 : acc_cnt + 1;
      assert (first || acc_cnt < (1 << EG))
        else $error("filter_pack_pe: more than 2^E_g accumulations");
    end
  end
endmodule
