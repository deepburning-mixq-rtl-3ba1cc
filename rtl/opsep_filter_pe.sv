// opsep_filter_pe -- filter packing with operand separation (two DSPs).
//
// A WB-bit weight f is split into a high part f_H (the WB - ceil(WB/2) upper
// bits, two's complement) and a low part f_L (the ceil(WB/2) lower bits,
// unsigned), f = f_H * 2^ceil(WB/2) + f_L.  Each half is filter-packed on its
// own DSP; the narrower halves pack more densely, which can raise the number
// of useful multiplications per DSP even though two DSPs are used.  The
// coefficients are recombined as
//   c[k] = 2^ceil(WB/2) * c_H[k] + c_L[k].
// With SEP_ACT = 1 the activation is split instead: s = s_H * 2^ceil(AB/2)
// + s_L, both halves unsigned, the full weight goes to both DSPs, and
//   c[k] = 2^ceil(AB/2) * c_H[k] + c_L[k].
// The split and the recombination follow the paper's operand-separation
// equation, which it states for the weight and allows for either operand;
// the guard bits of each half (GB_H, GB_L) are parameters because the two
// halves have different widths.
//
// Interface and timing are those of filter_pack_pe (PE_LAT = 4 cycles from
// the `last` beat to out_valid); the recombination adder is combinational
// after the two PEs' output registers.
module opsep_filter_pe
  import mixq_pkg::*;
#(
  parameter int unsigned AB       = 8,
  parameter int unsigned WB       = 5,
  parameter int unsigned KP       = 3,
  parameter int unsigned NP       = 1,
  parameter int unsigned GB_H     = 0,
  parameter int unsigned GB_L     = 0,
  parameter bit          OVERPACK = 1'b0,
  parameter bit          SEP_ACT  = 1'b0,   // split the activation, not the weight
  localparam int unsigned XB      = SEP_ACT ? AB : WB,     // width being split
  localparam int unsigned LB      = (XB + 1) / 2,          // ceil(XB/2)
  localparam int unsigned HB      = XB - LB,
  localparam int unsigned NF      = KP + NP - 1,
  localparam int unsigned AB_H    = SEP_ACT ? HB : AB,
  localparam int unsigned WB_H    = SEP_ACT ? WB : HB,
  localparam int unsigned AB_L    = SEP_ACT ? LB : AB,
  localparam int unsigned WB_L    = SEP_ACT ? WB : LB,
  localparam int unsigned FWH     = AB_H + WB_H + GB_H + 1,
  localparam int unsigned FWL     = AB_L + WB_L + GB_L + 1,
  localparam int unsigned FW      = ((FWH + LB > FWL) ? FWH + LB : FWL) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic [WB-1:0]        f [KP],   // two's complement filter taps
  input  logic [AB-1:0]        s [NP],
  output logic                 out_valid,
  output logic signed [FW-1:0] coef [NF]
);
  logic [WB_H-1:0] f_h [KP];
  logic [WB_L-1:0] f_l [KP];
  logic [AB_H-1:0] s_h [NP];
  logic [AB_L-1:0] s_l [NP];

  if (SEP_ACT) begin : g_split_a
    always_comb begin
      for (int i = 0; i < KP; i++) begin
        f_h[i] = f[i];
        f_l[i] = f[i];
      end
      for (int j = 0; j < NP; j++) begin
        s_h[j] = s[j][AB-1:LB];
        s_l[j] = s[j][LB-1:0];
      end
    end
  end else begin : g_split_w
    always_comb begin
      for (int i = 0; i < KP; i++) begin
        f_h[i] = f[i][WB-1:LB];
        f_l[i] = f[i][LB-1:0];
      end
      for (int j = 0; j < NP; j++) begin
        s_h[j] = s[j];
        s_l[j] = s[j];
      end
    end
  end

  logic signed [FWH-1:0] c_h [NF];
  logic signed [FWL-1:0] c_l [NF];
  logic                  v_h, v_l;

  filter_pack_pe #(.AB(AB_H), .WB(WB_H), .KP(KP), .NP(NP), .GB(GB_H),
                   .OVERPACK(OVERPACK), .W_SIGNED(1'b1)) u_hi (
    .clk, .rst_n, .in_valid, .first, .last, .f(f_h), .s(s_h),
    .out_valid(v_h), .coef(c_h)
  );

  filter_pack_pe #(.AB(AB_L), .WB(WB_L), .KP(KP), .NP(NP), .GB(GB_L),
                   .OVERPACK(OVERPACK), .W_SIGNED(SEP_ACT)) u_lo (
    .clk, .rst_n, .in_valid, .first, .last, .f(f_l), .s(s_l),
    .out_valid(v_l), .coef(c_l)
  );

  always_comb begin
    out_valid = v_h & v_l;
    for (int k = 0; k < NF; k++)
      coef[k] = (FW'(c_h[k]) <<< LB) + FW'(c_l[k]);
  end
endmodule
