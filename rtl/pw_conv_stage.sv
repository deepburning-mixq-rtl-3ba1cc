// pw_conv_stage -- one point-wise (1x1) convolution layer as a pipeline
// stage, computed with kernel packing and, optionally, LUT PEs.
//
// The stage consumes a stream of pixels (all CIN channels in one beat) and
// produces, for every pixel, COUT output channels after batch normalisation,
// ReLU and requantisation to OB bits.  It works on groups of ND adjacent
// pixels: each PE multiplies ND activations (one input channel of the ND
// pixels) by NE weights (that input channel of NE output channels) per
// cycle, which is the paper's kernel packing of 1x1 kernels, and the DSP
// adds these products over input channels in groups of ACC_N cycles within
// its guard bits.  Decoded groups are summed in wide accumulators.  PF PEs
// cover PF*NE output channels at a time; the first PF_LUT of them are LUT
// PEs (lut_mac_pe) and the rest packed-DSP PEs (kernel_pack_pe), which is
// the paper's split of a stage's parallel factor into Pf_dsp and Pf_lut.
//
// Sequence per pixel group: LOAD (accept ND pixels), RUN (COUT/(PF*NE)
// output-channel groups x CIN beats, one per cycle), DRAIN (PE_LAT+1 cycles),
// OUT (stream the ND result pixels, waiting on out_ready).  With a ready
// producer and consumer a group takes ND + COUT/(PF*NE)*CIN + PE_LAT + 1 + ND
// cycles.  The number of pixels in a frame must be a multiple of ND.
//
// What follows the paper: kernel packing with guard-bit accumulation,
// optional 1-bit overpacking, DSP/LUT split of the parallel factor.  This
// design's choices: the group buffer, loop order, stream format and the
// configuration bus.  Configuration: CFG_WEIGHT writes w[oc][ic] at address
// oc*CIN + ic; CFG_BN_MUL / CFG_BN_ADD write scale / bias of channel cfg_addr.
module pw_conv_stage
  import mixq_pkg::*;
#(
  parameter int unsigned CIN      = 8,
  parameter int unsigned COUT     = 8,
  parameter int unsigned AB       = 3,
  parameter int unsigned WB       = 2,
  parameter int unsigned OB       = 8,
  parameter int unsigned ND       = 3,
  parameter int unsigned NE       = 2,
  parameter int unsigned GB       = 2,
  parameter bit          OVERPACK = 1'b0,
  parameter int unsigned PF       = 2,    // PEs in total
  parameter int unsigned PF_LUT   = 1,    // of which LUT PEs
  parameter int unsigned ACC_N    = 4,    // beats accumulated inside the DSP
  parameter int unsigned ACCW     = 24,
  parameter int unsigned SHIFT    = 8,
  localparam int unsigned NF      = ND * NE,
  localparam int unsigned NOCG    = COUT / (PF * NE)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [CIN*AB-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [COUT*OB-1:0] out_data,
  input  logic               cfg_we,
  input  cfg_sel_e           cfg_sel,
  input  logic [15:0]        cfg_addr,
  input  logic [31:0]        cfg_data
);
  if (COUT % (PF * NE) != 0) begin : g_chk_pf
    $error("pw_conv_stage: COUT must be a multiple of PF*NE");
  end
  if (PF_LUT > PF) begin : g_chk_lut
    $error("pw_conv_stage: PF_LUT exceeds PF");
  end

  localparam int unsigned CW = 16;

  logic [CIN*AB-1:0]  pbuf   [ND];
  logic [WB-1:0]      wmem   [COUT*CIN];
  logic signed [15:0] bn_mul [COUT];
  logic signed [31:0] bn_add [COUT];
  logic [OB-1:0]      obuf   [ND][COUT];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_sel)
        CFG_WEIGHT: wmem[cfg_addr]   <= cfg_data[WB-1:0];
        CFG_BN_MUL: bn_mul[cfg_addr] <= cfg_data[15:0];
        CFG_BN_ADD: bn_add[cfg_addr] <= cfg_data;
        default: ;
      endcase
    end
  end

  typedef enum logic [1:0] {S_LOAD, S_RUN, S_DRAIN, S_OUT} state_e;
  state_e state;

  logic [CW-1:0] px, ocg, ic, drain_cnt;

  wire issue     = (state == S_RUN);
  wire ic_last   = (ic == CW'(CIN - 1));
  wire ocg_last  = (ocg == CW'(NOCG - 1));
  wire grp_first = (ic % CW'(ACC_N)) == '0;
  wire grp_last  = ((ic % CW'(ACC_N)) == CW'(ACC_N - 1)) || ic_last;

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);

  always_comb
    for (int c = 0; c < COUT; c++)
      out_data[c*OB +: OB] = obuf[px][c];

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) pbuf[px] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      px <= '0; ocg <= '0; ic <= '0; drain_cnt <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (px == CW'(ND - 1)) begin
            px    <= '0;
            state <= S_RUN;
          end else px <= px + 1'b1;
        end
        S_RUN: begin
          if (!ic_last) ic <= ic + 1'b1;
          else begin
            ic <= '0;
            if (!ocg_last) ocg <= ocg + 1'b1;
            else begin
              ocg       <= '0;
              drain_cnt <= '0;
              state     <= S_DRAIN;
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == CW'(PE_LAT)) state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (px == CW'(ND - 1)) begin
            px    <= '0;
            state <= S_LOAD;
          end else px <= px + 1'b1;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // operand fetch
  logic        [AB-1:0] act [ND];
  logic signed [WB-1:0] wgt [PF][NE];

  always_comb begin
    for (int i = 0; i < ND; i++) act[i] = pbuf[i][int'(ic)*AB +: AB];
    for (int p = 0; p < PF; p++)
      for (int j = 0; j < NE; j++)
        wgt[p][j] = wmem[((int'(ocg) * PF + p) * NE + j) * CIN + int'(ic)];
  end

  // PE array: LUT PEs first, then packed-DSP PEs
  localparam int unsigned FW = AB + WB + GB + 1;
  logic                 pe_valid [PF];
  logic signed [FW-1:0] res [PF][NF];

  for (genvar p = 0; p < PF; p++) begin : g_pe
    if (p < PF_LUT) begin : g_lut
      lut_mac_pe #(.AB(AB), .WB(WB), .ND(ND), .NE(NE), .GB(GB)) u_pe (
        .clk, .rst_n, .in_valid(issue), .first(grp_first), .last(grp_last),
        .act, .wgt(wgt[p]), .out_valid(pe_valid[p]), .res(res[p])
      );
    end else begin : g_dsp
      kernel_pack_pe #(.AB(AB), .WB(WB), .ND(ND), .NE(NE), .GB(GB),
                       .OVERPACK(OVERPACK)) u_pe (
        .clk, .rst_n, .in_valid(issue), .first(grp_first), .last(grp_last),
        .act, .wgt(wgt[p]), .out_valid(pe_valid[p]), .res(res[p])
      );
    end
  end

  typedef struct packed {
    logic          first_of_ocg;
    logic          ocg_end;
    logic [CW-1:0] ocg;
  } tag_t;

  tag_t tag_sr [PE_LAT];
  tag_t tag_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < PE_LAT; t++) tag_sr[t] <= '0;
    end else begin
      tag_sr[0] <= '{first_of_ocg: (ic < CW'(ACC_N)), ocg_end: ic_last, ocg: ocg};
      for (int t = 1; t < PE_LAT; t++) tag_sr[t] <= tag_sr[t-1];
    end
  end
  assign tag_out = tag_sr[PE_LAT-1];

  logic signed [ACCW-1:0] acc  [PF][NF];
  logic signed [ACCW-1:0] full [PF][NF];
  logic [OB-1:0]          q    [PF][NF];

  always_comb
    for (int p = 0; p < PF; p++)
      for (int k = 0; k < NF; k++)
        full[p][k] = (tag_out.first_of_ocg ? '0 : acc[p][k]) + ACCW'(res[p][k]);

  for (genvar p = 0; p < PF; p++) begin : g_bn
    for (genvar j = 0; j < NE; j++) begin : g_oc
      for (genvar i = 0; i < ND; i++) begin : g_px
        bn_relu_quant #(.IW(ACCW), .SW(16), .BW(32), .SHIFT(SHIFT), .OB(OB)) u_bn (
          .acc(full[p][i + ND*j]),
          .scale(bn_mul[(int'(tag_out.ocg) * PF + p) * NE + j]),
          .bias(bn_add[(int'(tag_out.ocg) * PF + p) * NE + j]),
          .y(q[p][i + ND*j])
        );
      end
    end
  end

  always_ff @(posedge clk) begin
    if (pe_valid[0]) begin
      for (int p = 0; p < PF; p++) begin
        if (!tag_out.ocg_end) acc[p] <= full[p];
        else
          for (int j = 0; j < NE; j++)
            for (int i = 0; i < ND; i++)
              obuf[i][(int'(tag_out.ocg) * PF + p) * NE + j] <= q[p][i + ND*j];
      end
    end
  end
endmodule
