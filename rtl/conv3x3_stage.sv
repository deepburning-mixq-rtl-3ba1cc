// conv3x3_stage -- one 3x3 convolution layer as a pipeline stage, computed
// with filter packing.
//
// The stage receives an H x W feature map as a stream of pixels (all CIN
// channels of a pixel in one beat, row-major), computes a 3x3, stride-1,
// zero-padded ("same") convolution to COUT channels, applies batch
// normalisation, ReLU and requantisation, and streams the H x W x COUT result
// out row by row.  Each layer of a network becomes one such stage; PF
// processing elements (PEs) work on PF output channels at once, which is the
// stage's parallel factor.
//
// How the convolution is mapped on the packed DSPs (after the paper's
// filter-packing scheme): the 3x3 kernel is divided into its three rows, and
// every row is a 3-tap 1-D filter run along a zero-padded input row
// s[0..W+1] (s[j] = in[row][j-1]).  The sequence is cut into NCH chunks of NP
// activations.  A row whose 3 taps do not fit one DSP is divided into
// NSUB = ceil(3/KP) sub-filters of KP taps (the last one zero-filled);
// sub-filter u holds taps u*KP.. and is multiplied with the chunk's
// activations shifted left by u*KP positions, so that its coefficients land
// on the same indices as those of sub-filter 0.  For one chunk a PE
// receives, one per cycle, the KP taps (stored reversed) and NP activations
// of every (input channel, kernel row, sub-filter) triple -- CIN*3*NSUB
// beats -- and the DSP adds them up in groups of ACC_N beats, which the
// spare guard bits allow.  Each group's KP+NP-1 decoded coefficients are
// summed in a wide accumulator.  When a chunk is complete, its first KP-1
// coefficients are added to the KP-1 coefficients carried over from the
// previous chunk (intermediate coefficient accumulation), its first NP sums
// are final convolution outputs (padded index g gives output column g-2),
// and its last KP-1 sums are carried into the next chunk.
//
// Sequence of one frame: LOAD (accept H*W pixels into the frame buffer),
// then for every output row RUN (issue COUT/PF * NCH * CIN*3*NSUB beats, one
// per cycle, no stalls), DRAIN (PE_LAT+1 cycles) and OUT (stream W pixels;
// this is the only state that waits on out_ready).  A row therefore takes
// COUT/PF * ceil((W+2)/NP) * 3*CIN*NSUB + PE_LAT + 1 + W cycles with a ready
// consumer.
//
// What follows the paper: per-layer stage, PF packed DSPs, filter packing
// with reversed filter, sub-task division with overlap-add, DSP accumulation
// in the guard bits, optional 1-bit overpacking and operand separation
// (OPSEP selects opsep_filter_pe, two DSPs per PE, splitting the weight or,
// with SEP_ACT, the activation), division of the filter
// into ceil(K/KP) sub-tasks.  This design's own choices: a whole-frame input
// buffer rather than line buffers, the activation shift used to align the
// sub-filters, the loop order, the configuration bus used to load weights
// and BN parameters, and the stream format.  The first PF_LUT PEs can be
// LUT PEs (lut_filter_pe) with the same latency, which trades DSPs for LUTs
// as the paper allows for every stage.  W_ON_WIDE (filter on the
// 27-bit port) applies without operand separation only.
//
// Configuration port (write only, one word per cycle): cfg_sel = CFG_WEIGHT
// writes weight w[oc][ic][ky][kx] at address ((oc*CIN+ic)*3+ky)*3+kx (two's
// complement in the low WB bits of cfg_data); CFG_BN_MUL / CFG_BN_ADD write
// the scale / bias of output channel cfg_addr.
module conv3x3_stage
  import mixq_pkg::*;
#(
  parameter int unsigned H        = 8,
  parameter int unsigned W        = 8,
  parameter int unsigned CIN      = 8,
  parameter int unsigned COUT     = 8,
  parameter int unsigned AB       = 2,    // input activation width
  parameter int unsigned WB       = 3,    // weight width
  parameter int unsigned OB       = 3,    // output activation width
  parameter int unsigned KP       = 3,    // filter taps per DSP (1..3)
  parameter int unsigned NP       = 3,    // activations per DSP
  parameter int unsigned GB       = 2,    // guard bits (high half if OPSEP)
  parameter int unsigned GB_L     = 0,    // guard bits of the low half (OPSEP)
  parameter bit          OVERPACK = 1'b1,
  parameter bit          OPSEP    = 1'b0,
  parameter bit          SEP_ACT  = 1'b0, // OPSEP splits the activation
  parameter bit          W_ON_WIDE = 1'b1, // filter on the 27-bit port
  parameter int unsigned PF       = 2,    // parallel factor (PEs)
  parameter int unsigned PF_LUT   = 0,    // of which LUT PEs (OPSEP = 0 only)
  parameter int unsigned ACC_N    = 1,    // beats accumulated inside the DSP
  parameter int unsigned ACCW     = 24,   // coefficient accumulator width
  parameter int unsigned SHIFT    = 8,    // BN output shift
  localparam int unsigned NSUB    = (3 + KP - 1) / KP,
  localparam int unsigned NC      = (KP > 1) ? KP - 1 : 1,
  localparam int unsigned NF      = KP + NP - 1,
  localparam int unsigned NCH     = (W + 2 + NP - 1) / NP,
  localparam int unsigned NOCG    = COUT / PF,
  localparam int unsigned NIN     = CIN * 3 * NSUB
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input pixel stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CIN*AB-1:0]     in_data,
  // output pixel stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [COUT*OB-1:0]    out_data,
  // configuration
  input  logic                  cfg_we,
  input  cfg_sel_e              cfg_sel,
  input  logic [15:0]           cfg_addr,
  input  logic [31:0]           cfg_data
);
  if (COUT % PF != 0) begin : g_chk_pf
    $error("conv3x3_stage: COUT must be a multiple of PF");
  end
  if (PF_LUT > PF || (OPSEP && PF_LUT != 0)) begin : g_chk_lut
    $error("conv3x3_stage: PF_LUT must be <= PF, and 0 with OPSEP");
  end
  if (KP < 1 || KP > 3) begin : g_chk_kp
    $error("conv3x3_stage: KP must be 1, 2 or 3");
  end

  localparam int unsigned CW = 16;

  // ---------------------------------------------------------------- storage
  logic [CIN*AB-1:0]     fm     [H*W];        // frame buffer
  logic [WB-1:0]         wmem   [COUT*CIN*9]; // weights
  logic signed [15:0]    bn_mul [COUT];
  logic signed [31:0]    bn_add [COUT];
  logic [OB-1:0]         orow   [W][COUT];    // output row buffer

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_sel)
        CFG_WEIGHT: wmem[cfg_addr]               <= cfg_data[WB-1:0];
        CFG_BN_MUL: bn_mul[cfg_addr[CW-1:0]]     <= cfg_data[15:0];
        CFG_BN_ADD: bn_add[cfg_addr[CW-1:0]]     <= cfg_data;
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------ controller
  typedef enum logic [1:0] {S_LOAD, S_RUN, S_DRAIN, S_OUT} state_e;
  state_e state;

  logic [CW-1:0] pix_cnt, oy, ocg, ch, beat, drain_cnt, ox;

  wire issue      = (state == S_RUN);
  wire beat_last  = (beat == CW'(NIN - 1));
  wire ch_last    = (ch == CW'(NCH - 1));
  wire ocg_last   = (ocg == CW'(NOCG - 1));
  wire grp_first  = (beat % CW'(ACC_N)) == '0;
  wire grp_last   = ((beat % CW'(ACC_N)) == CW'(ACC_N - 1)) || beat_last;

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);

  always_comb
    for (int c = 0; c < COUT; c++)
      out_data[c*OB +: OB] = orow[ox][c];

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) fm[pix_cnt] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      pix_cnt <= '0; oy <= '0; ocg <= '0; ch <= '0; beat <= '0;
      drain_cnt <= '0; ox <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (pix_cnt == CW'(H*W - 1)) begin
            pix_cnt <= '0;
            oy      <= '0;
            state   <= S_RUN;
          end else begin
            pix_cnt <= pix_cnt + 1'b1;
          end
        end
        S_RUN: begin
          if (!beat_last) beat <= beat + 1'b1;
          else begin
            beat <= '0;
            if (!ch_last) ch <= ch + 1'b1;
            else begin
              ch <= '0;
              if (!ocg_last) ocg <= ocg + 1'b1;
              else begin
                ocg       <= '0;
                drain_cnt <= '0;
                state     <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == CW'(PE_LAT)) begin
            ox    <= '0;
            state <= S_OUT;
          end
        end
        S_OUT: if (out_ready) begin
          if (ox == CW'(W - 1)) begin
            ox <= '0;
            if (oy == CW'(H - 1)) state <= S_LOAD;
            else begin
              oy    <= oy + 1'b1;
              state <= S_RUN;
            end
          end else begin
            ox <= ox + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // ------------------------------------------------- operand fetch (issue)
  logic [CW-1:0] ic, ky, sub;
  assign ic  = beat / CW'(3 * NSUB);
  assign ky  = (beat / CW'(NSUB)) % 3;
  assign sub = beat % CW'(NSUB);

  logic [AB-1:0] s_in [NP];
  logic [WB-1:0] f_in [PF][KP];

  always_comb begin
    int row, col;
    row = int'(oy) + int'(ky) - 1;
    for (int j = 0; j < NP; j++) begin
      col = int'(ch) * NP + j - 1 - int'(sub) * KP;
      if (row >= 0 && row < H && col >= 0 && col < W)
        s_in[j] = fm[row*W + col][ic*AB +: AB];
      else
        s_in[j] = '0;
    end
    for (int p = 0; p < PF; p++)
      for (int i = 0; i < KP; i++) begin
        // reversed filter: global tap t holds w[..][ky][2-t]
        int t;
        t = int'(sub) * KP + i;
        if (t < 3)
          f_in[p][i] = wmem[((((int'(ocg) * PF + p) * CIN + int'(ic)) * 3
                             + int'(ky)) * 3) + (2 - t)];
        else
          f_in[p][i] = '0;
      end
  end

  // ------------------------------------------------------- PE array
  logic                   pe_valid [PF];
  logic signed [ACCW-1:0] coef [PF][NF];

  for (genvar p = 0; p < PF; p++) begin : g_pe
    if (OPSEP) begin : g_sep
      localparam int unsigned SFW = SEP_ACT ? opsep_fw(WB, AB, GB, GB_L)
                                            : opsep_fw(AB, WB, GB, GB_L);
      logic signed [SFW-1:0] c [NF];
      opsep_filter_pe #(.AB(AB), .WB(WB), .KP(KP), .NP(NP), .GB_H(GB),
                        .GB_L(GB_L), .OVERPACK(OVERPACK),
                        .SEP_ACT(SEP_ACT)) u_pe (
        .clk, .rst_n, .in_valid(issue), .first(grp_first), .last(grp_last),
        .f(f_in[p]), .s(s_in), .out_valid(pe_valid[p]), .coef(c)
      );
      always_comb for (int k = 0; k < NF; k++) coef[p][k] = ACCW'(c[k]);
    end else if (p < PF_LUT) begin : g_lut
      logic signed [AB+WB+GB:0] c [NF];
      lut_filter_pe #(.AB(AB), .WB(WB), .KP(KP), .NP(NP), .GB(GB)) u_pe (
        .clk, .rst_n, .in_valid(issue), .first(grp_first), .last(grp_last),
        .f(f_in[p]), .s(s_in), .out_valid(pe_valid[p]), .coef(c)
      );
      always_comb for (int k = 0; k < NF; k++) coef[p][k] = ACCW'(c[k]);
    end else begin : g_pack
      logic signed [AB+WB+GB:0] c [NF];
      filter_pack_pe #(.AB(AB), .WB(WB), .KP(KP), .NP(NP), .GB(GB),
                       .OVERPACK(OVERPACK), .W_ON_WIDE(W_ON_WIDE)) u_pe (
        .clk, .rst_n, .in_valid(issue), .first(grp_first), .last(grp_last),
        .f(f_in[p]), .s(s_in), .out_valid(pe_valid[p]), .coef(c)
      );
      always_comb for (int k = 0; k < NF; k++) coef[p][k] = ACCW'(c[k]);
    end
  end

  // Tags travel alongside the PE pipeline so that each decoded result knows
  // which chunk and output-channel group it belongs to.
  typedef struct packed {
    logic          grp_first_of_chunk;   // first DSP group of the chunk
    logic          chunk_end;            // last DSP group of the chunk
    logic [CW-1:0] ch;
    logic [CW-1:0] ocg;
  } tag_t;

  tag_t tag_sr [PE_LAT];
  tag_t tag_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < PE_LAT; t++) tag_sr[t] <= '0;
    end else begin
      tag_sr[0] <= '{grp_first_of_chunk: (beat < CW'(ACC_N)),
                     chunk_end: beat_last, ch: ch, ocg: ocg};
      for (int t = 1; t < PE_LAT; t++) tag_sr[t] <= tag_sr[t-1];
    end
  end
  assign tag_out = tag_sr[PE_LAT-1];

  // --------------------------------- coefficient accumulation / overlap-add
  logic signed [ACCW-1:0] cacc  [PF][NF];     // sums over DSP groups
  logic signed [ACCW-1:0] carry [PF][NC];     // overlap from previous chunk
  logic signed [ACCW-1:0] full  [PF][NF];
  logic [OB-1:0]          q     [PF][NP];

  always_comb
    for (int p = 0; p < PF; p++)
      for (int k = 0; k < NF; k++)
        full[p][k] = (tag_out.grp_first_of_chunk ? '0 : cacc[p][k]) + coef[p][k]
                   + ((k < KP - 1 && tag_out.ch != '0) ? carry[p][k % NC] : '0);

  for (genvar p = 0; p < PF; p++) begin : g_bn
    for (genvar i = 0; i < NP; i++) begin : g_px
      bn_relu_quant #(.IW(ACCW), .SW(16), .BW(32), .SHIFT(SHIFT), .OB(OB)) u_bn (
        .acc(full[p][i]),
        .scale(bn_mul[int'(tag_out.ocg) * PF + p]),
        .bias(bn_add[int'(tag_out.ocg) * PF + p]),
        .y(q[p][i])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (pe_valid[0]) begin
      for (int p = 0; p < PF; p++) begin
        if (!tag_out.chunk_end) begin
          for (int k = 0; k < NF; k++)
            cacc[p][k] <= (tag_out.grp_first_of_chunk ? '0 : cacc[p][k]) + coef[p][k];
        end else begin
          for (int i = 0; i < KP - 1; i++) carry[p][i] <= full[p][NP + i];
          for (int i = 0; i < NP; i++) begin
            int x;
            x = int'(tag_out.ch) * NP + i - 2;
            if (x >= 0 && x < W)
              orow[x][int'(tag_out.ocg) * PF + p] <= q[p][i];
          end
        end
      end
    end
  end
endmodule
