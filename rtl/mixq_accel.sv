// mixq_accel -- fully pipelined mixed-precision CNN accelerator.
//
// Every layer of the network is a pipeline stage with its own bit widths,
// packing scheme and parallel factor; stages run concurrently and pass
// feature-map pixels to each other through FIFOs.  This instance is a
// three-layer example in the style of a small CIFAR-10 network:
//
//   pixel stream (C0 x 8 bit) -> S0: 3x3 conv, W5/A8, operand separation
//     -> FIFO -> S1: 3x3 conv, W3/A2, filter packing with 1-bit overpacking,
//                    one DSP PE + one LUT PE
//     -> FIFO -> S2: 1x1 conv, W2/A3, kernel packing, one DSP PE + one LUT PE
//     -> pixel stream (C3 x OB3 bit)
//
// Each stage ends in batch normalisation, ReLU and requantisation to the
// next stage's activation width.  The per-layer widths, packing choices and
// parallel factors are what the paper's design flow (bit-width search,
// packing optimizer, resource allocation) would choose per network; here they
// are parameters with example values chosen by this design, so that every
// packing mechanism of the paper appears once.  The paper's host side (frames
// moved from DDR by DMA) is outside this module: the input and output are
// plain ready/valid pixel streams.
//
// Configuration: before a frame is sent, weights and BN parameters are
// written through the cfg port; cfg_stage selects the stage (0..2) and
// cfg_sel/cfg_addr/cfg_data are as described in conv3x3_stage and
// pw_conv_stage (cfg_sel: 0 weight, 1 BN scale, 2 BN bias).
//
// Timing: a pixel is accepted when in_valid and in_ready are high; S0 takes
// a whole frame before it starts, so in_ready drops after H*W pixels until
// S0 has emitted its last row.  Output pixels appear in raster order.
module mixq_accel
  import mixq_pkg::*;
#(
  parameter int unsigned H     = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned C0    = 3,
  parameter int unsigned C1    = 8,
  parameter int unsigned C2    = 8,
  parameter int unsigned C3    = 8,
  parameter int unsigned FIFO_DEPTH = 64,
  localparam int unsigned A0   = 8,   // input image
  localparam int unsigned A1   = 2,   // S0 output / S1 input
  localparam int unsigned A2   = 3,   // S1 output / S2 input
  localparam int unsigned OB3  = 8    // S2 output
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [C0*A0-1:0]  in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [C3*OB3-1:0] out_data,
  input  logic              cfg_we,
  input  logic [1:0]        cfg_stage,
  input  logic [1:0]        cfg_sel,
  input  logic [15:0]       cfg_addr,
  input  logic [31:0]       cfg_data
);
  cfg_sel_e sel;
  assign sel = cfg_sel_e'(cfg_sel);

  // S0 -> FIFO0 -> S1 -> FIFO1 -> S2
  logic              s0_v, s0_r, f0_v, f0_r, s1_v, s1_r, f1_v, f1_r;
  logic [C1*A1-1:0]  s0_d, f0_d;
  logic [C2*A2-1:0]  s1_d, f1_d;

  conv3x3_stage #(
    .H(H), .W(W), .CIN(C0), .COUT(C1), .AB(A0), .WB(5), .OB(A1),
    .NP(1), .GB(0), .GB_L(0), .OVERPACK(1'b0), .OPSEP(1'b1),
    .PF(2), .ACC_N(1), .SHIFT(12)
  ) u_s0 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(s0_v), .out_ready(s0_r), .out_data(s0_d),
    .cfg_we(cfg_we && cfg_stage == 2'd0), .cfg_sel(sel), .cfg_addr, .cfg_data
  );

  stream_fifo #(.W(C1*A1), .DEPTH(FIFO_DEPTH)) u_f0 (
    .clk, .rst_n,
    .in_valid(s0_v), .in_ready(s0_r), .in_data(s0_d),
    .out_valid(f0_v), .out_ready(f0_r), .out_data(f0_d)
  );

  conv3x3_stage #(
    .H(H), .W(W), .CIN(C1), .COUT(C2), .AB(A1), .WB(3), .OB(A2),
    .NP(3), .GB(3), .OVERPACK(1'b1), .OPSEP(1'b0),
    .PF(2), .PF_LUT(1), .ACC_N(2), .SHIFT(6)
  ) u_s1 (
    .clk, .rst_n,
    .in_valid(f0_v), .in_ready(f0_r), .in_data(f0_d),
    .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d),
    .cfg_we(cfg_we && cfg_stage == 2'd1), .cfg_sel(sel), .cfg_addr, .cfg_data
  );

  stream_fifo #(.W(C2*A2), .DEPTH(FIFO_DEPTH)) u_f1 (
    .clk, .rst_n,
    .in_valid(s1_v), .in_ready(s1_r), .in_data(s1_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d)
  );

  pw_conv_stage #(
    .CIN(C2), .COUT(C3), .AB(A2), .WB(2), .OB(OB3),
    .ND(2), .NE(2), .GB(2), .OVERPACK(1'b0),
    .PF(2), .PF_LUT(1), .ACC_N(4), .SHIFT(4)
  ) u_s2 (
    .clk, .rst_n,
    .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d),
    .out_valid, .out_ready, .out_data,
    .cfg_we(cfg_we && cfg_stage == 2'd2), .cfg_sel(sel), .cfg_addr, .cfg_data
  );
endmodule
