// tb_conv_harness -- drives one conv3x3_stage with FRAMES random frames
// (random weights, BN parameters and activations, random input gaps and
// output back-pressure) and compares every output pixel with a reference
// 3x3 "same" convolution + BN + ReLU + requantisation computed here.  It
// also checks the first-row latency: from the edge that accepts the last
// input pixel to the edge that delivers the first output pixel must take
// COUT/PF * ceil((W+2)/NP) * 3*CIN*ceil(3/KP) + PE_LAT + 2 cycles.
module tb_conv_harness #(
  parameter int H = 5, parameter int W = 6, parameter int CIN = 3,
  parameter int COUT = 4, parameter int AB = 2, parameter int WB = 3,
  parameter int OB = 3, parameter int KP = 3, parameter int NP = 3,
  parameter int GB = 3, parameter bit W_ON_WIDE = 1,
  parameter int GB_L = 0, parameter bit OVERPACK = 1, parameter bit OPSEP = 0,
  parameter bit SEP_ACT = 0, parameter int PF_LUT = 0,
  parameter int PF = 2, parameter int ACC_N = 2, parameter int SHIFT = 6,
  parameter int FRAMES = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  import mixq_pkg::*;

  localparam int NCH = (W + 2 + NP - 1) / NP;
  localparam int RUN_CYC = (COUT / PF) * NCH * 3 * CIN * ((3 + KP - 1) / KP);

  logic               in_valid, in_ready, out_valid, out_ready;
  logic [CIN*AB-1:0]  in_data;
  logic [COUT*OB-1:0] out_data;
  logic               cfg_we;
  cfg_sel_e           cfg_sel;
  logic [15:0]        cfg_addr;
  logic [31:0]        cfg_data;

  conv3x3_stage #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .AB(AB), .WB(WB),
                  .OB(OB), .KP(KP), .NP(NP), .GB(GB), .W_ON_WIDE(W_ON_WIDE), .GB_L(GB_L), .OVERPACK(OVERPACK),
                  .OPSEP(OPSEP), .SEP_ACT(SEP_ACT), .PF(PF), .PF_LUT(PF_LUT), .ACC_N(ACC_N), .SHIFT(SHIFT)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready,
    .out_data, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data);

  int wt [COUT][CIN][3][3];
  int bm [COUT], bb [COUT];
  int img [H][W][CIN];
  int expv [H][W][COUT];
  int cyc = 0, last_in_cyc, first_out_cyc, n_out;
  always @(posedge clk) cyc++;

  function automatic int rnd_w();
    return int'($urandom_range(0, (1 << WB) - 1)) - (1 << (WB - 1));
  endfunction

  task automatic cfg_write(cfg_sel_e s, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_addr = 16'(a); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic compute_ref();
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int o = 0; o < COUT; o++) begin
          longint acc, t;
          acc = 0;
          for (int c = 0; c < CIN; c++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int yy, xx;
                yy = y + ky - 1; xx = x + kx - 1;
                if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                  acc += wt[o][c][ky][kx] * img[yy][xx][c];
              end
          t = (acc * bm[o] + bb[o]) >>> SHIFT;
          expv[y][x][o] = (t < 0) ? 0 : (t > (1 << OB) - 1) ? (1 << OB) - 1 : int'(t);
        end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    in_valid = 0; in_data = '0; out_ready = 0;
    cfg_we = 0; cfg_sel = CFG_WEIGHT; cfg_addr = '0; cfg_data = '0;
    wait (rst_n);
    for (int fr = 0; fr < FRAMES; fr++) begin
      for (int o = 0; o < COUT; o++)
        for (int c = 0; c < CIN; c++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              wt[o][c][ky][kx] = rnd_w();
              if (fr == 0 && o == 0 && c == 0) wt[o][c][ky][kx] = -(1 << (WB - 1));
              cfg_write(CFG_WEIGHT, ((o*CIN + c)*3 + ky)*3 + kx, wt[o][c][ky][kx]);
            end
      for (int o = 0; o < COUT; o++) begin
        bm[o] = $urandom_range(1, 40);
        bb[o] = int'($urandom_range(0, 200)) - 50;
        cfg_write(CFG_BN_MUL, o, bm[o]);
        cfg_write(CFG_BN_ADD, o, bb[o]);
      end
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < CIN; c++)
            img[y][x][c] = (fr == 0 && y == 0) ? (1 << AB) - 1
                                              : $urandom_range(0, (1 << AB) - 1);
      compute_ref();
      n_out = 0;
      fork
        begin : feed
          for (int y = 0; y < H; y++)
            for (int x = 0; x < W; x++) begin
              @(negedge clk);
              while ($urandom_range(0, 3) == 0) begin
                in_valid = 0;
                @(negedge clk);
              end
              in_valid = 1;
              for (int c = 0; c < CIN; c++) in_data[c*AB +: AB] = AB'(img[y][x][c]);
              @(posedge clk);
              while (!in_ready) @(posedge clk);
              last_in_cyc = cyc;
            end
          @(negedge clk) in_valid = 0;
        end
        begin : drain
          while (n_out < H*W) begin
            @(negedge clk);
            // the first frame's first row sees a ready consumer (latency check)
            out_ready = (fr == 0 && n_out < W) ? 1'b1 : ($urandom_range(0, 2) != 0);
            @(posedge clk);
            if (out_valid && out_ready) begin
              int y, x;
              y = n_out / W; x = n_out % W;
              if (n_out == 0) first_out_cyc = cyc;
              for (int o = 0; o < COUT; o++) begin
                checks++;
                if (int'(out_data[o*OB +: OB]) != expv[y][x][o]) begin
                  failures++;
                  $display("FAIL: frame %0d y%0d x%0d oc%0d = %0d expected %0d",
                           fr, y, x, o, out_data[o*OB +: OB], expv[y][x][o]);
                end
              end
              n_out++;
            end
          end
          @(negedge clk) out_ready = 0;
        end
      join
      if (fr == 0) begin
        checks++;
        if (first_out_cyc - last_in_cyc != RUN_CYC + PE_LAT + 2) begin
          failures++;
          $display("FAIL: first-row latency %0d, expected %0d",
                   first_out_cyc - last_in_cyc, RUN_CYC + PE_LAT + 2);
        end
      end
    end
    done = 1;
  end
endmodule
