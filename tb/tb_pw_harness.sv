// tb_pw_harness -- drives one pw_conv_stage with NPIX random pixels (random
// weights and BN parameters, random input gaps and output back-pressure) and
// compares every output channel with a reference 1x1 convolution + BN +
// ReLU + requantisation computed here.  It also checks the group latency:
// from the edge that accepts a group's last pixel to the edge that delivers
// its first result, COUT/(PF*NE) * CIN + PE_LAT + 2 cycles.
module tb_pw_harness #(
  parameter int CIN = 8, parameter int COUT = 8, parameter int AB = 3,
  parameter int WB = 2, parameter int OB = 8, parameter int ND = 2,
  parameter int NE = 2, parameter int GB = 2, parameter bit OVERPACK = 0,
  parameter int PF = 2, parameter int PF_LUT = 1, parameter int ACC_N = 4,
  parameter int SHIFT = 4, parameter int NPIX = 24
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  import mixq_pkg::*;

  localparam int RUN_CYC = (COUT / (PF * NE)) * CIN;

  logic               in_valid, in_ready, out_valid, out_ready;
  logic [CIN*AB-1:0]  in_data;
  logic [COUT*OB-1:0] out_data;
  logic               cfg_we;
  cfg_sel_e           cfg_sel;
  logic [15:0]        cfg_addr;
  logic [31:0]        cfg_data;

  pw_conv_stage #(.CIN(CIN), .COUT(COUT), .AB(AB), .WB(WB), .OB(OB), .ND(ND),
                  .NE(NE), .GB(GB), .OVERPACK(OVERPACK), .PF(PF),
                  .PF_LUT(PF_LUT), .ACC_N(ACC_N), .SHIFT(SHIFT)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready,
    .out_data, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data);

  int wt [COUT][CIN];
  int bm [COUT], bb [COUT];
  int pix [NPIX][CIN];
  int expv [NPIX][COUT];
  int cyc = 0, last_in_cyc, first_out_cyc, n_out, n_mid;
  always @(posedge clk) cyc++;

  task automatic cfg_write(cfg_sel_e s, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_addr = 16'(a); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    checks = 0; failures = 0; done = 0; n_mid = 0;
    in_valid = 0; in_data = '0; out_ready = 0;
    cfg_we = 0; cfg_sel = CFG_WEIGHT; cfg_addr = '0; cfg_data = '0;
    wait (rst_n);
    for (int o = 0; o < COUT; o++)
      for (int c = 0; c < CIN; c++) begin
        wt[o][c] = int'($urandom_range(0, (1 << WB) - 1)) - (1 << (WB - 1));
        cfg_write(CFG_WEIGHT, o*CIN + c, wt[o][c]);
      end
    for (int o = 0; o < COUT; o++) begin
      bm[o] = $urandom_range(1, 12);
      bb[o] = int'($urandom_range(0, 1000)) - 100;
      cfg_write(CFG_BN_MUL, o, bm[o]);
      cfg_write(CFG_BN_ADD, o, bb[o]);
    end
    for (int n = 0; n < NPIX; n++)
      for (int c = 0; c < CIN; c++)
        pix[n][c] = (n < ND) ? (1 << AB) - 1 : $urandom_range(0, (1 << AB) - 1);
    for (int n = 0; n < NPIX; n++)
      for (int o = 0; o < COUT; o++) begin
        longint acc, t;
        acc = 0;
        for (int c = 0; c < CIN; c++) acc += wt[o][c] * pix[n][c];
        t = (acc * bm[o] + bb[o]) >>> SHIFT;
        expv[n][o] = (t < 0) ? 0 : (t > (1 << OB) - 1) ? (1 << OB) - 1 : int'(t);
      end
    n_out = 0;
    fork
      begin : feed
        for (int n = 0; n < NPIX; n++) begin
          @(negedge clk);
          while (n >= ND && $urandom_range(0, 3) == 0) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          for (int c = 0; c < CIN; c++) in_data[c*AB +: AB] = AB'(pix[n][c]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          if (n == ND - 1) last_in_cyc = cyc;
        end
        @(negedge clk) in_valid = 0;
      end
      begin : drain
        while (n_out < NPIX) begin
          @(negedge clk);
          out_ready = (n_out < ND) ? 1'b1 : ($urandom_range(0, 2) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            if (n_out == 0) first_out_cyc = cyc;
            for (int o = 0; o < COUT; o++) begin
              checks++;
              if (int'(out_data[o*OB +: OB]) != expv[n_out][o]) begin
                failures++;
                $display("FAIL: pixel %0d oc%0d = %0d expected %0d",
                         n_out, o, out_data[o*OB +: OB], expv[n_out][o]);
              end
              if (expv[n_out][o] != 0 && expv[n_out][o] != (1 << OB) - 1) n_mid++;
            end
            n_out++;
          end
        end
        @(negedge clk) out_ready = 0;
      end
    join
    checks++;
    if (first_out_cyc - last_in_cyc != RUN_CYC + PE_LAT + 2) begin
      failures++;
      $display("FAIL: group latency %0d, expected %0d",
               first_out_cyc - last_in_cyc, RUN_CYC + PE_LAT + 2);
    end
    // the data must exercise the unsaturated range of the output
    checks++;
    if (n_mid == 0) begin
      failures++;
      $display("FAIL: all outputs saturated or zero");
    end
    done = 1;
  end
endmodule
