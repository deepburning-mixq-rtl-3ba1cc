// tb_mixq_accel -- end-to-end test of the three-stage accelerator at its
// default size (32 x 32 x 3 input frames).
//
// Loads random weights and BN parameters into all three stages, streams
// FRAMES random frames in, and compares every output pixel with a reference
// model of the whole network (3x3 conv -> BN/ReLU/quant -> 3x3 conv ->
// BN/ReLU/quant -> 1x1 conv -> BN/ReLU/quant) computed here.  The output
// side applies random back-pressure.  It checks the first stage's frame
// period (H*W load cycles plus, per row, COUT/PF*(W+2)*3*CIN issue cycles,
// PE_LAT+1 drain cycles and W output cycles) and counts how often each
// mechanism of the design occurred; a mechanism that never occurred is a
// failure: operand-separated DSP pairs, DSP accumulation inside the guard
// bits, 1-bit overpacking corrections, overlap-add of chunk coefficients,
// LUT-PE results in the 3x3 and the 1x1 stage, kernel-packed DSP results, a full inter-stage FIFO
// stalling its producer, input stall and output back-pressure.
module tb_mixq_accel;
  import mixq_pkg::*;

  localparam int H = 32, W = 32, C0 = 3, C1 = 8, C2 = 8, C3 = 8;
  localparam int FRAMES = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              in_valid, in_ready, out_valid, out_ready;
  logic [C0*8-1:0]   in_data;
  logic [C3*8-1:0]   out_data;
  logic              cfg_we;
  logic [1:0]        cfg_stage, cfg_sel;
  logic [15:0]       cfg_addr;
  logic [31:0]       cfg_data;

  mixq_accel dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid,
                  .out_ready, .out_data, .cfg_we, .cfg_stage, .cfg_sel,
                  .cfg_addr, .cfg_data);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // network parameters
  int w0 [C1][C0][3][3], w1 [C2][C1][3][3], w2 [C3][C2];
  int m0 [C1], b0 [C1], m1 [C2], b1 [C2], m2 [C3], b2 [C3];
  int img [FRAMES][H][W][C0];
  int a1 [H][W][C1], a2 [H][W][C2];
  int expv [FRAMES][H][W][C3];

  function automatic int q(longint acc, int m, int b, int sh, int ob);
    longint t;
    t = (acc * m + b) >>> sh;
    return (t < 0) ? 0 : (t > (1 << ob) - 1) ? (1 << ob) - 1 : int'(t);
  endfunction

  function automatic int rs(int bits);
    return int'($urandom_range(0, (1 << bits) - 1)) - (1 << (bits - 1));
  endfunction

  task automatic cfg_write(int st, int sel, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_stage = 2'(st); cfg_sel = 2'(sel);
    cfg_addr = 16'(a); cfg_data = 32'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic reference(int fr);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int o = 0; o < C1; o++) begin
          longint acc = 0;
          for (int c = 0; c < C0; c++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                if (y+ky-1 >= 0 && y+ky-1 < H && x+kx-1 >= 0 && x+kx-1 < W)
                  acc += w0[o][c][ky][kx] * img[fr][y+ky-1][x+kx-1][c];
          a1[y][x][o] = q(acc, m0[o], b0[o], 12, 2);
        end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int o = 0; o < C2; o++) begin
          longint acc = 0;
          for (int c = 0; c < C1; c++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                if (y+ky-1 >= 0 && y+ky-1 < H && x+kx-1 >= 0 && x+kx-1 < W)
                  acc += w1[o][c][ky][kx] * a1[y+ky-1][x+kx-1][c];
          a2[y][x][o] = q(acc, m1[o], b1[o], 6, 3);
        end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int o = 0; o < C3; o++) begin
          longint acc = 0;
          for (int c = 0; c < C2; c++) acc += w2[o][c] * a2[y][x][c];
          expv[fr][y][x][o] = q(acc, m2[o], b2[o], 4, 8);
        end
  endtask

  // ------------------------------------------------ mechanism counters
  int ev_opsep, ev_dsp_acc, ev_overpack, ev_overlap, ev_lut, ev_kpack;
  int ev_fifo_full, ev_in_stall, ev_out_bp, n_mid, ev_lutf;
  initial begin
    ev_opsep = 0; ev_dsp_acc = 0; ev_overpack = 0; ev_overlap = 0; ev_lut = 0;
    ev_kpack = 0; ev_fifo_full = 0; ev_in_stall = 0; ev_out_bp = 0; n_mid = 0; ev_lutf = 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.u_s0.g_pe[0].g_sep.u_pe.out_valid) ev_opsep++;
    if (dut.u_s1.issue && !dut.u_s1.grp_first) ev_dsp_acc++;
    if (dut.u_s1.g_pe[0].g_lut.u_pe.out_valid) ev_lutf++;
    if (dut.u_s1.g_pe[1].g_pack.u_pe.last_q &&
        dut.u_s1.g_pe[1].g_pack.u_pe.par_acc[dut.u_s1.NF-1:1] != '0) ev_overpack++;
    if (dut.u_s1.pe_valid[0] && dut.u_s1.tag_out.chunk_end &&
        dut.u_s1.tag_out.ch != '0) ev_overlap++;
    if (dut.u_s2.g_pe[0].g_lut.u_pe.out_valid) ev_lut++;
    if (dut.u_s2.g_pe[1].g_dsp.u_pe.out_valid) ev_kpack++;
    if (dut.u_f0.in_valid && !dut.u_f0.in_ready) ev_fifo_full++;
    if (in_valid && !in_ready) ev_in_stall++;
    if (out_valid && !out_ready) ev_out_bp++;
  end

  int first_acc_cyc [FRAMES];
  int n_out;

  initial begin
    in_valid = 0; in_data = '0; out_ready = 0;
    cfg_we = 0; cfg_stage = '0; cfg_sel = '0; cfg_addr = '0; cfg_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights and BN parameters (scales/biases keep every layer's outputs
    // spread over its activation range)
    foreach (w0[o, c, ky, kx]) begin
      w0[o][c][ky][kx] = rs(5);
      cfg_write(0, CFG_WEIGHT, ((o*C0 + c)*3 + ky)*3 + kx, w0[o][c][ky][kx]);
    end
    foreach (w1[o, c, ky, kx]) begin
      w1[o][c][ky][kx] = rs(3);
      cfg_write(1, CFG_WEIGHT, ((o*C1 + c)*3 + ky)*3 + kx, w1[o][c][ky][kx]);
    end
    foreach (w2[o, c]) begin
      w2[o][c] = rs(2);
      cfg_write(2, CFG_WEIGHT, o*C2 + c, w2[o][c]);
    end
    for (int o = 0; o < C1; o++) begin
      m0[o] = $urandom_range(1, 3); b0[o] = int'($urandom_range(0, 8000)) - 2000;
      cfg_write(0, CFG_BN_MUL, o, m0[o]); cfg_write(0, CFG_BN_ADD, o, b0[o]);
    end
    for (int o = 0; o < C2; o++) begin
      m1[o] = $urandom_range(4, 12); b1[o] = int'($urandom_range(0, 400)) - 50;
      cfg_write(1, CFG_BN_MUL, o, m1[o]); cfg_write(1, CFG_BN_ADD, o, b1[o]);
    end
    for (int o = 0; o < C3; o++) begin
      m2[o] = $urandom_range(2, 16); b2[o] = int'($urandom_range(0, 1500)) - 200;
      cfg_write(2, CFG_BN_MUL, o, m2[o]); cfg_write(2, CFG_BN_ADD, o, b2[o]);
    end
    for (int fr = 0; fr < FRAMES; fr++) begin
      foreach (img[fr][y, x, c]) img[fr][y][x][c] = $urandom_range(0, 255);
      reference(fr);
    end
    n_out = 0;
    fork
      begin : feed     // back-to-back input, no gaps
        for (int fr = 0; fr < FRAMES; fr++)
          for (int y = 0; y < H; y++)
            for (int x = 0; x < W; x++) begin
              @(negedge clk);
              in_valid = 1;
              for (int c = 0; c < C0; c++) in_data[c*8 +: 8] = 8'(img[fr][y][x][c]);
              @(posedge clk);
              while (!in_ready) @(posedge clk);
              if (y == 0 && x == 0) first_acc_cyc[fr] = cyc;
            end
        @(negedge clk) in_valid = 0;
      end
      begin : drain
        while (n_out < FRAMES*H*W) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            int fr, y, x;
            fr = n_out / (H*W); y = (n_out / W) % H; x = n_out % W;
            for (int o = 0; o < C3; o++) begin
              checks++;
              if (int'(out_data[o*8 +: 8]) != expv[fr][y][x][o]) begin
                failures++;
                if (failures < 20)
                  $display("FAIL: frame %0d y%0d x%0d oc%0d = %0d expected %0d",
                           fr, y, x, o, out_data[o*8 +: 8], expv[fr][y][x][o]);
              end
              if (expv[fr][y][x][o] != 0 && expv[fr][y][x][o] != 255) n_mid++;
            end
            n_out++;
          end
        end
      end
    join
    // frame period of the first stage (the bottleneck of this configuration)
    begin
      int exp_period;
      exp_period = H*W + H*((C1/2)*(W+2)*3*C0 + PE_LAT + 1 + W);
      checks++;
      if (first_acc_cyc[1] - first_acc_cyc[0] != exp_period) begin
        failures++;
        $display("FAIL: frame period %0d expected %0d",
                 first_acc_cyc[1] - first_acc_cyc[0], exp_period);
      end
      $display("frame period %0d cycles", first_acc_cyc[1] - first_acc_cyc[0]);
    end
    $display("events: opsep=%0d dsp_acc=%0d overpack=%0d overlap=%0d lut=%0d kpack=%0d fifo_full=%0d in_stall=%0d out_bp=%0d mid=%0d",
             ev_opsep, ev_dsp_acc, ev_overpack, ev_overlap, ev_lut, ev_kpack,
             ev_fifo_full, ev_in_stall, ev_out_bp, n_mid);
    $display("events: lut_filter=%0d", ev_lutf);
    checks += 10;
    if (ev_opsep == 0)     begin failures++; $display("FAIL: no operand separation"); end
    if (ev_dsp_acc == 0)   begin failures++; $display("FAIL: no DSP accumulation"); end
    if (ev_overpack == 0)  begin failures++; $display("FAIL: no overpacking correction"); end
    if (ev_overlap == 0)   begin failures++; $display("FAIL: no overlap-add"); end
    if (ev_lut == 0)       begin failures++; $display("FAIL: no LUT PE result"); end
    if (ev_lutf == 0)      begin failures++; $display("FAIL: no LUT filter PE result"); end
    if (ev_kpack == 0)     begin failures++; $display("FAIL: no kernel-packed result"); end
    if (ev_fifo_full == 0) begin failures++; $display("FAIL: FIFO never full"); end
    if (ev_in_stall == 0)  begin failures++; $display("FAIL: input never stalled"); end
    if (ev_out_bp == 0)    begin failures++; $display("FAIL: no output back-pressure"); end
    if (n_mid == 0)        begin failures++; $display("FAIL: outputs all saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
