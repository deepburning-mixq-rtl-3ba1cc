// tb_pack_decoder -- self-checking test of segment decoding and of the 1-bit
// overpacking correction.  Three decoders are tested: signed segments with a
// full pitch, signed segments overlapping by one bit, and unsigned segments
// overlapping by one bit.  Random segment values in the range each mode
// allows are packed as sum v[k] * 2^(k*PB) in the testbench, the LSB of each
// segment is supplied as its parity, and every decoded segment is compared
// with the value that was packed.
module tb_pack_decoder;
  localparam int NF = 4;
  localparam int PB = 8;

  logic signed [47:0] p0, p1, p2;
  logic [NF-1:0]      par0, par1, par2;
  logic signed [PB:0]   seg0 [NF];
  logic signed [PB+1:0] seg1 [NF];
  logic signed [PB+1:0] seg2 [NF];

  pack_decoder #(.NF(NF), .PB(PB), .SIGNED(1), .OVERPACK(0)) d0 (.p(p0), .par(par0), .seg(seg0));
  pack_decoder #(.NF(NF), .PB(PB), .SIGNED(1), .OVERPACK(1)) d1 (.p(p1), .par(par1), .seg(seg1));
  pack_decoder #(.NF(NF), .PB(PB), .SIGNED(0), .OVERPACK(1)) d2 (.p(p2), .par(par2), .seg(seg2));

  int checks = 0, failures = 0;
  longint v0 [NF], v1 [NF], v2 [NF];

  function automatic longint rnd_s(int bits);   // signed value of `bits` bits
    return longint'($urandom_range(0, (1 << bits) - 1)) - (longint'(1) << (bits - 1));
  endfunction

  initial begin
    for (int n = 0; n < 2000; n++) begin
      longint s0, s1, s2;
      s0 = 0; s1 = 0; s2 = 0; par0 = '0; par1 = '0; par2 = '0;
      for (int k = 0; k < NF; k++) begin
        v0[k] = rnd_s(PB);                                     // fits PB bits
        v1[k] = rnd_s(PB + 1);                                 // overlaps 1 bit
        v2[k] = longint'($urandom_range(0, (1 << (PB+1)) - 1)); // unsigned PB+1
        s0 += v0[k] <<< (k * PB);
        s1 += v1[k] <<< (k * PB);
        s2 += v2[k] <<< (k * PB);
        par0[k] = v0[k][0]; par1[k] = v1[k][0]; par2[k] = v2[k][0];
      end
      p0 = 48'(s0); p1 = 48'(s1); p2 = 48'(s2);
      #1;
      for (int k = 0; k < NF; k++) begin
        checks += 3;
        if (longint'(seg0[k]) != v0[k]) begin
          failures++; $display("FAIL d0 seg%0d=%0d exp %0d", k, seg0[k], v0[k]);
        end
        if (longint'(seg1[k]) != v1[k]) begin
          failures++; $display("FAIL d1 seg%0d=%0d exp %0d", k, seg1[k], v1[k]);
        end
        if (longint'(seg2[k]) != v2[k]) begin
          failures++; $display("FAIL d2 seg%0d=%0d exp %0d", k, seg2[k], v2[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
