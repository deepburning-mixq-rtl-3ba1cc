// pack_decoder -- splits a packed DSP result into its bit segments.
//
// A packed product (or an accumulation of packed products) has the form
//   P = sum_k v[k] * 2^(k*PB),   k = 0 .. NF-1,
// where every segment v[k] is a sum of low-precision products.  This block
// recovers each v[k].  Segments are taken from the least significant end:
//
//  * Without overpacking (OVERPACK = 0) every segment fits in PB bits.  For
//    signed segments the low segment is the signed value of the PB lowest bits
//    and the remainder is (P >>> PB) + sign(low): a negative low segment has
//    borrowed one from the segment above it, which is added back.
//
//  * With 1-bit overpacking (OVERPACK = 1) segments need PB+1 bits, so the
//    most significant bit of a segment overlaps the least significant bit of
//    the next one.  The LSB of the higher segment is recomputed outside the
//    DSP (input `par`, the XOR of the AND of the operand LSBs of all products
//    in that segment).  The low segment's top bit is the overlapped bit XOR
//    that parity (the recomputed LSB is added to it, modulo 2), and the higher
//    segment is corrected by adding the XOR of the overlapped bit and the
//    parity, i.e. the sign bit that the low segment extended into it.  This
//    is the correction of the paper's 1-bit overpacking figure.  For unsigned
//    segments the same bit is subtracted instead.
//
// The paper states the correction rule in words; the iterative form, the
// segment width FW = PB + OVERPACK + 1 of the outputs and the unsigned case
// are this design's own.  Purely combinational.
module pack_decoder #(
  parameter int unsigned NF       = 4,   // number of segments
  parameter int unsigned PB       = 8,   // segment pitch p_b in bits
  parameter bit          SIGNED   = 1'b1,
  parameter bit          OVERPACK = 1'b0,
  parameter int unsigned PW       = 48,
  localparam int unsigned FW      = PB + OVERPACK + 1
) (
  input  logic signed [PW-1:0] p,
  input  logic        [NF-1:0] par,      // LSB parity of each segment
  output logic signed [FW-1:0] seg [NF]
);
  always_comb begin
    logic signed [PW-1:0] rem;
    logic                 top;
    rem = p;
    for (int k = 0; k < NF - 1; k++) begin
      if (OVERPACK) begin
        top = rem[PB] ^ par[k+1];
        seg[k] = SIGNED ? FW'(signed'({top, rem[PB-1:0]}))
                        : FW'({1'b0, top, rem[PB-1:0]});
      end else begin
        top = SIGNED ? rem[PB-1] : 1'b0;
        seg[k] = SIGNED ? FW'(signed'(rem[PB-1:0])) : FW'({1'b0, rem[PB-1:0]});
      end
      if (SIGNED) rem = (rem >>> PB) + PW'(top);
      else        rem = (rem >>> PB) - PW'(top);
    end
    seg[NF-1] = FW'(rem);
  end
endmodule
