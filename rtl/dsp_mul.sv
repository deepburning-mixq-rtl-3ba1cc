// dsp_mul -- primitive DSP multiply-accumulate (DSP48E2-style).
//
// Computes P = A * B, or P = P + A * B when `accum` is set, where A is a
// signed AW-bit operand (the 27-bit "wide" port) and B a signed BW-bit
// operand (the 18-bit "narrow" port).  This is the primitive onto which all
// low-precision multiplications are packed.  The paper only names the
// primitive (a 27 x 18 two's complement multiplier); the three-register
// pipeline (input registers, multiplier register, P register) and the 48-bit
// P width follow the usual fully pipelined use of a DSP48E2 and are this
// design's choice.
//
// Interface: in_valid qualifies a, b and accum.  p_valid is high for one
// cycle, three cycles after the matching in_valid, when P holds the updated
// value.  An input beat without in_valid leaves P unchanged.
module dsp_mul #(
  parameter int unsigned AW = 27,
  parameter int unsigned BW = 18,
  parameter int unsigned PW = 48
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 accum,
  input  logic signed [AW-1:0] a,
  input  logic signed [BW-1:0] b,
  output logic signed [PW-1:0] p,
  output logic                 p_valid
);
  logic signed [AW-1:0]    a_r;
  logic signed [BW-1:0]    b_r;
  logic                    v1, v2, acc1, acc2;
  logic signed [AW+BW-1:0] m_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_r <= '0; b_r <= '0; m_r <= '0; p <= '0;
      v1 <= 1'b0; v2 <= 1'b0; acc1 <= 1'b0; acc2 <= 1'b0; p_valid <= 1'b0;
    end else begin
      // stage 1: input registers
      v1   <= in_valid;
      acc1 <= accum;
      if (in_valid) begin
        a_r <= a;
        b_r <= b;
      end
      // stage 2: multiplier register
      v2   <= v1;
      acc2 <= acc1;
      if (v1) m_r <= a_r * b_r;
      // stage 3: accumulator
      p_valid <= v2;
      if (v2) p <= (acc2 ? p : '0) + PW'(m_r);
    end
  end
endmodule
