// stream_fifo -- ready/valid FIFO placed between two pipeline stages.
//
// Layer stages of the accelerator run concurrently and exchange feature-map
// pixels through FIFOs, which absorb the difference in their momentary
// rates.  The paper only states that stages are connected through FIFOs; the
// circular-buffer form, the handshake and the depth are this design's.
//
// Interface: a beat moves on a port when its valid and ready are both high.
// in_ready is low only when DEPTH entries are held; out_valid is high when at
// least one is held, and out_data is the oldest entry (first-word
// fall-through).  Latency from in to out is one cycle.
module stream_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid & in_ready;
  assign pop       = out_valid & out_ready;

  always_ff @(posedge clk) if (push) mem[wr_ptr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; count <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // Handshake rules: data offered must stay until taken.
  property p_hold_in;
    @(posedge clk) disable iff (!rst_n)
      in_valid && !in_ready |=> in_valid && $stable(in_data);
  endproperty
  a_hold_in: assert property (p_hold_in);
endmodule
