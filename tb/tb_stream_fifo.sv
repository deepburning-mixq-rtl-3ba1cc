// tb_stream_fifo -- self-checking test of the stage FIFO: random valid on the
// input and random ready on the output; every word must come out once, in
// order; the FIFO must fill up (in_ready low) and run empty at least once.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;

  stream_fifo #(.W(16), .DEPTH(8)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                        .out_valid, .out_ready, .out_data);

  int checks = 0, failures = 0, full_seen = 0;
  logic [15:0] sb[$];
  int sent = 0, rcvd = 0;
  int phase_fast_in;
  logic hold = 0;   // offered word was refused at the last edge: keep it
  always @(posedge clk) hold <= in_valid && !in_ready;

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (rcvd < 2000) begin
      @(negedge clk);
      phase_fast_in = ((sent / 200) % 2 == 0);   // alternate which side is faster
      if (!hold) begin
        in_valid = (sent < 2000) && ($urandom_range(0, 9) < (phase_fast_in ? 9 : 3));
        in_data  = 16'($urandom);
      end
      out_ready = ($urandom_range(0, 9) < (phase_fast_in ? 3 : 9));
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin sb.push_back(in_data); sent++; end
    if (in_valid && !in_ready) full_seen++;
    if (out_valid && out_ready) begin
      checks++; rcvd++;
      if (sb.size() == 0 || out_data != sb[0]) begin
        failures++;
        $display("FAIL: got %h", out_data);
      end
      if (sb.size() != 0) void'(sb.pop_front());
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
