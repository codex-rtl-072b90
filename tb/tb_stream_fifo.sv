// tb_stream_fifo: self-checking test of the streaming buffer.
// Random valid/ready on both sides; every word read must equal the word
// written in the same order (reference queue). Also checks that in_ready
// drops after DEPTH words with no reads, and counts full/empty stalls.
module tb_stream_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0, full_seen = 0;
  logic [W-1:0] q[$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill with no reads: exactly D words fit, the next one is held off
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = W'(i + 100);
      #1;
      checks++;
      if (!in_ready) begin failures++; $display("in_ready low at fill %0d", i); end
      q.push_back(in_data);
      @(posedge clk);
    end
    @(negedge clk);
    in_data = W'(200);
    #1;
    checks++;
    if (in_ready) begin failures++; $display("in_ready high when full"); end
    // random traffic; a word offered stays offered until taken
    for (int n = 0; n < 4000; n++) begin
      logic fin, fout;
      @(negedge clk);
      if (n > 0 && !in_valid) begin
        in_valid = ($urandom % 3) != 0;
        in_data  = W'($urandom);
      end
      out_ready = ($urandom % 3) != 0;
      #1;
      fin  = in_valid && in_ready;
      fout = out_valid && out_ready;
      if (in_valid && !in_ready) full_seen++;
      if (fout) begin
        checks++;
        if (q.size() == 0 || out_data !== q[0]) begin
          failures++; $display("mismatch: got %0h", out_data);
        end
        if (q.size() != 0) void'(q.pop_front());
      end
      if (fin) q.push_back(in_data);
      @(posedge clk);
      #1;
      if (fin) in_valid = 0;
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("full never reached"); end
    $display("full stalls: %0d", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
