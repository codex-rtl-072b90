// tb_swu: streams random frames into the sliding window unit and checks
// every output word against the window order computed here (output pixel
// raster, then ky, kx, channel chunk; stride 1, no padding), with random
// back-pressure. Also checks the word count per frame and that the next
// frame is accepted while the previous one is still being read out.
module tb_swu;
  localparam int D = 6, CH = 4, K = 3, SIMD = 2, BITS = 3;
  localparam int CF = CH / SIMD, OD = D - K + 1;
  localparam int NF = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [SIMD*BITS-1:0] in_data, out_data;
  int checks = 0, failures = 0, n_out = 0, n_overlap = 0;
  logic [SIMD*BITS-1:0] frame [NF][D*D*CF];
  logic [SIMD*BITS-1:0] expq[$];

  swu #(.IFM_DIM(D), .IFM_CH(CH), .K(K), .SIMD(SIMD), .BITS(BITS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid && in_ready && out_valid) n_overlap++;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0 || out_data !== expq[0]) begin failures++; $display("word %0d wrong", n_out); end
    if (expq.size() != 0) void'(expq.pop_front());
    n_out++;
  end

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    for (int f = 0; f < NF; f++) begin
      foreach (frame[f][i]) frame[f][i] = (SIMD*BITS)'($urandom);
      for (int oy = 0; oy < OD; oy++)
        for (int ox = 0; ox < OD; ox++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int c = 0; c < CF; c++)
                expq.push_back(frame[f][((oy + ky) * D + ox + kx) * CF + c]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int f = 0; f < NF; f++)
        for (int i = 0; i < D*D*CF; i++) begin
          @(negedge clk);
          in_valid = 1; in_data = frame[f][i];
          #2;
          while (!in_ready) begin @(negedge clk); #2; end
          @(posedge clk);
          @(negedge clk) in_valid = 0;
        end
      while (n_out < NF * OD*OD*K*K*CF) @(negedge clk) out_ready = ($urandom % 4) != 0;
    join
    checks++;
    if (n_out != NF * OD*OD*K*K*CF) failures++;
    checks++;
    if (n_overlap == 0) begin failures++; $display("no frame written while another was read"); end
    $display("overlapped input words: %0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
