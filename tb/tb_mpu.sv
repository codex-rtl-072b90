// tb_mpu: streams random encoded feature maps (odd size, so the last row
// and column must be dropped) through the max-pooling unit with random
// back-pressure, and checks each pooled word against a per-lane maximum of
// the 2x2 window computed here.
module tb_mpu;
  localparam int D = 7, CH = 6, PE = 3, BITS = 2;
  localparam int CW = CH / PE, OD = D / 2, NF = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [PE*BITS-1:0] in_data, out_data;
  int checks = 0, failures = 0, n_out = 0, stalls = 0;
  logic [PE*BITS-1:0] fm [NF][D][D][CW];
  logic [PE*BITS-1:0] expq[$];

  mpu #(.IN_DIM(D), .CH(CH), .PE(PE), .BITS(BITS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0 || out_data !== expq[0]) begin failures++; $display("word %0d: %0h vs %0h", n_out, out_data, expq[0]); end
      if (expq.size() != 0) void'(expq.pop_front());
      n_out++;
    end
    if (out_valid && !out_ready) stalls++;
  end

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    for (int f = 0; f < NF; f++) begin
      for (int y = 0; y < D; y++) for (int x = 0; x < D; x++) for (int c = 0; c < CW; c++)
        fm[f][y][x][c] = (PE*BITS)'($urandom);
      for (int py = 0; py < OD; py++) for (int px = 0; px < OD; px++) for (int c = 0; c < CW; c++) begin
        logic [PE*BITS-1:0] w;
        for (int p = 0; p < PE; p++) begin
          int m; m = 0;
          for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
            if (int'(fm[f][2*py+dy][2*px+dx][c][p*BITS +: BITS]) > m) m = int'(fm[f][2*py+dy][2*px+dx][c][p*BITS +: BITS]);
          w[p*BITS +: BITS] = BITS'(m);
        end
        expq.push_back(w);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int f = 0; f < NF; f++)
        for (int y = 0; y < D; y++) for (int x = 0; x < D; x++) for (int c = 0; c < CW; c++) begin
          @(negedge clk);
          in_valid = 1; in_data = fm[f][y][x][c];
          #2;
          while (!in_ready) begin @(negedge clk); #2; end
          @(posedge clk);
          @(negedge clk) in_valid = 0;
        end
      while (n_out < NF * OD*OD*CW) @(negedge clk) out_ready = ($urandom % 3) != 0;
    join
    checks++;
    if (n_out != NF * OD*OD*CW || stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
