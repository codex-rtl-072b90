// tb_output_encoder: loads a sorted codebook with c[0] = 0 and checks the
// nearest-neighbour index of random values against a brute-force search.
// Negative inputs must give code 0 (ReLU); both ReLU hits and exact ties
// (value midway between two centres, lower index expected) are exercised.
module tb_output_encoder;
  import codex_pkg::*;
  localparam int PE = 3, OBITS = 3, K = 2**OBITS;
  logic clk = 0, cb_we;
  logic [OBITS-1:0] cb_addr;
  fx_t cb_data;
  fx_t y [PE];
  logic [PE*OBITS-1:0] codes;
  int checks = 0, failures = 0, relu_hits = 0, ties = 0;
  int cb [K];

  output_encoder #(.PE(PE), .OBITS(OBITS)) dut (.*);
  always #5 clk = ~clk;

  function automatic int nearest(int v);
    longint best, d;
    int idx;
    best = 64'h7fffffffffffffff; idx = 0;
    for (int k = 0; k < K; k++) begin
      d = longint'(v) - longint'(cb[k]);
      if (d < 0) d = -d;
      if (d < best) begin best = d; idx = k; end
    end
    return idx;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cb_we = 0; cb_addr = 0; cb_data = 0;
    foreach (y[p]) y[p] = 0;
    cb[0] = 0;
    for (int k = 1; k < K; k++) cb[k] = cb[k-1] + 2 + int'($urandom % 60000) * 2;
    for (int k = 0; k < K; k++) begin
      @(negedge clk); cb_we = 1; cb_addr = OBITS'(k); cb_data = cb[k];
    end
    @(negedge clk) cb_we = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      foreach (y[p]) begin
        case ($urandom % 4)
          0: y[p] = -fx_t'($urandom % 200000);
          1: begin
               int k; k = 1 + int'($urandom % (K-1));
               y[p] = (cb[k-1] + cb[k]) / 2;   // exact tie
             end
          default: y[p] = fx_t'($urandom % (cb[K-1] + 100000));
        endcase
      end
      #1;
      for (int p = 0; p < PE; p++) begin
        checks++;
        if (y[p] < 0) relu_hits++;
        if (int'(codes[p*OBITS +: OBITS]) != nearest(y[p])) begin
          failures++; $display("y=%0d got %0d want %0d", y[p], codes[p*OBITS +: OBITS], nearest(y[p]));
        end
      end
    end
    checks++;
    if (relu_hits == 0) failures++;
    $display("relu hits: %0d", relu_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
