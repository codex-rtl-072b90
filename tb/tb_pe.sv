// tb_pe: drives random fixed-point inputs and weights over several folds and
// compares the accumulated dot product with a reference computed here:
// each product is the 64-bit product shifted right by 16 and cut to 32 bits.
module tb_pe;
  import codex_pkg::*;
  localparam int SIMD = 4, FOLDS = 5;
  logic clk = 0, rst_n = 0, en, first;
  fx_t x [SIMD], w [SIMD];
  fx_t sum, acc;
  int checks = 0, failures = 0;

  pe #(.SIMD(SIMD)) dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_mul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expect_sum;
    en = 0; first = 0;
    foreach (x[s]) begin x[s] = 0; w[s] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 200; v++) begin
      expect_sum = 0;
      for (int f = 0; f < FOLDS; f++) begin
        @(negedge clk);
        en = 1; first = (f == 0);
        foreach (x[s]) begin
          x[s] = fx_t'($signed($urandom) >>> ($urandom % 12));
          w[s] = fx_t'($signed($urandom) >>> ($urandom % 12));
          expect_sum += ref_mul(x[s], w[s]);
        end
        #1;
        checks++;
        if (sum !== expect_sum) begin failures++; $display("vec %0d fold %0d: %0d vs %0d", v, f, sum, expect_sum); end
        // an idle cycle must not disturb the accumulator
        if (f == 2) begin
          @(negedge clk); en = 0; first = 0;
          @(negedge clk);
          checks++;
          if (acc !== expect_sum) begin failures++; $display("acc changed while idle"); end
        end
      end
      @(negedge clk) en = 0;
      checks++;
      if (acc !== expect_sum) begin failures++; $display("acc %0d vs %0d", acc, expect_sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
