// tb_weight_decoder: loads a random weight codebook (broadcast to all PE
// copies) and checks that all PE x SIMD lanes decode random codes to the
// right entry in the same cycle.
module tb_weight_decoder;
  import codex_pkg::*;
  localparam int PE = 3, SIMD = 2, WBITS = 3;
  logic clk = 0;
  logic cb_we;
  logic [WBITS-1:0] cb_addr;
  fx_t cb_data;
  logic [PE*SIMD*WBITS-1:0] codes;
  fx_t values [PE][SIMD];
  int checks = 0, failures = 0;
  int cb [2**WBITS];

  weight_decoder #(.PE(PE), .SIMD(SIMD), .WBITS(WBITS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cb_we = 0; cb_addr = 0; cb_data = 0; codes = 0;
    for (int k = 0; k < 2**WBITS; k++) begin
      cb[k] = int'($urandom);
      @(negedge clk); cb_we = 1; cb_addr = WBITS'(k); cb_data = cb[k];
    end
    @(negedge clk) cb_we = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      codes = (PE*SIMD*WBITS)'({$urandom, $urandom});
      #1;
      for (int p = 0; p < PE; p++)
        for (int s = 0; s < SIMD; s++) begin
          checks++;
          if (values[p][s] !== cb[codes[(p*SIMD+s)*WBITS +: WBITS]]) begin
            failures++; $display("pe %0d lane %0d wrong", p, s);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
