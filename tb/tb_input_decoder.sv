// tb_input_decoder: loads a random codebook and checks that every lane of
// random SIMD code words decodes to the codebook entry its code names.
module tb_input_decoder;
  import codex_pkg::*;
  localparam int SIMD = 4, IBITS = 3;
  logic clk = 0;
  logic cb_we;
  logic [IBITS-1:0] cb_addr;
  fx_t cb_data;
  logic [SIMD*IBITS-1:0] codes;
  fx_t values [SIMD];
  int checks = 0, failures = 0;
  int cb [2**IBITS];

  input_decoder #(.SIMD(SIMD), .IBITS(IBITS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cb_we = 0; cb_addr = 0; cb_data = 0; codes = 0;
    for (int k = 0; k < 2**IBITS; k++) begin
      cb[k] = int'($urandom);
      @(negedge clk); cb_we = 1; cb_addr = IBITS'(k); cb_data = cb[k];
    end
    @(negedge clk) cb_we = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      codes = (SIMD*IBITS)'($urandom);
      #1;
      for (int s = 0; s < SIMD; s++) begin
        checks++;
        if (values[s] !== cb[codes[s*IBITS +: IBITS]]) begin
          failures++; $display("lane %0d code %0d got %0h", s, codes[s*IBITS +: IBITS], values[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
