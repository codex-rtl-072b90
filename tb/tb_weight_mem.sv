// tb_weight_mem: writes random codes one at a time to every (PE, word,
// lane) and reads every word back, checking all PEs' lanes.
module tb_weight_mem;
  localparam int PE = 3, SIMD = 2, WBITS = 3, DEPTH = 6;
  logic clk = 0;
  logic wr_en;
  logic [1:0] wr_pe;
  logic [2:0] wr_addr, rd_addr;
  logic [0:0] wr_lane;
  logic [WBITS-1:0] wr_code;
  logic [PE*SIMD*WBITS-1:0] rd_codes;
  int checks = 0, failures = 0;
  logic [WBITS-1:0] ref_mem [PE][DEPTH][SIMD];

  weight_mem #(.PE(PE), .SIMD(SIMD), .WBITS(WBITS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_pe = 0; wr_addr = 0; wr_lane = 0; wr_code = 0; rd_addr = 0;
    for (int rep = 0; rep < 2; rep++) begin
      for (int p = 0; p < PE; p++)
        for (int a = 0; a < DEPTH; a++)
          for (int s = 0; s < SIMD; s++) begin
            @(negedge clk);
            wr_en = 1; wr_pe = 2'(p); wr_addr = 3'(a); wr_lane = 1'(s);
            wr_code = WBITS'($urandom);
            ref_mem[p][a][s] = wr_code;
          end
      @(negedge clk) wr_en = 0;
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk) rd_addr = 3'(a);
        #1;
        for (int p = 0; p < PE; p++)
          for (int s = 0; s < SIMD; s++) begin
            checks++;
            if (rd_codes[(p*SIMD+s)*WBITS +: WBITS] !== ref_mem[p][a][s]) begin
              failures++; $display("pe %0d addr %0d lane %0d wrong", p, a, s);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
