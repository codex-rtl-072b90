// tb_batch_norm: loads random alpha/beta per neuron and checks
// y = (alpha*x >> 16) + beta for every PE and neuron fold.
module tb_batch_norm;
  import codex_pkg::*;
  localparam int PE = 3, NF = 4;
  logic clk = 0, wr_en, wr_sel;
  logic [1:0] wr_pe, wr_addr, nf;
  fx_t wr_data;
  fx_t x [PE], y [PE];
  int checks = 0, failures = 0;
  int al [PE][NF], be [PE][NF];

  batch_norm #(.PE(PE), .NF(NF)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_sel = 0; wr_pe = 0; wr_addr = 0; wr_data = 0; nf = 0;
    foreach (x[p]) x[p] = 0;
    for (int p = 0; p < PE; p++)
      for (int a = 0; a < NF; a++)
        for (int sel = 0; sel < 2; sel++) begin
          @(negedge clk);
          wr_en = 1; wr_sel = sel[0]; wr_pe = 2'(p); wr_addr = 2'(a);
          wr_data = fx_t'($signed($urandom) >>> 8);
          if (sel == 0) al[p][a] = wr_data; else be[p][a] = wr_data;
        end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      nf = 2'($urandom);
      foreach (x[p]) x[p] = fx_t'($signed($urandom) >>> 4);
      #1;
      for (int p = 0; p < PE; p++) begin
        int e;
        e = int'((longint'(al[p][nf]) * longint'(x[p])) >>> 16) + be[p][nf];
        checks++;
        if (y[p] !== e) begin failures++; $display("pe %0d nf %0d: %0d vs %0d", p, nf, y[p], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
