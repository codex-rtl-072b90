// tb_mvau: end-to-end test of one Matrix-Vector-Activation Unit.
// Loads random encoded weights, codebooks and batch-norm tables through the
// configuration bus, streams random encoded input vectors, and compares each
// output word with a reference computed here from the raw tables
// (decode -> dot product -> alpha*x+beta -> nearest codebook index).
// Phase 1 runs with out_ready always high and checks the rate: one vector
// must take exactly SF*NF cycles. Phase 2 adds random back-pressure and
// random input gaps and counts the stalls.
module tb_mvau;
  import codex_pkg::*;
  localparam int MW = 12, MH = 6, SIMD = 3, PE = 2, IBITS = 2, WBITS = 3, OBITS = 2;
  localparam int SF = MW / SIMD, NF = MH / PE;
  localparam int NVEC = 30;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [SIMD*IBITS-1:0] in_data;
  logic [PE*OBITS-1:0] out_data;

  int checks = 0, failures = 0, stalls = 0;
  int wcode [MH][MW];
  int icb [2**IBITS], wcb [2**WBITS], ocb [2**OBITS];
  int alpha [MH], beta [MH];
  int xin [NVEC][MW];
  int expq[$];      // expected output words

  mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IBITS(IBITS), .WBITS(WBITS),
         .OBITS(OBITS), .ENC_OUT(1'b1), .LAYER(2)) dut (.*);
  always #5 clk = ~clk;

  function automatic int mul(int a, int b);
    return int'((longint'(a) * longint'(b)) >>> 16);
  endfunction

  function automatic int enc(int v);
    longint best, d; int idx;
    best = 64'h7fffffffffffffff; idx = 0;
    for (int k = 0; k < 2**OBITS; k++) begin
      d = longint'(v) - longint'(ocb[k]); if (d < 0) d = -d;
      if (d < best) begin best = d; idx = k; end
    end
    return idx;
  endfunction

  task automatic wr(input cfg_sel_e sel, input int pe_i, input int lane, input int addr, input int data);
    @(negedge clk);
    cfg = '0;
    cfg.en = 1; cfg.layer = 4'd2; cfg.sel = sel; cfg.pe = 8'(pe_i); cfg.lane = 8'(lane);
    cfg.addr = 20'(addr); cfg.data = data;
  endtask

  // hold the offered word until in_ready is seen before a rising edge
  task automatic send();
    #2;
    while (!in_ready) begin @(negedge clk); #2; end
    @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  int got = 0, cyc = 0, t_first_in = 0, t_last_out = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) t_last_out = cyc;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      int e; e = expq.pop_front();
      if (int'(out_data) != e) begin failures++; $display("word %0d: got %0h want %0h", got, out_data, e); end
    end
    got++;
  end
  always @(posedge clk) if (rst_n && out_valid && !out_ready) stalls++;

  initial begin
    cfg = '0; in_valid = 0; in_data = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // tables
    for (int k = 0; k < 2**IBITS; k++) begin icb[k] = k * 20000; wr(CFG_ICB, 0, 0, k, icb[k]); end
    for (int k = 0; k < 2**WBITS; k++) begin wcb[k] = int'($urandom % 65536) - 32768; wr(CFG_WCB, 0, 0, k, wcb[k]); end
    ocb[0] = 0;
    for (int k = 1; k < 2**OBITS; k++) ocb[k] = ocb[k-1] + 10000 + int'($urandom % 20000);
    for (int k = 0; k < 2**OBITS; k++) wr(CFG_OCB, 0, 0, k, ocb[k]);
    for (int r = 0; r < MH; r++) begin
      alpha[r] = 32768 + int'($urandom % 65536);
      beta[r]  = int'($urandom % 20000) - 5000;
      wr(CFG_BN_ALPHA, r % PE, 0, r / PE, alpha[r]);
      wr(CFG_BN_BETA,  r % PE, 0, r / PE, beta[r]);
      for (int c = 0; c < MW; c++) begin
        wcode[r][c] = int'($urandom % (2**WBITS));
        wr(CFG_WEIGHT, r % PE, c % SIMD, (r / PE) * SF + c / SIMD, wcode[r][c]);
      end
    end
    // a write for another layer must be ignored
    wr(CFG_WCB, 0, 0, 0, 32'h7fff0000);
    cfg.layer = 4'd1;
    @(negedge clk) cfg = '0;

    // reference
    for (int v = 0; v < NVEC; v++) begin
      for (int c = 0; c < MW; c++) xin[v][c] = int'($urandom % (2**IBITS));
      for (int nf = 0; nf < NF; nf++) begin
        int word; word = 0;
        for (int p = 0; p < PE; p++) begin
          int r, acc;
          r = nf * PE + p; acc = 0;
          for (int c = 0; c < MW; c++) acc += mul(icb[xin[v][c]], wcb[wcode[r][c]]);
          word |= enc(mul(alpha[r], acc) + beta[r]) << (p * OBITS);
        end
        expq.push_back(word);
      end
    end

    // phase 1: no back-pressure, check rate
    for (int v = 0; v < 10; v++) begin
      for (int s = 0; s < SF; s++) begin
        @(negedge clk);
        in_valid = 1;
        for (int l = 0; l < SIMD; l++) in_data[l*IBITS +: IBITS] = IBITS'(xin[v][s*SIMD + l]);
        send();
        if (s == 0) t_first_in = cyc;
      end
      @(negedge clk) in_valid = 0;
      wait (got == (v + 1) * NF);
      @(negedge clk);
      checks++;
      // first input word taken at edge t; the last output word is taken at
      // edge t + SF*NF (SF*NF steps, the last one loads the output register)
      if (t_last_out - t_first_in != SF * NF) begin
        failures++; $display("vector %0d took %0d cycles, want %0d", v, t_last_out - t_first_in, SF * NF);
      end
    end

    // phase 2: random gaps and back-pressure
    fork
      begin
        for (int v = 10; v < NVEC; v++)
          for (int s = 0; s < SF; s++) begin
            @(negedge clk);
            in_valid = 0;
            while ($urandom % 3 == 0) @(negedge clk);
            in_valid = 1;
            for (int l = 0; l < SIMD; l++) in_data[l*IBITS +: IBITS] = IBITS'(xin[v][s*SIMD + l]);
            send();
          end
        @(negedge clk) in_valid = 0;
      end
      begin
        while (got < NVEC * NF) begin
          @(negedge clk) out_ready = ($urandom % 2) == 0;
        end
      end
    join
    repeat (5) @(posedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("no output stall happened"); end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
