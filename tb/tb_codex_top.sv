// tb_codex_top: end-to-end test of the full-size encoded LeNet pipeline.
//
// Generates random encoded weights, codebooks and batch-norm tables for all
// four layers, loads them through the configuration bus, streams NIMG random
// 28x28 images back to back, and compares each 10-score output word with a
// reference model of the network written here (decode, convolve, batch-norm,
// nearest-codebook encode, 2x2 max-pool on codes, fully connected layers,
// raw last layer). The output side applies long random stretches of
// back-pressure. It prints the cycle of each score word: with images back to
// back the interval settles near the slowest layer's load, CONV2's 64 x 1250
// = 80,000 cycles.
//
// It also counts how often each mechanism of the design happens and fails
// if one never does: output stalls of an MVAU, full streaming buffers,
// pooled words leaving an MPU, neuron folds served from an MVAU's input
// buffer, cycles in which two or more layer engines compute at once, and
// negative pre-activation values clamped to code 0 (ReLU by encoding).
module tb_codex_top;
  import codex_pkg::*;
  localparam int NIMG = 4;
  localparam int K = 5;
  // layer l: input dim, input channels, output channels, SIMD, PE, in/w/out bits
  localparam int MWv [4] = '{25, 500, 800, 500};
  localparam int MHv [4] = '{20, 50, 500, 10};
  localparam int SIv [4] = '{1, 4, 5, 10};
  localparam int PEv [4] = '{4, 5, 10, 10};
  localparam int IBv [4] = '{8, 2, 2, 3};
  localparam int WBv [4] = '{3, 4, 2, 4};
  localparam int OBv [4] = '{2, 2, 3, 0};

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data;
  logic [319:0] out_data;

  codex_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int wc [4][];                       // weight codes, row-major [r*MW + c]
  int icb [4][], wcb [4][], ocb [4][];
  int alpha [4][], beta [4][];
  int img [NIMG][784];
  int expq [$];                       // expected scores, 10 per image
  int relu_clamps = 0;

  function automatic int mul(int a, int b);
    return int'((longint'(a) * longint'(b)) >>> 16);
  endfunction

  function automatic int enc(int l, int v);
    longint best, d; int idx;
    best = 64'h7fffffffffffffff; idx = 0;
    for (int k = 0; k < 2**OBv[l]; k++) begin
      d = longint'(v) - longint'(ocb[l][k]); if (d < 0) d = -d;
      if (d < best) begin best = d; idx = k; end
    end
    return idx;
  endfunction

  // one neuron: batch-normalised dot product of row r with decoded codes x
  function automatic int neuron(int l, int r, ref int x[]);
    int acc; acc = 0;
    for (int c = 0; c < MWv[l]; c++) acc += mul(icb[l][x[c]], wcb[l][wc[l][r*MWv[l] + c]]);
    return mul(alpha[l][r], acc) + beta[l][r];
  endfunction

  // convolution layer on a code map [dim][dim][ch] -> code map, then 2x2 max-pool
  function automatic void conv_pool(int l, int dim, int ich, int och, ref int fin[], ref int fout[]);
    int od, pd, col[], cm[];
    od = dim - K + 1; pd = od / 2;
    col = new[K*K*ich];
    cm  = new[od*od*och];
    for (int oy = 0; oy < od; oy++)
      for (int ox = 0; ox < od; ox++) begin
        for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) for (int c = 0; c < ich; c++)
          col[(ky*K + kx)*ich + c] = fin[((oy+ky)*dim + ox+kx)*ich + c];
        for (int r = 0; r < och; r++) begin
          int v; v = neuron(l, r, col);
          if (v < 0) relu_clamps++;
          cm[(oy*od + ox)*och + r] = enc(l, v);
        end
      end
    fout = new[pd*pd*och];
    for (int py = 0; py < pd; py++) for (int px = 0; px < pd; px++) for (int r = 0; r < och; r++) begin
      int m; m = 0;
      for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
        if (cm[((2*py+dy)*od + 2*px+dx)*och + r] > m) m = cm[((2*py+dy)*od + 2*px+dx)*och + r];
      fout[(py*pd + px)*och + r] = m;
    end
  endfunction

  task automatic wr(input int l, input cfg_sel_e sel, input int pe_i, input int lane, input int addr, input int data);
    @(negedge clk);
    cfg.en = 1; cfg.layer = 4'(l); cfg.sel = sel; cfg.pe = 8'(pe_i); cfg.lane = 8'(lane);
    cfg.addr = 20'(addr); cfg.data = data;
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_full = 0, n_pool = 0, n_reuse = 0, n_overlap = 0, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    int busy;
    cyc <= cyc + 1;
    if ((dut.u_mvau1.out_valid && !dut.u_mvau1.out_ready) || (dut.u_mvau2.out_valid && !dut.u_mvau2.out_ready) ||
        (dut.u_mvau3.out_valid && !dut.u_mvau3.out_ready) || (out_valid && !out_ready)) n_stall++;
    if (!dut.u_buf1.in_ready || !dut.u_buf2.in_ready || !dut.u_buf3.in_ready) n_full++;
    if (dut.u_mpu1.out_valid && dut.u_mpu1.out_ready) n_pool++;
    if (dut.u_mpu2.out_valid && dut.u_mpu2.out_ready) n_pool++;
    if (dut.u_mvau3.step && dut.u_mvau3.nf != 0) n_reuse++;
    busy = int'(dut.u_mvau1.step) + int'(dut.u_mvau2.step) + int'(dut.u_mvau3.step) + int'(dut.u_mvau4.step);
    if (busy >= 2) n_overlap++;
  end

  // ---------------- output checker ----------------
  int n_img_out = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int c = 0; c < 10; c++) begin
      int e;
      checks++;
      e = (expq.size() != 0) ? expq.pop_front() : 0;
      if (int'(out_data[32*c +: 32]) != e) begin
        failures++;
        $display("image %0d class %0d: got %0d want %0d", n_img_out, c, int'(out_data[32*c +: 32]), e);
      end
    end
    n_img_out++;
    $display("image %0d scores out at cycle %0d", n_img_out, cyc);
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a[], b[], c[], d[], e[];
    cfg = '0; in_valid = 0; in_data = 0; out_ready = 1;
    // ---- random network ----
    for (int l = 0; l < 4; l++) begin
      wc[l]  = new[MWv[l]*MHv[l]];
      icb[l] = new[2**IBv[l]];
      wcb[l] = new[2**WBv[l]];
      ocb[l] = new[(OBv[l] > 0) ? 2**OBv[l] : 1];
      alpha[l] = new[MHv[l]];
      beta[l]  = new[MHv[l]];
      foreach (wc[l][i]) wc[l][i] = int'($urandom % (2**WBv[l]));
      // half the weight centres negative, half positive
      foreach (wcb[l][k]) wcb[l][k] = (k < 2**(WBv[l]-1) ? -1 : 1) * (2000 + int'($urandom % 30000));
      foreach (alpha[l][r]) begin
        alpha[l][r] = (l == 0) ? 24576 + int'($urandom % 16384) : 16384 + int'($urandom % 16384);
        beta[l][r]  = int'($urandom % 32768) - 8192;
      end
      if (OBv[l] > 0) begin
        ocb[l][0] = 0;
        for (int k = 1; k < 2**OBv[l]; k++) ocb[l][k] = ocb[l][k-1] + 12000 + int'($urandom % 16000);
      end
    end
    foreach (icb[0][k]) icb[0][k] = k * 256;           // pixel code k -> k/256
    for (int l = 1; l < 4; l++) foreach (icb[l][k]) icb[l][k] = ocb[l-1][k];
    foreach (img[i, p]) img[i][p] = int'($urandom % 256);

    // ---- reference ----
    for (int i = 0; i < NIMG; i++) begin
      a = new[784];
      foreach (a[p]) a[p] = img[i][p];
      conv_pool(0, 28, 1, 20, a, b);
      conv_pool(1, 12, 20, 50, b, c);
      d = new[500];
      for (int r = 0; r < 500; r++) begin
        int v; v = neuron(2, r, c);
        if (v < 0) relu_clamps++;
        d[r] = enc(2, v);
      end
      for (int r = 0; r < 10; r++) expq.push_back(neuron(3, r, d));
    end
    $display("reference done, %0d values clamped by ReLU", relu_clamps);

    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- load ----
    for (int l = 0; l < 4; l++) begin
      int sf; sf = MWv[l] / SIv[l];
      foreach (icb[l][k]) wr(l, CFG_ICB, 0, 0, k, icb[l][k]);
      foreach (wcb[l][k]) wr(l, CFG_WCB, 0, 0, k, wcb[l][k]);
      if (OBv[l] > 0) foreach (ocb[l][k]) wr(l, CFG_OCB, 0, 0, k, ocb[l][k]);
      for (int r = 0; r < MHv[l]; r++) begin
        wr(l, CFG_BN_ALPHA, r % PEv[l], 0, r / PEv[l], alpha[l][r]);
        wr(l, CFG_BN_BETA,  r % PEv[l], 0, r / PEv[l], beta[l][r]);
        for (int col = 0; col < MWv[l]; col++)
          wr(l, CFG_WEIGHT, r % PEv[l], col % SIv[l], (r / PEv[l]) * sf + col / SIv[l], wc[l][r*MWv[l] + col]);
      end
    end
    @(negedge clk) cfg = '0;
    $display("loaded at cycle %0d", cyc);

    // ---- stream images; random back-pressure at the output ----
    fork
      for (int i = 0; i < NIMG; i++)
        for (int p = 0; p < 784; p++) begin
          @(negedge clk);
          in_valid = 1; in_data = 8'(img[i][p]);
          #2;
          while (!in_ready) begin @(negedge clk); #2; end
          @(posedge clk);
          @(negedge clk) in_valid = 0;
        end
      // long random stretches of back-pressure, so stalls reach the upstream layers
      while (n_img_out < NIMG) @(negedge clk) if ($urandom % 3000 == 0) out_ready = !out_ready;
    join
    repeat (10) @(posedge clk);

    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d scores missing", expq.size()); end
    $display("mechanisms: stall=%0d fifo_full=%0d pooled=%0d fold_reuse=%0d overlap=%0d relu=%0d",
             n_stall, n_full, n_pool, n_reuse, n_overlap, relu_clamps);
    checks += 6;
    if (n_stall == 0)     begin failures++; $display("no MVAU output stall"); end
    if (n_full == 0)      begin failures++; $display("no streaming buffer filled up"); end
    if (n_pool == 0)      begin failures++; $display("no pooled word"); end
    if (n_reuse == 0)     begin failures++; $display("no input-buffer reuse"); end
    if (n_overlap == 0)   begin failures++; $display("layers never overlapped"); end
    if (relu_clamps == 0) begin failures++; $display("ReLU never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
