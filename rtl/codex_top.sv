// codex_top: streaming, fully on-chip accelerator for an encoded LeNet
// (the LeNet-I configuration: 2 CONV, 2 max-pool, 2 FC layers).
//
// Every layer has its own engine and all engines run at once, each working
// on a different part of the stream, with only small FIFOs between them:
//
//   in (8-bit pixel codes)
//    -> CONV1: swu(28x28x1, 5x5) -> mvau(25 -> 20, SIMD 1, PE 4)  -> mpu(24 -> 12)
//    -> fifo
//    -> CONV2: swu(12x12x20, 5x5) -> mvau(500 -> 50, SIMD 4, PE 5) -> mpu(8 -> 4)
//    -> fifo
//    -> FC1:   mvau(800 -> 500, SIMD 5, PE 10)
//    -> fifo
//    -> FC2:   mvau(500 -> 10, SIMD 10, PE 10, unencoded output)
//    -> out (10 x 32-bit fixed-point class scores, one word per image)
//
// Features between layers travel as codebook indices of 2, 2 and 3 bits and
// weights are stored as 3-, 4-, 2- and 4-bit indices (LeNet-I's per-layer
// bit widths); arithmetic is 32-bit fixed point on decoded values. The
// network input is taken as 8-bit codes that CONV1's input codebook maps to
// fixed-point pixel values. Only the first layer's input and the last
// layer's output cross the chip boundary; off-chip memory is outside this
// design and is reached through the in_* and out_* streams.
//
// The bit widths and the engine chain follow the paper. The layer sizes
// (Caffe LeNet: 20 and 50 5x5 filters, 500 hidden units, 10 classes), the
// SIMD/PE factors and the 2x2 pooling are this design's choices.
//
// Interface: in_valid/in_ready/in_data delivers 784 pixels per image in
// raster order; out_valid/out_ready/out_data returns the scores, class c in
// bits [32c +: 32]. Before the first image every memory is loaded through
// cfg (cfg.layer 0..3 = CONV1, CONV2, FC1, FC2; see codex_pkg::cfg_sel_e).
module codex_top
  import codex_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [7:0]    in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [319:0]  out_data
);
  // ---- layer shapes and LeNet-I bit widths ----
  localparam int IN_DIM  = 28, K = 5;
  localparam int C1_CH   = 20, C1_SIMD = 1,  C1_PE = 4;
  localparam int C2_CH   = 50, C2_SIMD = 4,  C2_PE = 5;
  localparam int F1_OUT  = 500, F1_SIMD = 5, F1_PE = 10;
  localparam int F2_OUT  = 10, F2_SIMD = 10, F2_PE = 10;
  localparam int IN_BITS = 8;
  localparam int A1 = 2, A2 = 2, A3 = 3;            // activation bits
  localparam int W1 = 3, W2 = 4, W3 = 2, W4 = 4;    // weight bits

  localparam int C1_OUT_DIM = IN_DIM - K + 1;        // 24
  localparam int P1_DIM     = C1_OUT_DIM / 2;        // 12
  localparam int C2_OUT_DIM = P1_DIM - K + 1;        // 8
  localparam int P2_DIM     = C2_OUT_DIM / 2;        // 4
  localparam int F1_IN      = P2_DIM * P2_DIM * C2_CH; // 800

  // ---- CONV1 ----
  logic                   s1_v, s1_r;
  logic [C1_SIMD*IN_BITS-1:0] s1_d;
  logic                   m1_v, m1_r;
  logic [C1_PE*A1-1:0]    m1_d;
  logic                   p1_v, p1_r;
  logic [C1_PE*A1-1:0]    p1_d;

  swu #(.IFM_DIM(IN_DIM), .IFM_CH(1), .K(K), .SIMD(C1_SIMD), .BITS(IN_BITS)) u_swu1 (
    .clk, .rst_n,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
    .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d));

  mvau #(.MW(K*K*1), .MH(C1_CH), .SIMD(C1_SIMD), .PE(C1_PE),
         .IBITS(IN_BITS), .WBITS(W1), .OBITS(A1), .ENC_OUT(1'b1), .LAYER(0)) u_mvau1 (
    .clk, .rst_n, .cfg,
    .in_valid (s1_v), .in_ready (s1_r), .in_data (s1_d),
    .out_valid(m1_v), .out_ready(m1_r), .out_data(m1_d));

  mpu #(.IN_DIM(C1_OUT_DIM), .CH(C1_CH), .PE(C1_PE), .BITS(A1)) u_mpu1 (
    .clk, .rst_n,
    .in_valid (m1_v), .in_ready (m1_r), .in_data (m1_d),
    .out_valid(p1_v), .out_ready(p1_r), .out_data(p1_d));

  // ---- streaming buffer 1 ----
  logic                   b1_v, b1_r;
  logic [C1_PE*A1-1:0]    b1_d;

  stream_fifo #(.WIDTH(C1_PE*A1), .DEPTH(8)) u_buf1 (
    .clk, .rst_n,
    .in_valid (p1_v), .in_ready (p1_r), .in_data (p1_d),
    .out_valid(b1_v), .out_ready(b1_r), .out_data(b1_d));

  // ---- CONV2 ----
  logic                   s2_v, s2_r;
  logic [C2_SIMD*A1-1:0]  s2_d;
  logic                   m2_v, m2_r;
  logic [C2_PE*A2-1:0]    m2_d;
  logic                   p2_v, p2_r;
  logic [C2_PE*A2-1:0]    p2_d;

  swu #(.IFM_DIM(P1_DIM), .IFM_CH(C1_CH), .K(K), .SIMD(C2_SIMD), .BITS(A1)) u_swu2 (
    .clk, .rst_n,
    .in_valid (b1_v), .in_ready (b1_r), .in_data (b1_d),
    .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d));

  mvau #(.MW(K*K*C1_CH), .MH(C2_CH), .SIMD(C2_SIMD), .PE(C2_PE),
         .IBITS(A1), .WBITS(W2), .OBITS(A2), .ENC_OUT(1'b1), .LAYER(1)) u_mvau2 (
    .clk, .rst_n, .cfg,
    .in_valid (s2_v), .in_ready (s2_r), .in_data (s2_d),
    .out_valid(m2_v), .out_ready(m2_r), .out_data(m2_d));

  mpu #(.IN_DIM(C2_OUT_DIM), .CH(C2_CH), .PE(C2_PE), .BITS(A2)) u_mpu2 (
    .clk, .rst_n,
    .in_valid (m2_v), .in_ready (m2_r), .in_data (m2_d),
    .out_valid(p2_v), .out_ready(p2_r), .out_data(p2_d));

  // ---- streaming buffer 2 ----
  logic                   b2_v, b2_r;
  logic [C2_PE*A2-1:0]    b2_d;

  stream_fifo #(.WIDTH(C2_PE*A2), .DEPTH(8)) u_buf2 (
    .clk, .rst_n,
    .in_valid (p2_v), .in_ready (p2_r), .in_data (p2_d),
    .out_valid(b2_v), .out_ready(b2_r), .out_data(b2_d));

  // ---- FC1 ----
  logic                   f1_v, f1_r;
  logic [F1_PE*A3-1:0]    f1_d;

  mvau #(.MW(F1_IN), .MH(F1_OUT), .SIMD(F1_SIMD), .PE(F1_PE),
         .IBITS(A2), .WBITS(W3), .OBITS(A3), .ENC_OUT(1'b1), .LAYER(2)) u_mvau3 (
    .clk, .rst_n, .cfg,
    .in_valid (b2_v), .in_ready (b2_r), .in_data (b2_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d));

  // ---- streaming buffer 3 ----
  logic                   b3_v, b3_r;
  logic [F1_PE*A3-1:0]    b3_d;

  stream_fifo #(.WIDTH(F1_PE*A3), .DEPTH(8)) u_buf3 (
    .clk, .rst_n,
    .in_valid (f1_v), .in_ready (f1_r), .in_data (f1_d),
    .out_valid(b3_v), .out_ready(b3_r), .out_data(b3_d));

  // ---- FC2 (last layer, raw fixed-point output) ----
  mvau #(.MW(F1_OUT), .MH(F2_OUT), .SIMD(F2_SIMD), .PE(F2_PE),
         .IBITS(A3), .WBITS(W4), .OBITS(1), .ENC_OUT(1'b0), .LAYER(3)) u_mvau4 (
    .clk, .rst_n, .cfg,
    .in_valid (b3_v), .in_ready (b3_r), .in_data (b3_d),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));

  initial begin
    assert (C1_PE == C2_SIMD && C2_PE == F1_SIMD && F1_PE == F2_SIMD)
      else $fatal(1, "codex_top: stream widths of adjacent layers must match");
  end
endmodule
