// mpu: Max-Pooling Unit working on encoded activations.
//
// Activation codebooks are sorted, so a larger code always stands for a
// larger value and the maximum of the codes is the code of the maximum. The
// unit therefore pools the BITS-bit codes directly, as the paper proposes,
// with small comparators and a small buffer. It does 2x2 pooling with stride
// 2 over an IN_DIM x IN_DIM map of CH channels that arrives pixel by pixel in
// raster order, each pixel as CH/PE words of PE codes (the MVAU's output
// format). A row buffer of IN_DIM/2 x CH/PE words keeps the running maxima of
// the windows of the current pooling row. Pool size, stride and the
// buffering are this design's choices; with an odd IN_DIM the last row and
// column are dropped.
//
// Interface and timing: one input word per cycle. When the word completes a
// window (odd row, odd column) the pooled word is presented combinationally
// on out_data with out_valid, and the input is stalled (in_ready low) until
// out_ready; other words are absorbed at once. Output order is pooled pixels
// in raster order, CH/PE words each, ready for the next layer's SWU or MVAU.
module mpu #(
  parameter int IN_DIM = 8,
  parameter int CH     = 50,
  parameter int PE     = 5,
  parameter int BITS   = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [PE*BITS-1:0]   in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [PE*BITS-1:0]   out_data
);
  localparam int CWN     = CH / PE;
  localparam int OUT_DIM = IN_DIM / 2;
  localparam int RB      = OUT_DIM * CWN;
  localparam int RBW     = (RB > 1) ? $clog2(RB) : 1;
  localparam int DW      = $clog2(IN_DIM + 1);
  localparam int CWW     = $clog2(CWN + 1);

  logic [PE*BITS-1:0] rowbuf [RB];
  logic [DW-1:0]      x, y;
  logic [CWW-1:0]     cw;
  logic [RBW-1:0]     idx;
  logic               in_range, first, emit, take;
  logic [PE*BITS-1:0] maxed;

  always_comb begin
    in_range = (int'(x) < 2*OUT_DIM) && (int'(y) < 2*OUT_DIM);
    first    = !x[0] && !y[0];
    emit     = in_range && x[0] && y[0];
    idx      = RBW'((int'(x) / 2) * CWN + int'(cw));
    for (int p = 0; p < PE; p++) begin
      logic [BITS-1:0] a, b;
      a = rowbuf[idx][p*BITS +: BITS];
      b = in_data[p*BITS +: BITS];
      maxed[p*BITS +: BITS] = (first || b > a) ? b : a;
    end
  end

  assign out_valid = in_valid && emit;
  assign out_data  = maxed;
  assign in_ready  = !emit || out_ready;
  assign take      = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take && in_range) rowbuf[idx] <= maxed;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {x, y, cw} <= '0;
    end else if (take) begin
      if (cw != CWW'(CWN-1)) cw <= cw + 1'b1;
      else begin
        cw <= '0;
        if (x != DW'(IN_DIM-1)) x <= x + 1'b1;
        else begin
          x <= '0;
          y <= (y == DW'(IN_DIM-1)) ? '0 : y + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (CH % PE == 0 && IN_DIM >= 2) else $fatal(1, "mpu: PE must divide CH");
  end
endmodule
