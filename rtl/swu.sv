// swu: Sliding Window Unit, which turns a feature map into convolution windows.
//
// A convolution layer is run on the MVAU as a matrix-vector product per output
// pixel, so the MVAU needs, for each output pixel, the K x K x IFM_CH input
// values under the window, in the column order of the weight matrix. This
// unit does that reordering on the encoded values (BITS-bit codes). It
// stores an input frame of IFM_DIM x IFM_DIM pixels, each arriving as CF =
// IFM_CH/SIMD words of SIMD codes, then reads it out window by window: output
// pixels in raster order (oy, ox), inside each window rows ky, columns kx,
// then the CF channel chunks. Weight column c therefore is
// (ky*K + kx)*IFM_CH + channel. Windows use stride 1 and no padding, so the
// output is OFM_DIM = IFM_DIM-K+1 pixels wide.
//
// The frame buffer has two banks: while the windows of one frame are read
// from one bank, the next frame is written into the other, so consecutive
// images overlap in this layer as in the paper's pipelined schedule. The
// paper gives the job (reorder the layer input buffer and send SIMD-wide
// chunks to the MVAU); the two whole-frame banks, stride 1 and no padding
// are this design's choices.
//
// Interface and timing: in_* takes one word per cycle while the write bank is
// not full. A bank becomes readable the cycle after its last word is written;
// out_valid then stays high for OFM_DIM^2*K^2*CF words, one per cycle while
// out_ready is high, and the bank is freed after its last word. out_data is
// read combinationally from the read bank.
module swu #(
  parameter int IFM_DIM = 12,
  parameter int IFM_CH  = 20,
  parameter int K       = 5,
  parameter int SIMD    = 4,
  parameter int BITS    = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [SIMD*BITS-1:0]  in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [SIMD*BITS-1:0]  out_data
);
  localparam int CF      = IFM_CH / SIMD;
  localparam int OFM_DIM = IFM_DIM - K + 1;
  localparam int WORDS   = IFM_DIM * IFM_DIM * CF;
  localparam int AW      = (WORDS > 1) ? $clog2(WORDS) : 1;
  localparam int DW      = $clog2(IFM_DIM + 1);
  localparam int KW      = $clog2(K + 1);
  localparam int CW      = $clog2(CF + 1);

  logic [SIMD*BITS-1:0] frame [2][WORDS];
  logic                 wr_bank, rd_bank;
  logic [1:0]           bank_full;
  logic                 wr_done, rd_done;
  logic [AW-1:0]        wr_idx;
  logic [DW-1:0]        oy, ox;
  logic [KW-1:0]        ky, kx;
  logic [CW-1:0]        cf;
  logic [AW-1:0]        rd_idx;

  assign in_ready  = !bank_full[wr_bank];
  assign out_valid = bank_full[rd_bank];
  assign wr_done   = in_valid && in_ready && (wr_idx == AW'(WORDS-1));
  assign rd_done   = out_valid && out_ready && (cf == CW'(CF-1)) && (kx == KW'(K-1)) &&
                     (ky == KW'(K-1)) && (ox == DW'(OFM_DIM-1)) && (oy == DW'(OFM_DIM-1));

  always_comb begin
    rd_idx   = AW'(((int'(oy) + int'(ky)) * IFM_DIM + (int'(ox) + int'(kx))) * CF + int'(cf));
    out_data = frame[rd_bank][rd_idx];
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) frame[wr_bank][wr_idx] <= in_data;
  end

  // write side
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_idx  <= '0;
      wr_bank <= 1'b0;
    end else if (in_valid && in_ready) begin
      wr_idx <= wr_done ? '0 : wr_idx + 1'b1;
      if (wr_done) wr_bank <= !wr_bank;
    end
  end

  // bank occupancy: set when a frame is complete, cleared when its windows are out
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bank_full <= '0;
    end else begin
      for (int k = 0; k < 2; k++) begin
        if (wr_done && wr_bank == k[0])      bank_full[k] <= 1'b1;
        else if (rd_done && rd_bank == k[0]) bank_full[k] <= 1'b0;
      end
    end
  end

  // read side: innermost to outermost cf, kx, ky, ox, oy
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_bank <= 1'b0;
      {oy, ox, ky, kx, cf} <= '0;
    end else if (out_valid && out_ready) begin
      if (cf != CW'(CF-1)) cf <= cf + 1'b1;
      else begin
        cf <= '0;
        if (kx != KW'(K-1)) kx <= kx + 1'b1;
        else begin
          kx <= '0;
          if (ky != KW'(K-1)) ky <= ky + 1'b1;
          else begin
            ky <= '0;
            if (ox != DW'(OFM_DIM-1)) ox <= ox + 1'b1;
            else begin
              ox <= '0;
              if (oy != DW'(OFM_DIM-1)) oy <= oy + 1'b1;
              else begin
                oy      <= '0;
                rd_bank <= !rd_bank;
              end
            end
          end
        end
      end
    end
  end

  initial begin
    assert (IFM_CH % SIMD == 0 && K <= IFM_DIM) else $fatal(1, "swu: SIMD must divide IFM_CH and K <= IFM_DIM");
  end
endmodule
