// output_encoder: ReLU plus nearest-neighbour encoding of PE fixed-point values.
//
// For each value y it returns argmin_k |y - c[k]| over the layer's output
// codebook c (2^OBITS signed 32-bit entries): the index of the closest
// cluster centre, which is what travels to the next layer. The codebook is
// loaded with c[0] = 0 and the other centres positive and ascending, so any
// negative y lands on code 0 and ReLU comes for free, as the paper
// describes. The search here compares against all entries in parallel in
// one combinational step; on a tie the lower index wins. Both are this
// design's choices. Distances are computed in 33 bits, so they never wrap.
module output_encoder
  import codex_pkg::*;
#(
  parameter int PE    = 2,
  parameter int OBITS = 2
) (
  input  logic                  clk,
  input  logic                  cb_we,
  input  logic [OBITS-1:0]      cb_addr,
  input  fx_t                   cb_data,
  input  fx_t                   y [PE],
  output logic [PE*OBITS-1:0]   codes
);
  localparam int K = 2**OBITS;

  fx_t codebook [K];

  always_ff @(posedge clk) begin
    if (cb_we) codebook[cb_addr] <= cb_data;
  end

  always_comb begin
    logic signed [FX_W:0] diff;
    logic        [FX_W:0] dst, best;
    logic        [OBITS-1:0] idx;
    codes = '0;
    for (int p = 0; p < PE; p++) begin
      best = '1;
      idx  = '0;
      for (int k = 0; k < K; k++) begin
        diff = (FX_W+1)'(y[p]) - (FX_W+1)'(codebook[k]);
        dst = (diff < 0) ? (FX_W+1)'(-diff) : (FX_W+1)'(diff);
        if (k == 0 || dst < best) begin
          best = dst;
          idx  = OBITS'(k);
        end
      end
      codes[p*OBITS +: OBITS] = idx;
    end
  end
endmodule
