// input_decoder: turns SIMD encoded activations into SIMD fixed-point values.
//
// Each activation arrives as an IBITS-wide index into the layer's input
// codebook, a table of 2^IBITS signed 32-bit fixed-point cluster centres.
// All SIMD lanes read the one codebook at the same time, so a whole SIMD
// group is decoded per cycle, as the paper describes. The codebook is a
// register array written one entry at a time through cb_we/cb_addr/cb_data
// (loading scheme is this design's own); the read is combinational, so
// values follows codes in the same cycle.
module input_decoder
  import codex_pkg::*;
#(
  parameter int SIMD  = 4,
  parameter int IBITS = 2
) (
  input  logic                   clk,
  input  logic                   cb_we,
  input  logic [IBITS-1:0]       cb_addr,
  input  fx_t                    cb_data,
  input  logic [SIMD*IBITS-1:0]  codes,
  output fx_t                    values [SIMD]
);
  fx_t codebook [2**IBITS];

  always_ff @(posedge clk) begin
    if (cb_we) codebook[cb_addr] <= cb_data;
  end

  always_comb begin
    for (int s = 0; s < SIMD; s++)
      values[s] = codebook[codes[s*IBITS +: IBITS]];
  end
endmodule
