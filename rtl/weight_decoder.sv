// weight_decoder: turns PE x SIMD encoded weights into fixed-point values.
//
// Every processing engine (PE) owns a private copy of the layer's weight
// codebook (2^WBITS signed 32-bit entries), so all PEs decode their SIMD
// weights in the same cycle without sharing a read port; this replication is
// what the paper prescribes. A codebook write (cb_we) updates every copy at
// once, which keeps the copies identical; that broadcast is this design's
// choice. Reads are combinational.
module weight_decoder
  import codex_pkg::*;
#(
  parameter int PE    = 2,
  parameter int SIMD  = 2,
  parameter int WBITS = 3
) (
  input  logic                      clk,
  input  logic                      cb_we,
  input  logic [WBITS-1:0]          cb_addr,
  input  fx_t                       cb_data,
  input  logic [PE*SIMD*WBITS-1:0]  codes,
  output fx_t                       values [PE][SIMD]
);
  fx_t codebook [PE][2**WBITS];   // one copy per PE

  always_ff @(posedge clk) begin
    if (cb_we)
      for (int p = 0; p < PE; p++) codebook[p][cb_addr] <= cb_data;
  end

  always_comb begin
    for (int p = 0; p < PE; p++)
      for (int s = 0; s < SIMD; s++)
        values[p][s] = codebook[p][codes[(p*SIMD+s)*WBITS +: WBITS]];
  end
endmodule
