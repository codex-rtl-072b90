// weight_mem: on-chip store of a layer's encoded weights.
//
// The MH x MW weight matrix is kept as WBITS-bit codebook indices, split over
// the PEs the way the FINN streaming library (which the paper builds on)
// does: row r belongs to PE r % PE, and its columns are cut into MW/SIMD
// words of SIMD codes. Word (r/PE)*(MW/SIMD) + c/SIMD of that PE holds column
// c in lane c % SIMD. One read address serves all PEs at once: rd_codes holds
// SIMD codes for each PE, PE 0 in the low bits, combinationally from rd_addr.
// Writes store one code per cycle (wr_pe, wr_addr, wr_lane); this per-code
// loading port is this design's choice.
module weight_mem #(
  parameter int PE    = 2,
  parameter int SIMD  = 2,
  parameter int WBITS = 3,
  parameter int DEPTH = 8
) (
  input  logic                                       clk,
  input  logic                                       wr_en,
  input  logic [(PE   > 1 ? $clog2(PE)   : 1)-1:0]   wr_pe,
  input  logic [(DEPTH> 1 ? $clog2(DEPTH): 1)-1:0]   wr_addr,
  input  logic [(SIMD > 1 ? $clog2(SIMD) : 1)-1:0]   wr_lane,
  input  logic [WBITS-1:0]                           wr_code,
  input  logic [(DEPTH> 1 ? $clog2(DEPTH): 1)-1:0]   rd_addr,
  output logic [PE*SIMD*WBITS-1:0]                   rd_codes
);
  logic [WBITS-1:0] mem [PE][DEPTH][SIMD];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_pe][wr_addr][wr_lane] <= wr_code;
  end

  always_comb begin
    for (int p = 0; p < PE; p++)
      for (int s = 0; s < SIMD; s++)
        rd_codes[(p*SIMD+s)*WBITS +: WBITS] = mem[p][rd_addr][s];
  end
endmodule
