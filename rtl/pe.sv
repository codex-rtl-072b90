// pe: one processing engine of the matrix-vector unit.
//
// Each cycle it multiplies SIMD decoded inputs by SIMD decoded weights in
// fixed point (Q15.16 products, see codex_pkg::fx_mul), adds them up and adds
// the result to its accumulator; over MW/SIMD cycles this builds the dot
// product of one neuron. The paper gives the SIMD-lane MAC structure and the
// 32-bit operands; the number format and wrap-around arithmetic are this
// design's choices.
//
// Timing: when en is high the accumulator register takes sum at the clock
// edge. first restarts the accumulation (the registered value is ignored).
// sum is combinational: it already includes this cycle's products, so the
// MVAU can take the finished dot product in the cycle of the last fold.
module pe
  import codex_pkg::*;
#(
  parameter int SIMD = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic first,
  input  fx_t  x [SIMD],
  input  fx_t  w [SIMD],
  output fx_t  sum,
  output fx_t  acc
);
  fx_t dot;

  always_comb begin
    dot = '0;
    for (int s = 0; s < SIMD; s++) dot = dot + fx_mul(x[s], w[s]);
    sum = (first ? fx_t'(0) : acc) + dot;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= sum;
  end
endmodule
