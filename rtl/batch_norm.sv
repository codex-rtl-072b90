// batch_norm: folded batch normalisation, y = alpha * x + beta, per neuron.
//
// The paper reduces batch normalisation to one multiplication and one
// addition per PE. alpha and beta are per output neuron, so this block keeps
// two small tables per PE, indexed by the neuron fold nf (neuron = nf*PE+p).
// The product uses the shared Q15.16 rule. The read is combinational: y
// follows x and nf in the same cycle. Tables are written one entry per cycle
// (wr_sel 0 = alpha, 1 = beta); the table layout is this design's choice.
module batch_norm
  import codex_pkg::*;
#(
  parameter int PE = 2,
  parameter int NF = 4
) (
  input  logic                                   clk,
  input  logic                                   wr_en,
  input  logic                                   wr_sel,
  input  logic [(PE > 1 ? $clog2(PE) : 1)-1:0]   wr_pe,
  input  logic [(NF > 1 ? $clog2(NF) : 1)-1:0]   wr_addr,
  input  fx_t                                    wr_data,
  input  logic [(NF > 1 ? $clog2(NF) : 1)-1:0]   nf,
  input  fx_t                                    x [PE],
  output fx_t                                    y [PE]
);
  fx_t alpha [PE][NF];
  fx_t beta  [PE][NF];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (wr_sel) beta[wr_pe][wr_addr]  <= wr_data;
      else        alpha[wr_pe][wr_addr] <= wr_data;
    end
  end

  always_comb begin
    for (int p = 0; p < PE; p++) y[p] = fx_mul(alpha[p][nf], x[p]) + beta[p][nf];
  end
endmodule
