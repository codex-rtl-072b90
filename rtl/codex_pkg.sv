// codex_pkg: types and constants shared by the encoded-DNN streaming engine.
//
// Every decoded activation, decoded weight, accumulator and batch-norm
// parameter is a signed 32-bit fixed-point number. The paper stores codebook
// values "in fixed-point (e.g, 32 bits)"; the split into 16 integer and 16
// fractional bits (Q15.16) is this design's choice. fx_mul() is the one
// product rule used everywhere: full 64-bit product, arithmetic shift right by
// FRAC, keep the low 32 bits (wrap, no saturation).
//
// Parameters, codebooks and encoded weights are loaded through one write-only
// configuration bus (cfg_t). The selector says which memory of which layer is
// written; the remaining fields address it. The bus format is this design's
// own; the paper only says the compiler puts the encoded parameters "into a
// format ready for loading to the FPGA on-chip memory".
package codex_pkg;

  localparam int FX_W = 32;   // fixed-point word
  localparam int FRAC = 16;   // fractional bits

  typedef logic signed [FX_W-1:0] fx_t;

  // Memory selector of a configuration write.
  typedef enum logic [2:0] {
    CFG_WEIGHT   = 3'd0,  // one encoded weight code
    CFG_WCB      = 3'd1,  // weight codebook entry
    CFG_ICB      = 3'd2,  // input codebook entry
    CFG_OCB      = 3'd3,  // output (encoder) codebook entry
    CFG_BN_ALPHA = 3'd4,  // batch-norm scale of one neuron
    CFG_BN_BETA  = 3'd5   // batch-norm offset of one neuron
  } cfg_sel_e;

  typedef struct packed {
    logic        en;      // write strobe
    logic [3:0]  layer;   // target layer (used by the top only)
    cfg_sel_e    sel;     // target memory
    logic [7:0]  pe;      // PE index (weights, batch norm)
    logic [7:0]  lane;    // SIMD lane (weights)
    logic [19:0] addr;    // word / neuron-fold / codebook index
    logic [31:0] data;    // code (low bits) or fixed-point value
  } cfg_t;

  // Q15.16 product, truncated to 32 bits.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC);
  endfunction

endpackage
