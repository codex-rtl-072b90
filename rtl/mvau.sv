// mvau: Matrix-Vector-Activation Unit with codebook-encoded inputs, weights
// and outputs.
//
// It computes, for each input vector x of MW activations, the MH outputs
// enc(alpha_r * (sum_c W[r][c] * x[c]) + beta_r). Inputs, weights and outputs
// are stored and streamed as small codebook indices; arithmetic is 32-bit
// fixed point on decoded values. PE engines run in parallel, each handling
// SIMD columns per cycle, so one input vector takes SF*NF cycles with
// SF = MW/SIMD synapse folds and NF = MH/PE neuron folds. Per cycle:
//
//   codes -> input_decoder -> SIMD x 32 bit  \
//                                              pe[0..PE-1] -> batch_norm -> output_encoder
//   weight_mem -> weight_decoder -> PE x SIMD x 32 bit /
//
// The block structure (input decoder, weight memory and per-PE weight
// decoder, SIMD-lane PEs, one multiply and one add of batch norm per PE,
// nearest-neighbour output encoder) follows the paper. The schedule follows
// the FINN library the paper extends: during neuron fold 0 each input word is
// taken from the stream and also kept, still encoded, in an input buffer;
// the other folds re-read that buffer. With ENC_OUT = 0 (the network's last
// layer) the batch-normalised 32-bit values are sent out unencoded.
//
// Interface: in_valid/in_ready/in_data carries SIMD input codes per word
// (lane 0 in the low bits); out_valid/out_ready/out_data carries PE results
// per word (PE 0 in the low bits), word nf holding neurons nf*PE .. nf*PE+PE-1.
// Outputs sit in a register; while it is full and not taken, the unit stalls
// in the last synapse fold. cfg writes with cfg.layer == LAYER load the
// memories (see codex_pkg::cfg_sel_e). Latency: the output word of neuron
// fold nf is valid the cycle after its last synapse fold.
module mvau
  import codex_pkg::*;
#(
  parameter int MW      = 8,
  parameter int MH      = 4,
  parameter int SIMD    = 2,
  parameter int PE      = 2,
  parameter int IBITS   = 2,
  parameter int WBITS   = 3,
  parameter int OBITS   = 2,
  parameter bit ENC_OUT = 1'b1,
  parameter int LAYER   = 0,
  localparam int OUT_W  = ENC_OUT ? PE*OBITS : PE*FX_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_t                   cfg,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [SIMD*IBITS-1:0]  in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [OUT_W-1:0]       out_data
);
  localparam int SF  = MW / SIMD;
  localparam int NF  = MH / PE;
  localparam int SFW = (SF > 1) ? $clog2(SF) : 1;
  localparam int NFW = (NF > 1) ? $clog2(NF) : 1;
  localparam int WD  = SF * NF;
  localparam int WAW = (WD > 1) ? $clog2(WD) : 1;
  localparam int PW  = (PE > 1) ? $clog2(PE) : 1;
  localparam int LW  = (SIMD > 1) ? $clog2(SIMD) : 1;

  // ---------------- configuration decode ----------------
  logic cfg_here;
  assign cfg_here = cfg.en && (cfg.layer == 4'(LAYER));

  // ---------------- fold counters and input buffer ----------------
  logic [SFW-1:0]          sf;
  logic [NFW-1:0]          nf;
  logic [WAW-1:0]          waddr;
  logic [SIMD*IBITS-1:0]   ibuf [SF];
  logic [SIMD*IBITS-1:0]   codes;
  logic                    last_sf, last_nf, stall, step;

  assign last_sf  = (sf == SFW'(SF-1));
  assign last_nf  = (nf == NFW'(NF-1));
  assign stall    = last_sf && out_valid && !out_ready;
  assign step     = !stall && ((nf != '0) || in_valid);
  assign in_ready = (nf == '0) && !stall;
  assign codes    = (nf == '0) ? in_data : ibuf[sf];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sf    <= '0;
      nf    <= '0;
      waddr <= '0;
    end else if (step) begin
      if (last_sf) begin
        sf <= '0;
        if (last_nf) begin
          nf    <= '0;
          waddr <= '0;
        end else begin
          nf    <= nf + 1'b1;
          waddr <= waddr + 1'b1;
        end
      end else begin
        sf    <= sf + 1'b1;
        waddr <= waddr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (step && nf == '0) ibuf[sf] <= codes;
  end

  // ---------------- datapath ----------------
  fx_t                      xval [SIMD];
  logic [PE*SIMD*WBITS-1:0] wcodes;
  fx_t                      wval [PE][SIMD];
  fx_t                      psum [PE];
  fx_t                      bn   [PE];

  input_decoder #(.SIMD(SIMD), .IBITS(IBITS)) u_idec (
    .clk     (clk),
    .cb_we   (cfg_here && cfg.sel == CFG_ICB),
    .cb_addr (cfg.addr[IBITS-1:0]),
    .cb_data (fx_t'(cfg.data)),
    .codes   (codes),
    .values  (xval)
  );

  weight_mem #(.PE(PE), .SIMD(SIMD), .WBITS(WBITS), .DEPTH(WD)) u_wmem (
    .clk      (clk),
    .wr_en    (cfg_here && cfg.sel == CFG_WEIGHT),
    .wr_pe    (cfg.pe[PW-1:0]),
    .wr_addr  (cfg.addr[WAW-1:0]),
    .wr_lane  (cfg.lane[LW-1:0]),
    .wr_code  (cfg.data[WBITS-1:0]),
    .rd_addr  (waddr),
    .rd_codes (wcodes)
  );

  weight_decoder #(.PE(PE), .SIMD(SIMD), .WBITS(WBITS)) u_wdec (
    .clk     (clk),
    .cb_we   (cfg_here && cfg.sel == CFG_WCB),
    .cb_addr (cfg.addr[WBITS-1:0]),
    .cb_data (fx_t'(cfg.data)),
    .codes   (wcodes),
    .values  (wval)
  );

  for (genvar p = 0; p < PE; p++) begin : g_pe
    pe #(.SIMD(SIMD)) u_pe (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (step),
      .first (sf == '0),
      .x     (xval),
      .w     (wval[p]),
      .sum   (psum[p]),
      .acc   ()
    );
  end

  batch_norm #(.PE(PE), .NF(NF)) u_bn (
    .clk     (clk),
    .wr_en   (cfg_here && (cfg.sel == CFG_BN_ALPHA || cfg.sel == CFG_BN_BETA)),
    .wr_sel  (cfg.sel == CFG_BN_BETA),
    .wr_pe   (cfg.pe[PW-1:0]),
    .wr_addr (cfg.addr[NFW-1:0]),
    .wr_data (fx_t'(cfg.data)),
    .nf      (nf),
    .x       (psum),
    .y       (bn)
  );

  logic [OUT_W-1:0] result;

  if (ENC_OUT) begin : g_enc
    output_encoder #(.PE(PE), .OBITS(OBITS)) u_enc (
      .clk     (clk),
      .cb_we   (cfg_here && cfg.sel == CFG_OCB),
      .cb_addr (cfg.addr[OBITS-1:0]),
      .cb_data (fx_t'(cfg.data)),
      .y       (bn),
      .codes   (result)
    );
  end else begin : g_raw
    always_comb
      for (int p = 0; p < PE; p++) result[p*FX_W +: FX_W] = bn[p];
  end

  // ---------------- output register ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (step && last_sf) begin
      out_valid <= 1'b1;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (step && last_sf) out_data <= result;
  end

  // The output word must not change while it waits.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data)))
    else $error("mvau: output changed while stalled");

  initial begin
    assert (MW % SIMD == 0 && MH % PE == 0) else $fatal(1, "mvau: SIMD must divide MW and PE must divide MH");
  end
endmodule
