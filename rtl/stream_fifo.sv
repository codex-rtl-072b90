// stream_fifo: the on-chip streaming buffer placed between layer engines.
//
// Encoded feature words leave one engine and wait here until the next engine
// takes them, so the engines of consecutive layers run at the same time and
// a slow consumer stalls its producer instead of losing data. The paper
// names these streaming buffers as the carrier of inter-layer features; that
// they are synchronous FIFOs with a valid/ready handshake on both sides, and
// their depth, are this design's choices.
//
// Interface: in_valid/in_ready/in_data (write side), out_valid/out_ready/
// out_data (read side). A word is transferred on a clock edge where valid and
// ready are both high. in_ready = not full, out_valid = not empty; out_data is
// the head word (first-word fall-through), so a word written in cycle t can
// be read from cycle t+1. DEPTH must be a power of two.
module stream_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr, rd_ptr;   // one extra bit tells full from empty
  logic             full, empty, push, pop;

  assign empty     = (wr_ptr == rd_ptr);
  assign full      = (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]) && (wr_ptr[AW] != rd_ptr[AW]);
  assign in_ready  = !full;
  assign out_valid = !empty;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  // A word offered must stay put until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> (in_valid && $stable(in_data));
  endproperty
  a_hold: assert property (p_hold) else $error("stream_fifo: input dropped while stalled");

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0) else $fatal(1, "DEPTH must be a power of two");
  end
endmodule
