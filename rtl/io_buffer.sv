// io_buffer: FIFO of chiplet link words between a chip and a photonic link.
//
// OFHE moves FFT jobs and results over photonic chiplet links whose PHY
// transfers 1 KB at a time. Each end buffers whole link words: the CMOS
// chip has eight 4 KB buffers (here one outbound and one inbound per link,
// DEPTH = 4) and each photonic chip one 32 KB buffer (DEPTH = 32). This is
// a first-word-fall-through FIFO: `dout` shows the oldest word whenever
// `empty` is low; `pop` removes it, `push` appends `din` when not `full`.
// Push and pop may happen in the same cycle. Pushing when full or popping
// when empty is a protocol error, flagged by assertions and ignored.
// The buffer sizes follow the paper; their organisation as FIFOs of link
// words is this design's choice.
module io_buffer #(
  parameter int unsigned WORD_BITS = 8192,
  parameter int unsigned DEPTH     = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push,
  input  logic [WORD_BITS-1:0] din,
  output logic                 full,
  input  logic                 pop,
  output logic [WORD_BITS-1:0] dout,
  output logic                 empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WORD_BITS-1:0] mem [DEPTH];
  logic [AW-1:0]        wp, rp;
  logic                 do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(do_push) - ($clog2(DEPTH)+1)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);
endmodule
