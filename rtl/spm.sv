// spm: banked on-chip scratchpad memory of the OFHE CMOS chip.
//
// 2 MB in BANKS = 32 banks of BANK_WORDS = 2048 words of 256 bits. Port A
// is one independent port per bank, driven by the crossbar: a request with
// a_we writes a_wdata to row a_addr, a request without it reads, and the
// read word appears on a_rdata one cycle later. Port B is one port with a
// full word address (bank = b_addr[4:0], row = b_addr[15:5], i.e. words
// are interleaved across banks) for the off-chip memory controller; its
// read data also arrive one cycle later. Both ports may hit the same bank
// in one cycle; if both write the same word, port B's data are kept.
// The capacity and bank count follow the paper; the ports, interleaving
// and latency are this design's choices.
module spm #(
  parameter int unsigned BANKS      = 32,
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned WORD_BITS  = 256
) (
  input  logic                             clk,
  // port A: one port per bank
  input  logic [BANKS-1:0]                 a_req,
  input  logic [BANKS-1:0]                 a_we,
  input  logic [BANKS-1:0][$clog2(BANK_WORDS)-1:0] a_addr,
  input  logic [BANKS-1:0][WORD_BITS-1:0]  a_wdata,
  output logic [BANKS-1:0][WORD_BITS-1:0]  a_rdata,
  // port B: external (memory controller) port
  input  logic                             b_req,
  input  logic                             b_we,
  input  logic [$clog2(BANKS)+$clog2(BANK_WORDS)-1:0] b_addr,
  input  logic [WORD_BITS-1:0]             b_wdata,
  output logic [WORD_BITS-1:0]             b_rdata
);
  localparam int unsigned BW = $clog2(BANKS);
  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic [BW-1:0] b_bank, b_bank_q;
  logic [RW-1:0] b_row;
  assign b_bank = b_addr[BW-1:0];
  assign b_row  = b_addr[BW +: RW];

  logic [BANKS-1:0][WORD_BITS-1:0] b_rd_bank;

  for (genvar g = 0; g < BANKS; g++) begin : g_bank
    logic [WORD_BITS-1:0] mem [BANK_WORDS];
    logic                 b_hit;
    assign b_hit = b_req && (b_bank == BW'(g));

    always_ff @(posedge clk) begin
      if (a_req[g] && a_we[g]) mem[a_addr[g]] <= a_wdata[g];
      if (b_hit && b_we)       mem[b_row]     <= b_wdata;
    end
    always_ff @(posedge clk) begin
      if (a_req[g] && !a_we[g]) a_rdata[g]   <= mem[a_addr[g]];
      if (b_hit && !b_we)       b_rd_bank[g] <= mem[b_row];
    end
  end

  always_ff @(posedge clk) b_bank_q <= b_bank;
  assign b_rdata = b_rd_bank[b_bank_q];

  initial assert ((BANKS & (BANKS - 1)) == 0 && (BANK_WORDS & (BANK_WORDS - 1)) == 0);
endmodule
