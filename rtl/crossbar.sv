// crossbar: MASTERS x BANKS crossbar between the cores and the SPM banks.
//
// Every master presents at most one request per cycle (m_req, m_we, a word
// address m_addr whose low log2(BANKS) bits select the bank, m_wdata). Each
// bank has its own round-robin arbiter: among the masters addressing it,
// the first one at or after the bank's priority pointer is granted, and the
// pointer moves past the winner. `m_gnt` is returned combinationally in
// the same cycle; an ungranted master must hold its request. For a granted
// read, m_rvalid rises one cycle later with the bank's word on m_rdata.
// The bank side (b_*) connects straight to spm port A. Up to min(MASTERS,
// BANKS) accesses complete per cycle when addresses spread over banks.
// The 8 x 32 size and 256-bit words follow the paper; the arbitration and
// timing are this design's choices.
module crossbar #(
  parameter int unsigned MASTERS    = 8,
  parameter int unsigned BANKS      = 32,
  parameter int unsigned WORD_BITS  = 256,
  parameter int unsigned ROW_BITS   = 11
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [MASTERS-1:0]                   m_req,
  input  logic [MASTERS-1:0]                   m_we,
  input  logic [MASTERS-1:0][ROW_BITS+$clog2(BANKS)-1:0] m_addr,
  input  logic [MASTERS-1:0][WORD_BITS-1:0]    m_wdata,
  output logic [MASTERS-1:0]                   m_gnt,
  output logic [MASTERS-1:0]                   m_rvalid,
  output logic [MASTERS-1:0][WORD_BITS-1:0]    m_rdata,
  output logic [BANKS-1:0]                     b_req,
  output logic [BANKS-1:0]                     b_we,
  output logic [BANKS-1:0][ROW_BITS-1:0]       b_addr,
  output logic [BANKS-1:0][WORD_BITS-1:0]      b_wdata,
  input  logic [BANKS-1:0][WORD_BITS-1:0]      b_rdata
);
  localparam int unsigned BW = $clog2(BANKS);
  localparam int unsigned MW = (MASTERS > 1) ? $clog2(MASTERS) : 1;

  logic [BANKS-1:0][MW-1:0] ptr;         // round-robin pointer per bank
  logic [BANKS-1:0][MW-1:0] win;         // winner per bank
  logic [BANKS-1:0]         has;         // bank has a winner
  logic [MASTERS-1:0][BW-1:0] m_bank_q;  // bank of the read in flight

  // arbitration
  always_comb begin
    m_gnt = '0;
    for (int b = 0; b < BANKS; b++) begin
      has[b] = 1'b0;
      win[b] = '0;
      for (int k = 0; k < MASTERS; k++) begin
        int unsigned m;
        m = (int'(ptr[b]) + k) % MASTERS;
        if (!has[b] && m_req[m] && (m_addr[m][BW-1:0] == BW'(b))) begin
          has[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      b_req[b]   = has[b];
      b_we[b]    = m_we[win[b]];
      b_addr[b]  = m_addr[win[b]][BW +: ROW_BITS];
      b_wdata[b] = m_wdata[win[b]];
      if (has[b]) m_gnt[win[b]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr      <= '0;
      m_rvalid <= '0;
      m_bank_q <= '0;
    end else begin
      for (int b = 0; b < BANKS; b++)
        if (has[b]) ptr[b] <= MW'((int'(win[b]) + 1) % MASTERS);
      for (int m = 0; m < MASTERS; m++) begin
        m_rvalid[m] <= m_gnt[m] && !m_we[m];
        if (m_gnt[m]) m_bank_q[m] <= m_addr[m][BW-1:0];
      end
    end
  end

  always_comb
    for (int m = 0; m < MASTERS; m++) m_rdata[m] = b_rdata[m_bank_q[m]];

  // a request must stay until it is granted
  for (genvar m = 0; m < MASTERS; m++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (m_req[m] && !m_gnt[m]) |=> m_req[m]);
  end
endmodule
