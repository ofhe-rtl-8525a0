// tb_crossbar: self-checking test of the core-to-SPM crossbar.
// Eight masters issue random reads and writes (holding each request until
// granted) to a bank model kept in this testbench. Checks: read data equal
// the last value written to that word, at most one grant per bank per
// cycle, every grant routed to the bank its address selects, and
// round-robin fairness (with all masters on one bank, no master waits more
// than MASTERS-1 cycles).
module tb_crossbar;
  localparam int M = 8, NB = 32, W = 256, RW = 11;
  logic clk = 0, rst_n = 0;
  logic [M-1:0] m_req, m_we, m_gnt, m_rvalid;
  logic [M-1:0][RW+4:0] m_addr;
  logic [M-1:0][W-1:0] m_wdata, m_rdata;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][RW-1:0] b_addr;
  logic [NB-1:0][W-1:0] b_wdata, b_rdata;
  int checks = 0, failures = 0;

  crossbar #(.MASTERS(M), .BANKS(NB), .WORD_BITS(W), .ROW_BITS(RW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // bank model: 64 rows per bank are enough for the test
  logic [W-1:0] mem [NB][64];
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++) if (b_req[b]) begin
      if (b_we[b]) mem[b][b_addr[b][5:0]] <= b_wdata[b];
      else         b_rdata[b] <= mem[b][b_addr[b][5:0]];
    end

  logic [W-1:0] shadow [int];
  logic [W-1:0] expect_q [M];
  logic         pend [M];
  int           wait_c [M];
  int           maxwait;
  bit           hot;
  logic [M-1:0] gnt_s;   // grants just before the clock edge

  initial begin
    for (int b = 0; b < NB; b++) for (int r = 0; r < 64; r++) mem[b][r] = '0;
    m_req = '0; m_we = '0; m_addr = '0; m_wdata = '0; b_rdata = '0;
    for (int i = 0; i < M; i++) begin pend[i] = 0; wait_c[i] = 0; end
    maxwait = 0; hot = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      hot = (t >= 1500 && t < 1800);   // everybody on bank 3
      for (int i = 0; i < M; i++) begin
        if (!m_req[i] && ($urandom % 4 != 0)) begin
          m_req[i] = 1; m_we[i] = ($urandom % 2 == 0);
          m_addr[i] = {6'($urandom), hot ? 5'd3 : 5'($urandom)};
          for (int k = 0; k < W/32; k++) m_wdata[i][k*32 +: 32] = $urandom;
          wait_c[i] = 0;
        end
      end
      #1;
      gnt_s = m_gnt;
      // grant checks (combinational)
      for (int b = 0; b < NB; b++) begin
        int n; n = 0;
        for (int i = 0; i < M; i++) if (m_gnt[i] && m_addr[i][4:0] == 5'(b)) n++;
        checks++; if (n > 1) begin failures++; $display("FAIL two grants to bank %0d", b); end
        if (b_req[b]) begin
          checks++; if (n != 1) begin failures++; $display("FAIL bank %0d request without its master", b); end
        end
      end
      @(posedge clk); #1;
      for (int i = 0; i < M; i++) begin
        if (m_req[i] && gnt_s[i]) begin
          int key; key = int'(m_addr[i][10:0]);
          if (m_we[i]) shadow[key] = m_wdata[i];
          else begin expect_q[i] = shadow.exists(key) ? shadow[key] : '0; pend[i] = 1; end
          if (wait_c[i] > maxwait && hot) maxwait = wait_c[i];
          m_req[i] = 0;
          m_addr[i] = 16'($urandom);   // idle masters drive garbage
        end else if (m_req[i]) wait_c[i]++;
      end
      @(negedge clk);
      for (int i = 0; i < M; i++) if (pend[i]) begin
        checks++;
        if (!m_rvalid[i] || m_rdata[i] !== expect_q[i]) begin failures++; $display("FAIL read data master %0d t=%0d", i, t); end
        pend[i] = 0;
      end
    end
    checks++; if (maxwait > M - 1 || maxwait == 0) begin failures++; $display("FAIL fairness: max wait %0d", maxwait); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
