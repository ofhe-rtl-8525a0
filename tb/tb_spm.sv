// tb_spm: self-checking test of the banked scratchpad. Writes and reads
// random words through both ports against an associative-array model,
// checks the one-cycle read latency, that port A banks work in parallel,
// and that port B's word address is interleaved as bank = addr[4:0].
module tb_spm;
  localparam int NB = 32, BWDS = 2048, W = 256, RW = 11;
  logic clk = 0;
  logic [NB-1:0] a_req, a_we;
  logic [NB-1:0][RW-1:0] a_addr;
  logic [NB-1:0][W-1:0] a_wdata, a_rdata;
  logic b_req, b_we;
  logic [15:0] b_addr;
  logic [W-1:0] b_wdata, b_rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [int];

  spm #(.BANKS(NB), .BANK_WORDS(BWDS), .WORD_BITS(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v; for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom; return v;
  endfunction

  initial begin
    a_req = '0; a_we = '0; a_addr = '0; a_wdata = '0; b_req = 0; b_we = 0; b_addr = '0; b_wdata = '0;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      int row [NB];
      logic [15:0] ba;
      // all 32 banks written in one cycle through port A
      for (int b = 0; b < NB; b++) begin
        row[b] = $urandom % BWDS;
        a_req[b] = 1; a_we[b] = 1; a_addr[b] = RW'(row[b]); a_wdata[b] = rnd();
        model[row[b]*NB + b] = a_wdata[b];
      end
      // port B writes a word of another row in the same cycle
      ba = 16'($urandom);
      while (model.exists(int'(ba))) ba = 16'($urandom);
      b_req = 1; b_we = 1; b_addr = ba; b_wdata = rnd(); model[int'(ba)] = b_wdata;
      @(negedge clk);
      // read back: A reads what B wrote (by bank/row), B reads what A wrote in bank 7
      a_req = '0; a_we = '0;
      a_req[ba[4:0]] = 1; a_addr[ba[4:0]] = ba[15:5];
      b_we = 0; b_addr = {5'(row[7]), 5'd7}; b_addr[15:5] = RW'(row[7]);
      for (int b = 0; b < NB; b++) if (b != int'(ba[4:0])) begin a_req[b] = 1; a_addr[b] = RW'(row[b]); end
      @(negedge clk);
      checks++; if (a_rdata[ba[4:0]] !== model[int'(ba)]) begin failures++; $display("FAIL A reads B's word"); end
      checks++; if (b_rdata !== model[row[7]*NB + 7]) begin failures++; $display("FAIL B reads A's word"); end
      for (int b = 0; b < NB; b++) if (b != int'(ba[4:0])) begin
        checks++; if (a_rdata[b] !== model[row[b]*NB + b]) begin failures++; $display("FAIL bank %0d", b); end
      end
      a_req = '0; b_req = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
