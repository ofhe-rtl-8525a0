// tb_ofhe_core: self-checking test of one CMOS core with FFT links.
// A memory model answers the crossbar port (random grant stalls, one-cycle
// reads); a link model answers FFT jobs with a known function of the job
// (point value * 3 + link number, after a random delay) and asserts
// back-pressure at random. For each width m the test loads a random 1 KB
// block, runs ADD, MUL, CONJ, TRANS and FFT, stores each output register and
// compares every element with values computed here. ADD and MUL must take
// m cycles of serial work (command-to-done between m+2 and m+5 cycles).
module tb_ofhe_core;
  import ofhe_pkg::*;
  localparam int NLK = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  core_cmd_t cmd;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [SPM_AW-1:0] m_addr;
  logic [NOC_BITS-1:0] m_wdata, m_rdata;
  width_e fft_mode;
  logic [NLK-1:0] job_push, job_full, res_pop, res_empty;
  logic [NLK-1:0][LINK_BITS-1:0] job_data, res_data;
  int checks = 0, failures = 0;

  ofhe_core #(.HAS_FFT(1'b1), .NUM_LINKS(NLK)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- memory model
  logic [NOC_BITS-1:0] mem [int];
  logic gnt_rnd;
  always @(negedge clk) gnt_rnd = ($urandom % 10) < 7;
  assign m_gnt = m_req && gnt_rnd;
  always_ff @(posedge clk) begin
    m_rvalid <= m_req && m_gnt && !m_we;
    if (m_req && m_gnt) begin
      if (m_we) mem[int'(m_addr)] = m_wdata;
      else      m_rdata <= mem.exists(int'(m_addr)) ? mem[int'(m_addr)] : '0;
    end
  end

  // ---------------- link model
  logic [LINK_BITS-1:0] rq [NLK][$];
  int                   rdy [NLK][$];
  int                   cyc = 0;
  width_e               jmode;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) for (int g = 0; g < NLK; g++) job_full[g] = ($urandom % 4) == 0;
  always_comb for (int g = 0; g < NLK; g++) begin
    res_empty[g] = (rq[g].size() == 0) || (rdy[g][0] > cyc);
    res_data[g]  = (rq[g].size() == 0) ? '0 : rq[g][0];
  end
  always @(posedge clk) begin
    for (int g = 0; g < NLK; g++) begin
      if (res_pop[g]) begin void'(rq[g].pop_front()); void'(rdy[g].pop_front()); end
      if (job_push[g]) begin
        logic [LINK_BITS-1:0] r;
        if (job_full[g]) begin failures++; $display("FAIL push while full"); end
        for (int i = 0; i < FFT_POINTS; i++)
          r[i*MAX_W +: MAX_W] = mask_w(fft_mode, job_data[g][i*MAX_W +: MAX_W] * 3 + MAX_W'(g));
        rq[g].push_back(r); rdy[g].push_back(cyc + 10 + int'($urandom % 40));
      end
    end
  end

  // ---------------- helpers
  logic [8191:0] D, O;
  function automatic logic [MAX_W-1:0] el(logic [8191:0] r, int m, int i);
    logic [MAX_W-1:0] v; v = '0;
    for (int b = 0; b < m; b++) v[b] = r[i*m + b];
    return v;
  endfunction

  task automatic issue(core_op_e op, width_e w, int addr, int rl = 0, int cl = 0, output int lat);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd.op = op; cmd.mode = w; cmd.addr = SPM_AW'(addr); cmd.rows_log2 = 3'(rl); cmd.cols_log2 = 3'(cl);
    cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  task automatic fetch(int addr);   // read 32 words of the memory model
    for (int k = 0; k < 32; k++) O[k*256 +: 256] = mem.exists(addr + k) ? mem[addr + k] : '0;
  endtask

  task automatic cmp(string what, int m, int i, logic [MAX_W-1:0] got, logic [MAX_W-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s m=%0d elem %0d got %h exp %h", what, m, i, got, exp); end
  endtask

  initial begin
    int lat;
    cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int wi = 0; wi < 3; wi++) begin
      width_e w; int m, E, P;
      w = width_e'(wi); m = width_bits(w); E = 8192 / m; P = E / 2;
      for (int k = 0; k < 32; k++) begin
        logic [255:0] v; for (int j = 0; j < 8; j++) v[j*32 +: 32] = $urandom;
        mem[k] = v; D[k*256 +: 256] = v;
      end
      issue(OP_LOAD, w, 0, 0, 0, lat);
      // ADD
      issue(OP_ADD, w, 0, 0, 0, lat);
      checks++; if (lat < m + 2 || lat > m + 5) begin failures++; $display("FAIL ADD latency %0d for m=%0d", lat, m); end
      issue(OP_STORE, w, 1000, 0, 0, lat); fetch(1000);
      for (int i = 0; i < P; i++) cmp("add", m, i, el(O, m, i), mask_w(w, el(D, m, i) + el(D, m, P + i)));
      for (int i = P; i < E; i++) cmp("add-hi", m, i, el(O, m, i), '0);
      // MUL
      issue(OP_MUL, w, 0, 0, 0, lat);
      checks++; if (lat < m + 2 || lat > m + 5) begin failures++; $display("FAIL MUL latency %0d", lat); end
      issue(OP_STORE, w, 2000, 0, 0, lat); fetch(2000);
      for (int i = 0; i < P; i++) begin
        logic [2*MAX_W-1:0] pr;
        pr = (2*MAX_W)'(el(D, m, i)) * (2*MAX_W)'(el(D, m, P + i));
        cmp("mul-lo", m, i, el(O, m, i), mask_w(w, pr[MAX_W-1:0]));
        cmp("mul-hi", m, i, el(O, m, P + i), mask_w(w, MAX_W'(pr >> m)));
      end
      // CONJ
      issue(OP_CONJ, w, 0, 0, 0, lat);
      issue(OP_STORE, w, 3000, 0, 0, lat); fetch(3000);
      for (int i = 0; i < P; i++) begin
        cmp("conj-re", m, 2*i, el(O, m, 2*i), el(D, m, 2*i));
        cmp("conj-im", m, 2*i+1, el(O, m, 2*i+1), mask_w(w, -el(D, m, 2*i+1)));
      end
      // TRANS: each quarter (E/4 elements) as R x C
      begin
        int q4, l2, rl, cl, R, C;
        q4 = E / 4; l2 = $clog2(q4); rl = l2 / 2; cl = l2 - rl; R = 1 << rl; C = 1 << cl;
        issue(OP_TRANS, w, 0, rl, cl, lat);
        issue(OP_STORE, w, 4000, 0, 0, lat); fetch(4000);
        for (int q = 0; q < 4; q++)
          for (int r = 0; r < R; r++)
            for (int c = 0; c < C; c++)
              cmp("trans", m, q*q4 + c*R + r, el(O, m, q*q4 + c*R + r), el(D, m, q*q4 + r*C + c));
      end
      // FFT through the link model
      issue(OP_FSEND, w, 0, 0, 0, lat);
      issue(OP_FRECV, w, 0, 0, 0, lat);
      issue(OP_STORE, w, 5000, 0, 0, lat); fetch(5000);
      for (int i = 0; i < E && i < NLK * 64; i++)
        cmp("fft", m, i, el(O, m, i), mask_w(w, el(D, m, i) * 3 + MAX_W'(i / 64)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
