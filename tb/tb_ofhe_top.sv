// tb_ofhe_top: end-to-end test of one CMOS chip with four photonic chips,
// at the default parameters (8 cores, 1K lanes, 6-bit ADCs, 4 KB / 32 KB
// link buffers, 2 MB SPM).
//  1. The SPM is filled through the external port.
//  2. All eight cores at once LOAD a block each (they collide on the same
//     banks), ADD at m = 64, and STORE; results are read back through the
//     external port and compared with sums computed here.
//  3. Core 0 runs 64-point FFTs on all four links at m = 32: six blocks are
//     sent back to back (FSEND) before any result is taken, so the inbound
//     buffers fill and the links stall; then FRECV/STORE six times. Each
//     output point is compared with a direct DFT computed here in floating
//     point; the allowed error is the worst case of 6-bit ADC rounding,
//     half a code per bit-plane, i.e. 2^m/128 output units plus 2.
//  4. The link width is switched to 128 and to 64 bits and checked the same
//     way; one FFT's latency is checked against m + 2 pipeline cycles plus
//     the buffer and command overhead.
//  5. CONJ, MUL and TRANS run on other cores and are checked.
// Each mechanism (bank conflict, link stall, four links in parallel, each
// width, conjugation, multiplication, transposition) is counted and must
// occur at least once.
module tb_ofhe_top;
  import ofhe_pkg::*;
  localparam int NC = 8, NL = 4;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic [NC-1:0] cmd_valid = '0, cmd_ready, cmd_done;
  core_cmd_t [NC-1:0] cmd;
  logic ext_req = 0, ext_we = 0;
  logic [SPM_AW-1:0] ext_addr;
  logic [NOC_BITS-1:0] ext_wdata, ext_rdata;
  logic [NL-1:0] link_load, link_stall;
  int checks = 0, failures = 0;

  ofhe_top dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- mechanism counters
  int n_conflict = 0, n_stall = 0, n_par4 = 0, n_w32 = 0, n_w64 = 0, n_w128 = 0;
  int n_conj = 0, n_mul = 0, n_trans = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (dut.m_req[c] && !dut.m_gnt[c]) n_conflict++;
    if (link_stall != '0) n_stall++;
    if (link_load == '1) n_par4++;
  end

  // ---------------- helpers
  logic [NOC_BITS-1:0] img [int];     // what the test wrote/expects in SPM

  task automatic ext_write(int a, logic [NOC_BITS-1:0] v);
    @(negedge clk); ext_req = 1; ext_we = 1; ext_addr = SPM_AW'(a); ext_wdata = v;
    @(negedge clk); ext_req = 0; ext_we = 0;
    img[a] = v;
  endtask

  task automatic ext_read(int a, output logic [NOC_BITS-1:0] v);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_addr = SPM_AW'(a);
    @(negedge clk); ext_req = 0; v = ext_rdata;
  endtask

  task automatic read_block(int a, output logic [8191:0] blk);
    for (int k = 0; k < 32; k++) begin logic [255:0] v; ext_read(a + k, v); blk[k*256 +: 256] = v; end
  endtask

  task automatic fill_block(int a, output logic [8191:0] blk, input int shift = 0);
    for (int k = 0; k < 32; k++) begin
      logic [255:0] v;
      for (int j = 0; j < 8; j++) v[j*32 +: 32] = $urandom;
      ext_write(a + k, v); blk[k*256 +: 256] = v;
    end
  endtask

  function automatic logic [MAX_W-1:0] el(logic [8191:0] r, int m, int i);
    logic [MAX_W-1:0] v; v = '0;
    for (int b = 0; b < m; b++) v[b] = r[i*m + b];
    return v;
  endfunction

  function automatic real to_real(logic [MAX_W-1:0] v, int m);
    logic [MAX_W-1:0] s; bit neg; real r;
    s = sext_w(width_e'((m == 32) ? 0 : (m == 64) ? 1 : 2), v);
    neg = s[MAX_W-1]; if (neg) s = -s;
    r = 0.0;
    for (int i = 3; i >= 0; i--) r = r * 4294967296.0 + real'(s[i*32 +: 32]);
    return neg ? -r : r;
  endfunction

  // command on core c, wait for done; returns cycles
  task automatic run(int c, core_op_e op, width_e w, int addr, int rl = 0, int cl = 0, output int lat);
    @(negedge clk);
    while (!cmd_ready[c]) @(negedge clk);
    cmd[c].op = op; cmd[c].mode = w; cmd[c].addr = SPM_AW'(addr);
    cmd[c].rows_log2 = 3'(rl); cmd[c].cols_log2 = 3'(cl);
    cmd_valid[c] = 1;
    @(negedge clk); cmd_valid[c] = 0; lat = 1;
    while (!cmd_done[c]) begin @(negedge clk); lat++; end
  endtask

  // check one FFT result block against a direct DFT of the input block
  task automatic check_fft(logic [8191:0] in_b, logic [8191:0] out_b, int m);
    int groups; real tol;
    groups = (8192 / m) / 64; if (groups > NL) groups = NL;
    tol = (2.0 ** m) / 128.0 + 2.0;
    for (int g = 0; g < groups; g++) begin
      real x [64];
      for (int n = 0; n < 64; n++) x[n] = to_real(el(in_b, m, g*64 + n), m);
      for (int k = 0; k < 64; k++) begin
        real re, im, e, got;
        re = 0.0; im = 0.0;
        for (int n = 0; n < 64; n++) begin
          re += x[n] * $cos(2.0*PI*k*n/64.0);
          im -= x[n] * $sin(2.0*PI*k*n/64.0);
        end
        e = ((k <= 32) ? re : im) / 8.0 / 16.0;   // unitary DFT, then /16
        got = to_real(el(out_b, m, g*64 + k), m);
        checks++;
        if (got - e > tol || e - got > tol) begin
          failures++;
          if (failures < 20) $display("FAIL fft m=%0d g=%0d k=%0d got %g exp %g tol %g", m, g, k, got, e, tol);
        end
      end
    end
  endtask

  logic [8191:0] blk [16];
  logic [8191:0] res;

  initial begin
    int lat;
    ext_addr = '0; ext_wdata = '0; cmd = '0;
    repeat (4) @(negedge clk); rst_n = 1;

    // ---- 2. eight cores in parallel
    for (int c = 0; c < NC; c++) fill_block(c * 32, blk[c]);
    fork
      begin : par
        for (int c = 0; c < NC; c++) fork
          automatic int cc = c;
          begin
            int l;
            run(cc, OP_LOAD, W64, cc * 32, 0, 0, l);
            run(cc, OP_ADD, W64, 0, 0, 0, l);
            run(cc, OP_STORE, W64, 4096 + cc * 32, 0, 0, l);
          end
        join_none
        wait fork;
      end
    join
    n_w64++;
    for (int c = 0; c < NC; c++) begin
      read_block(4096 + c * 32, res);
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (el(res, 64, i) !== mask_w(W64, el(blk[c], 64, i) + el(blk[c], 64, 64 + i))) begin
          failures++; $display("FAIL core %0d add elem %0d", c, i); end
      end
    end

    // ---- 3. FFTs on core 0, m = 32, six jobs outstanding per link
    for (int j = 0; j < 6; j++) fill_block(8192 + j * 32, blk[8 + j]);
    for (int j = 0; j < 6; j++) begin
      run(0, OP_LOAD, W32, 8192 + j * 32, 0, 0, lat);
      run(0, OP_FSEND, W32, 0, 0, 0, lat);
    end
    for (int j = 0; j < 6; j++) begin
      run(0, OP_FRECV, W32, 0, 0, 0, lat);
      run(0, OP_STORE, W32, 12288 + j * 32, 0, 0, lat);
      read_block(12288 + j * 32, res);
      check_fft(blk[8 + j], res, 32);
    end
    n_w32++;

    // ---- 4. width switches: 128 then 64 bits
    for (int wi = 2; wi >= 1; wi--) begin
      width_e w; int m, t0, t1;
      w = width_e'(wi); m = width_bits(w);
      fill_block(16384, blk[15]);
      run(0, OP_LOAD, w, 16384, 0, 0, lat);
      run(0, OP_FSEND, w, 0, 0, 0, lat);
      t0 = 0;
      run(0, OP_FRECV, w, 0, 0, 0, lat);
      // pipeline: link hop + m planes + 2 stages + buffer and command cycles
      checks++;
      if (lat < m + 2 || lat > m + 12) begin failures++; $display("FAIL FFT latency %0d for m=%0d", lat, m); end
      run(0, OP_STORE, w, 16384 + 64, 0, 0, lat);
      read_block(16384 + 64, res);
      check_fft(blk[15], res, m);
      if (wi == 2) n_w128++;
    end

    // ---- 5. conjugate (core 1), multiply (core 2), transpose (core 3)
    run(1, OP_LOAD, W128, 0, 0, 0, lat);
    run(1, OP_CONJ, W128, 0, 0, 0, lat);
    run(1, OP_STORE, W128, 20000, 0, 0, lat);
    read_block(20000, res);
    for (int i = 0; i < 32; i++) begin
      checks += 2;
      if (el(res, 128, 2*i) !== el(blk[0], 128, 2*i)) failures++;
      if (el(res, 128, 2*i+1) !== -el(blk[0], 128, 2*i+1)) failures++;
    end
    n_conj++;
    run(2, OP_LOAD, W32, 64, 0, 0, lat);
    run(2, OP_MUL, W32, 0, 0, 0, lat);
    run(2, OP_STORE, W32, 20032, 0, 0, lat);
    read_block(20032, res);
    for (int i = 0; i < 128; i++) begin
      logic [63:0] p;
      p = 64'(el(blk[2], 32, i)) * 64'(el(blk[2], 32, 128 + i));
      checks += 2;
      if (el(res, 32, i) !== MAX_W'(p[31:0])) failures++;
      if (el(res, 32, 128 + i) !== MAX_W'(p[63:32])) failures++;
    end
    n_mul++;
    run(3, OP_LOAD, W32, 96, 0, 0, lat);
    run(3, OP_TRANS, W32, 0, 3, 3, lat);          // four 8 x 8 tiles
    run(3, OP_STORE, W32, 20064, 0, 0, lat);
    read_block(20064, res);
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) begin
          checks++;
          if (el(res, 32, q*64 + c*8 + r) !== el(blk[3], 32, q*64 + r*8 + c)) failures++;
        end
    n_trans++;

    $display("mechanisms: bank_conflict=%0d link_stall=%0d four_links=%0d w32=%0d w64=%0d w128=%0d conj=%0d mul=%0d trans=%0d",
             n_conflict, n_stall, n_par4, n_w32, n_w64, n_w128, n_conj, n_mul, n_trans);
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_stall == 0)    begin failures++; $display("FAIL no link stall"); end
    checks++; if (n_par4 == 0)     begin failures++; $display("FAIL links never ran in parallel"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
