// tb_ofhe_workload: the polynomial kernels of the four DTFHE parameter
// sets run on the whole chip at its default parameters.
// For each set (N = 512, 1024, 2048, 4096 coefficients; FFT values of
// 64 bits for q = 2^32 and 128 bits for the wider sets):
//  1. First step of the 4-step FFT: the N inputs, seen as n0 = N/64 rows
//     of 64 points, are transformed row by row on the photonic links by
//     core 0 (LOAD, FSEND, FRECV, STORE). Every output point is compared
//     with a floating-point DFT computed here, within the worst-case error
//     of 6-bit ADC rounding (2^m/128 output units plus 2), as in the
//     top-level test. The twiddle multiply and transpose that follow are
//     ordinary core work, covered in step 2 and by the other tests.
//  2. Element-wise products of two N-coefficient polynomials (the
//     pointwise step of a polynomial product, and the shape of the twiddle
//     multiply), spread over all eight cores running in parallel. Each
//     core LOADs operand pairs, MULs and STOREs. The low and high m bits of
//     every product are compared with products computed here. MUL's
//     command-to-done time is checked to lie between m+2 and m+5 cycles
//     (m cycles of serial multiplication plus start and write-back).
// The row count n0 and the coefficient counts come from the parameter
// sets; the data are random. It simulates in well under a minute.
module tb_ofhe_workload;
  import ofhe_pkg::*;
  localparam int NC = 8;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic [NC-1:0] cmd_valid = '0, cmd_ready, cmd_done;
  core_cmd_t [NC-1:0] cmd;
  logic ext_req = 0, ext_we = 0;
  logic [SPM_AW-1:0] ext_addr;
  logic [NOC_BITS-1:0] ext_wdata, ext_rdata;
  logic [3:0] link_load, link_stall;
  int checks = 0, failures = 0;

  ofhe_top dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // the external port is shared by the parallel cores' checkers
  semaphore ext_lock = new(1);

  task automatic ext_write(int a, logic [NOC_BITS-1:0] v);
    @(negedge clk); ext_req = 1; ext_we = 1; ext_addr = SPM_AW'(a); ext_wdata = v;
    @(negedge clk); ext_req = 0; ext_we = 0;
  endtask

  task automatic ext_read(int a, output logic [NOC_BITS-1:0] v);
    @(negedge clk); ext_req = 1; ext_we = 0; ext_addr = SPM_AW'(a);
    @(negedge clk); ext_req = 0; v = ext_rdata;
  endtask

  task automatic read_block(int a, output logic [8191:0] blk);
    ext_lock.get(1);
    for (int k = 0; k < 32; k++) begin logic [255:0] v; ext_read(a + k, v); blk[k*256 +: 256] = v; end
    ext_lock.put(1);
  endtask

  task automatic fill_block(int a, output logic [8191:0] blk);
    ext_lock.get(1);
    for (int k = 0; k < 32; k++) begin
      logic [255:0] v;
      for (int j = 0; j < 8; j++) v[j*32 +: 32] = $urandom;
      ext_write(a + k, v); blk[k*256 +: 256] = v;
    end
    ext_lock.put(1);
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

  task automatic run(int c, core_op_e op, width_e w, int addr, output int lat);
    @(negedge clk);
    while (!cmd_ready[c]) @(negedge clk);
    cmd[c].op = op; cmd[c].mode = w; cmd[c].addr = SPM_AW'(addr);
    cmd[c].rows_log2 = '0; cmd[c].cols_log2 = '0;
    cmd_valid[c] = 1;
    @(negedge clk); cmd_valid[c] = 0; lat = 1;
    while (!cmd_done[c]) begin @(negedge clk); lat++; end
  endtask

  // compare 'groups' 64-point FFT results with a direct DFT
  task automatic check_fft(logic [8191:0] in_b, logic [8191:0] out_b, int m, int groups);
    real tol;
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
        e = ((k <= 32) ? re : im) / 8.0 / 16.0;
        got = to_real(el(out_b, m, g*64 + k), m);
        checks++;
        if (got - e > tol || e - got > tol) begin
          failures++;
          if (failures < 20) $display("FAIL row fft m=%0d g=%0d k=%0d got %g exp %g", m, g, k, got, e);
        end
      end
    end
  endtask

  int rows_done [4], prods_done [4];

  initial begin
    int n_pts [4] = '{512, 1024, 2048, 4096};
    width_e wid [4] = '{W64, W64, W128, W128};
    ext_addr = '0; ext_wdata = '0; cmd = '0;
    repeat (4) @(negedge clk); rst_n = 1;

    for (int s = 0; s < 4; s++) begin
      int m, e_per_reg, per_round, n0, lat;
      m = width_bits(wid[s]); e_per_reg = 8192 / m;
      n0 = n_pts[s] / 64;
      per_round = e_per_reg / 64;                 // rows per 1 KB register
      rows_done[s] = 0; prods_done[s] = 0;

      // ---- 1. row FFTs
      for (int r = 0; r < n0; r += per_round) begin
        logic [8191:0] in_b, out_b;
        fill_block(16384, in_b);
        run(0, OP_LOAD, wid[s], 16384, lat);
        run(0, OP_FSEND, wid[s], 0, lat);
        run(0, OP_FRECV, wid[s], 0, lat);
        run(0, OP_STORE, wid[s], 16384 + 32, lat);
        read_block(16384 + 32, out_b);
        check_fft(in_b, out_b, m, per_round);
        rows_done[s] += per_round;
      end

      // ---- 2. element-wise products over all cores
      begin
        int pairs, ncmd;
        pairs = e_per_reg / 2;
        ncmd = n_pts[s] / pairs;
        for (int c = 0; c < NC; c++) fork
          automatic int cc = c;
          begin
            for (int j = cc; j < ncmd; j += NC) begin
              automatic logic [8191:0] in_b, out_b;
              automatic int l;
              fill_block(j * 32, in_b);
              run(cc, OP_LOAD, wid[s], j * 32, l);
              run(cc, OP_MUL, wid[s], 0, l);
              checks++;
              if (l < m + 2 || l > m + 5) begin failures++; $display("FAIL MUL latency %0d m=%0d", l, m); end
              run(cc, OP_STORE, wid[s], 8192 + j * 32, l);
              read_block(8192 + j * 32, out_b);
              for (int i = 0; i < pairs; i++) begin
                automatic logic [255:0] p;
                p = 256'(el(in_b, m, i)) * 256'(el(in_b, m, pairs + i));
                checks += 2;
                if (el(out_b, m, i) !== (MAX_W'(p) & mask_w(wid[s], '1))) begin
                  failures++; if (failures < 20) $display("FAIL product low core %0d cmd %0d i %0d", cc, j, i); end
                if (el(out_b, m, pairs + i) !== (MAX_W'(p >> m) & mask_w(wid[s], '1))) begin
                  failures++; if (failures < 20) $display("FAIL product high core %0d cmd %0d i %0d", cc, j, i); end
              end
              prods_done[s] += pairs;
            end
          end
        join_none
        wait fork;
      end

      $display("set %0d: N=%0d m=%0d row_ffts=%0d products=%0d", s + 1, n_pts[s], m, rows_done[s], prods_done[s]);
      checks += 2;
      if (rows_done[s] != n0) begin failures++; $display("FAIL set %0d rows %0d", s + 1, rows_done[s]); end
      if (prods_done[s] != n_pts[s]) begin failures++; $display("FAIL set %0d products %0d", s + 1, prods_done[s]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
