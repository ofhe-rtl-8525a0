// tb_serial_multiplier: self-checking test of the serial-parallel
// multiplier. Compares the 2m-bit product with a reference built from
// 32-bit limb products (independent of the shift-add structure) at all
// three widths, and checks the m-cycle latency.
module tb_serial_multiplier;
  import ofhe_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  width_e mode;
  logic [MAX_W-1:0] a, b;
  logic [2*MAX_W-1:0] prod;
  logic busy, done;
  int checks = 0, failures = 0;

  serial_multiplier dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // schoolbook product on 32-bit limbs
  function automatic logic [2*MAX_W-1:0] ref_mul(int m, logic [MAX_W-1:0] x, logic [MAX_W-1:0] y);
    logic [2*MAX_W-1:0] r; r = '0;
    for (int i = 0; i < m/32; i++)
      for (int j = 0; j < m/32; j++)
        r += (2*MAX_W)'(64'(x[i*32 +: 32]) * 64'(y[j*32 +: 32])) << (32*(i+j));
    return r;
  endfunction

  task automatic run(width_e w, logic [MAX_W-1:0] x, logic [MAX_W-1:0] y);
    int cyc; logic [2*MAX_W-1:0] exp;
    x = mask_w(w, x); y = mask_w(w, y);
    @(negedge clk); mode = w; a = x; b = y; start = 1;
    @(negedge clk); start = 0; cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    exp = ref_mul(width_bits(w), x, y);
    checks++; if (prod !== exp) begin failures++; $display("FAIL m=%0d %h*%h got %h exp %h", width_bits(w), x, y, prod, exp); end
    checks++; if (cyc != int'(width_bits(w))) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    mode = W32; a = '0; b = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int wi = 0; wi < 3; wi++) begin
      width_e w; w = width_e'(wi);
      run(w, '1, '1);
      run(w, '1, 128'd0);
      for (int t = 0; t < 30; t++)
        run(w, {$urandom, $urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom, $urandom});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
