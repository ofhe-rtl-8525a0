// tb_serial_adder: self-checking test of the bit-serial adder.
// Random and corner operands at all three widths; checks the sum mod 2^m
// against a directly computed reference and that `done` arrives exactly
// m cycles after `start`.
module tb_serial_adder;
  import ofhe_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  width_e mode;
  logic [MAX_W-1:0] a, b, sum;
  logic busy, done;
  int checks = 0, failures = 0;

  serial_adder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(width_e w, logic [MAX_W-1:0] x, logic [MAX_W-1:0] y);
    int cyc; logic [MAX_W-1:0] exp;
    @(negedge clk); mode = w; a = x; b = y; start = 1;
    @(negedge clk); start = 0; cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    exp = mask_w(w, x + y);
    checks++; if (sum !== exp) begin failures++; $display("FAIL w=%0d %h+%h got %h exp %h", width_bits(w), x, y, sum, exp); end
    checks++; if (cyc != int'(width_bits(w))) begin failures++; $display("FAIL latency %0d for m=%0d", cyc, width_bits(w)); end
  endtask

  initial begin
    mode = W32; a = '0; b = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int wi = 0; wi < 3; wi++) begin
      width_e w; w = width_e'(wi);
      run(w, '1, 128'd1);                 // wrap-around
      run(w, '0, '0);
      for (int t = 0; t < 40; t++)
        run(w, {$urandom, $urandom, $urandom, $urandom}, {$urandom, $urandom, $urandom, $urandom});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
