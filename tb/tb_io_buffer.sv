// tb_io_buffer: self-checking test of the link-word FIFO against a
// queue model: random push/pop traffic (never violating full/empty),
// fill to full, simultaneous push and pop, order and count.
module tb_io_buffer;
  localparam int W = 8192, D = 4;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din, dout;
  logic full, empty;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0, saw_full = 0, saw_both = 0;
  logic [W-1:0] q [$];

  io_buffer #(.WORD_BITS(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    din = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++; if (full != (q.size() == D) || empty != (q.size() == 0) || int'(count) != q.size()) begin
        failures++; $display("FAIL flags t=%0d size=%0d", t, q.size()); end
      if (!empty) begin checks++; if (dout !== q[0]) begin failures++; $display("FAIL order t=%0d", t); end end
      if (full) saw_full++;
      push = !full && ($urandom % 100 < ((t / 200) % 2 ? 30 : 70));
      pop  = !empty && ($urandom % 100 < ((t / 200) % 2 ? 70 : 30));
      if (push && pop) saw_both++;
      for (int i = 0; i < W / 32; i++) din[i*32 +: 32] = $urandom;
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
    end
    checks++; if (saw_full == 0 || saw_both == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
