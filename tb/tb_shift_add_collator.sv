// tb_shift_add_collator: self-checking test of stage 3. Feeds m random
// code planes per transform (m = 32, 64, 128) and checks each accumulator
// against sum_b code_b * 2^b computed with explicit shifts, plus the
// one-cycle result latency after the last plane.
module tb_shift_add_collator;
  import ofhe_pkg::*;
  localparam int P = 64, NO = 6, AW = MAX_W + NO;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0;
  logic [P*NO-1:0] code;
  logic out_valid;
  logic [P*AW-1:0] acc;
  int checks = 0, failures = 0;

  shift_add_collator #(.POINTS(P), .N_OUT(NO)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [AW-1:0] expv [P];

  initial begin
    code = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int m; m = (t % 3 == 0) ? 32 : (t % 3 == 1) ? 64 : 128;
      for (int i = 0; i < P; i++) expv[i] = '0;
      for (int b = m - 1; b >= 0; b--) begin
        @(negedge clk);
        for (int i = 0; i < P; i++) begin
          logic [NO-1:0] c;
          c = (t == 0 && i == 0) ? 6'b100000 : 6'($urandom);   // most negative code
          code[i*NO +: NO] = c;
          expv[i] += AW'($signed(c)) << b;
        end
        in_valid = 1; first = (b == m - 1); last = (b == 0);
      end
      @(negedge clk); in_valid = 0; first = 0; last = 0;
      checks++; if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int i = 0; i < P; i++) begin
        checks++;
        if (acc[i*AW +: AW] !== expv[i]) begin failures++; $display("FAIL m=%0d lane %0d", m, i); end
      end
      @(negedge clk);
      checks++; if (out_valid) begin failures++; $display("FAIL extra valid"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
