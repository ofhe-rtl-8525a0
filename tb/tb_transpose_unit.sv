// tb_transpose_unit: self-checking test of the streaming transposer.
// Streams R x C tiles of distinct values row-major and checks that the
// output stream is the column-major order, plus the R*C-cycle drain timing.
module tb_transpose_unit;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] rows_log2, cols_log2;
  logic in_valid = 0;
  logic [127:0] in_data;
  logic out_valid, busy, done;
  logic [127:0] out_data;
  int checks = 0, failures = 0;

  transpose_unit #(.MAX_W(128), .MAX_ELEMS(64)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic tile(int rl, int cl);
    int R, C, n, k, cyc; logic [127:0] v [64];
    R = 1 << rl; C = 1 << cl; n = R * C;
    for (int i = 0; i < n; i++) v[i] = {$urandom, $urandom, $urandom, 32'(i)};
    @(negedge clk); rows_log2 = 3'(rl); cols_log2 = 3'(cl); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin in_valid = 1; in_data = v[i]; @(negedge clk); end
    in_valid = 0;
    k = 0; cyc = 0;
    while (k < n && cyc < 200) begin
      if (out_valid) begin
        int r, c;
        r = k % R; c = k / R;     // k-th output is element (r, c)
        checks++;
        if (out_data !== v[r*C + c]) begin failures++; $display("FAIL %0dx%0d k=%0d", R, C, k); end
        if (k == n - 1) begin checks++; if (!done) begin failures++; $display("FAIL done"); end end
        k++;
      end
      @(negedge clk); cyc++;
    end
    checks++; if (cyc != n + 1) begin failures++; $display("FAIL drain took %0d cycles, expected %0d", cyc, n + 1); end
  endtask

  initial begin
    rows_log2 = 0; cols_log2 = 0; in_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    tile(3, 3); tile(2, 4); tile(4, 2); tile(1, 3); tile(0, 2); tile(2, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
