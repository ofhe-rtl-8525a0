// tb_pffte: self-checking test of the photonic engine model.
// Drives random bit-planes and compares each ADC code with a reference DFT
// computed here by a radix-2 FFT (a different algorithm from the model's
// direct sum), quantised the same way; also checks the one-cycle latency,
// the tag pipeline, the Hermitian sampling plan (Re for k <= 32, Im above)
// and clamping at full scale.
module tb_pffte;
  localparam int P = 64, NO = 6;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0;
  logic [P-1:0] amp, sgn;
  logic out_valid, out_first, out_last;
  logic [P*NO-1:0] code;
  int checks = 0, failures = 0;

  pffte #(.POINTS(P), .N_OUT(NO)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  real xr [P], xi [P];

  // in-place iterative radix-2 FFT (forward, unscaled)
  task automatic fft();
    int j; j = 0;
    for (int i = 1; i < P; i++) begin
      int bit_; bit_ = P >> 1;
      while (j & bit_) begin j ^= bit_; bit_ >>= 1; end
      j |= bit_;
      if (i < j) begin real t; t = xr[i]; xr[i] = xr[j]; xr[j] = t; t = xi[i]; xi[i] = xi[j]; xi[j] = t; end
    end
    for (int len = 2; len <= P; len <<= 1)
      for (int i = 0; i < P; i += len)
        for (int k = 0; k < len/2; k++) begin
          real wr, wi, ur, ui, vr, vi;
          wr = $cos(-2.0*PI*k/len); wi = $sin(-2.0*PI*k/len);
          ur = xr[i+k]; ui = xi[i+k];
          vr = xr[i+k+len/2]*wr - xi[i+k+len/2]*wi;
          vi = xr[i+k+len/2]*wi + xi[i+k+len/2]*wr;
          xr[i+k] = ur + vr; xi[i+k] = ui + vi;
          xr[i+k+len/2] = ur - vr; xi[i+k+len/2] = ui - vi;
        end
  endtask

  function automatic int quant(real x);
    real s; int q;
    s = x / 8.0 * 32.0;
    q = (s >= 0) ? int'($floor(s + 0.5)) : -int'($floor(-s + 0.5));
    if (q > 31) q = 31; if (q < -32) q = -32;
    return q;
  endfunction

  task automatic plane(logic [P-1:0] a, logic [P-1:0] s, logic f, logic l);
    @(negedge clk); amp = a; sgn = s; in_valid = 1; in_first = f; in_last = l;
    for (int n = 0; n < P; n++) begin xr[n] = a[n] ? (s[n] ? -1.0 : 1.0) : 0.0; xi[n] = 0.0; end
    fft();
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    checks++; if (!(out_valid && out_first == f && out_last == l)) begin failures++; $display("FAIL latency/tags"); end
    for (int k = 0; k < P; k++) begin
      int e, g;
      e = quant(((k <= P/2) ? xr[k] : xi[k]) / 8.0);
      g = int'($signed(code[k*NO +: NO]));
      // rounding ties may differ by one LSB between the two computations
      checks++; if (g - e > 1 || e - g > 1) begin failures++; $display("FAIL k=%0d got %0d exp %0d", k, g, e); end
    end
  endtask

  initial begin
    amp = '0; sgn = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    plane('1, '0, 1, 0);                 // DC = 8: clamps to +31
    checks++; if ($signed(code[0 +: NO]) != 31) begin failures++; $display("FAIL clamp +"); end
    plane('1, '1, 0, 1);                 // DC = -8: clamps to -32
    checks++; if ($signed(code[0 +: NO]) != -32) begin failures++; $display("FAIL clamp -"); end
    plane(64'h1, 64'h0, 0, 0);           // impulse: flat spectrum 1/8 -> code round(0.5) = 1
    checks++; if ($signed(code[5*NO +: NO]) != 1) begin failures++; $display("FAIL impulse %0d", $signed(code[5*NO +: NO])); end
    for (int t = 0; t < 40; t++) plane({$urandom, $urandom}, {$urandom, $urandom}, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
