// tb_fft_input_reg: self-checking test of the stage-1 bit-plane register.
// Loads random signed vectors at each width and rebuilds every input from
// the m planes it emits (MSB first: v = 2v + amp, then the sign), checking
// the plane count, the first/last marks and back-to-back loading.
module tb_fft_input_reg;
  import ofhe_pkg::*;
  localparam int P = 64;
  logic clk = 0, rst_n = 0, load = 0;
  width_e mode;
  logic [P*MAX_W-1:0] din;
  logic ready, bp_valid, bp_first, bp_last;
  logic [P-1:0] amp, sgn;
  int checks = 0, failures = 0;

  fft_input_reg #(.POINTS(P)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [MAX_W-1:0] vec [2][P];
  logic [MAX_W-1:0] recon [P];
  logic [P-1:0]     sg;

  task automatic mkvec(int s, width_e w);
    for (int i = 0; i < P; i++) begin
      vec[s][i] = mask_w(w, {$urandom, $urandom, $urandom, $urandom});
      if (i == 0) vec[s][i] = mask_w(w, sext_w(W32, 128'h8000_0000) << (width_bits(w) - 32)); // most negative
      if (i == 1) vec[s][i] = '0;
      din[i*MAX_W +: MAX_W] = vec[s][i];
    end
  endtask

  initial begin
    mode = W32; din = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int wi = 0; wi < 3; wi++) begin
      width_e w; int m;
      w = width_e'(wi); m = width_bits(w);
      // two vectors back to back
      mkvec(0, w);
      @(negedge clk); mode = w; load = 1;
      @(negedge clk); load = 0;
      for (int s = 0; s < 2; s++) begin
        int planes; planes = 0;
        for (int i = 0; i < P; i++) recon[i] = '0;
        while (1) begin
          checks++; if (!bp_valid) begin failures++; $display("FAIL gap in planes"); end
          checks++; if (bp_first != (planes == 0)) begin failures++; $display("FAIL first mark"); end
          for (int i = 0; i < P; i++) recon[i] = (recon[i] << 1) | MAX_W'(amp[i]);
          sg = sgn;
          planes++;
          if (bp_last) begin
            if (s == 0) begin mkvec(1, w); load = 1; end   // reload in the last-plane cycle
            @(negedge clk); load = 0;
            break;
          end
          @(negedge clk);
        end
        checks++; if (planes != m) begin failures++; $display("FAIL %0d planes for m=%0d", planes, m); end
        for (int i = 0; i < P; i++) begin
          logic [MAX_W-1:0] v;
          v = sg[i] ? mask_w(w, -recon[i]) : recon[i];
          checks++; if (v !== vec[s][i]) begin failures++; $display("FAIL m=%0d point %0d got %h exp %h", m, i, v, vec[s][i]); end
        end
      end
      checks++; if (bp_valid) begin failures++; $display("FAIL planes after the end"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
