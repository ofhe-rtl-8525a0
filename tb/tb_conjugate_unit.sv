// tb_conjugate_unit: self-checking test of complex conjugation. The real
// part must pass unchanged (mod 2^m) and re_o + ... : im_i + im_o must be
// 0 mod 2^m, checked at all widths on random and corner values.
module tb_conjugate_unit;
  import ofhe_pkg::*;
  width_e mode;
  logic [MAX_W-1:0] re_i, im_i, re_o, im_o;
  int checks = 0, failures = 0;
  conjugate_unit dut (.*);

  initial begin
    for (int wi = 0; wi < 3; wi++) begin
      for (int t = 0; t < 50; t++) begin
        logic [MAX_W-1:0] s;
        mode = width_e'(wi);
        re_i = {$urandom, $urandom, $urandom, $urandom};
        im_i = (t == 0) ? '0 : (t == 1) ? 128'd1 : {$urandom, $urandom, $urandom, $urandom};
        #1;
        s = mask_w(mode, im_i + im_o);
        checks++; if (re_o !== mask_w(mode, re_i)) begin failures++; $display("FAIL re"); end
        checks++; if (s !== '0 || im_o !== mask_w(mode, im_o)) begin failures++; $display("FAIL im %h -> %h", im_i, im_o); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
