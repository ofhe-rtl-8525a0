// conjugate_unit: complex conjugation of one fixed-point complex value.
//
// OFHE runs inverse FFTs on its forward-only photonic FFT engine through
// IFFT(X) = conj(FFT(conj(X))) / N, so the CMOS cores conjugate the IFFT
// inputs before and the engine outputs after the transform. A complex value
// is a pair of m-bit two's-complement words; the unit passes the real part
// and negates the imaginary part modulo 2^m (m = 32, 64 or 128 from
// `mode`). Purely combinational. The conversion follows the paper; the
// (re, im) word-pair format is this design's choice.
module conjugate_unit
  import ofhe_pkg::*;
(
  input  width_e           mode,
  input  logic [MAX_W-1:0] re_i,
  input  logic [MAX_W-1:0] im_i,
  output logic [MAX_W-1:0] re_o,
  output logic [MAX_W-1:0] im_o
);
  always_comb begin
    re_o = mask_w(mode, re_i);
    im_o = mask_w(mode, -im_i);
  end
endmodule
