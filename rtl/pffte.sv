// pffte: BEHAVIOURAL MODEL (not synthesizable) of the analog part of one
// OFHE photonic chip: amplitude and phase modulators, the 64-point photonic
// FFT engine built from directional couplers, phase shifters and spiral
// delay lines, the sampling modulators and the 6-bit ADCs with their output
// register.
//
// Per cycle it receives one bit-plane: point n carries the value
// x_n = amp[n] ? (sgn[n] ? -1 : +1) : 0 (the amplitude DAC switches the
// light on or off, the phase DAC selects phase 0 or pi). The optics compute
// the unitary DFT X_k = 1/sqrt(64) * sum_n x_n * exp(-j*2*pi*k*n/64). The
// plane is real, so the spectrum is Hermitian and 64 real samples describe
// it: ADC k samples Re X_k for k <= POINTS/2 and Im X_k above. Each ADC has
// full scale +-8 (the largest |X_k| a plane can produce) and delivers a
// signed N_OUT-bit code round(X_k * 2^(N_OUT-1) / 8), clamped to the code
// range; with N_OUT = 6 this is the 6-bit accuracy of the real engine.
// Timing: one register stage, codes appear the cycle after the plane.
// first/last tags travel with the data so the CMOS side can frame a
// transform. The DFT and the 64 DAC/ADC lanes follow the paper; the
// Hermitian sampling plan, the ADC scaling and the tags are this design's
// choices.
module pffte #(
  parameter int unsigned POINTS = 64,
  parameter int unsigned N_OUT  = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [POINTS-1:0]       amp,
  input  logic [POINTS-1:0]       sgn,
  output logic                    out_valid,
  output logic                    out_first,
  output logic                    out_last,
  output logic [POINTS*N_OUT-1:0] code
);
  localparam real PI = 3.14159265358979323846;

  real cos_t [POINTS];
  real sin_t [POINTS];

  initial begin
    for (int i = 0; i < POINTS; i++) begin
      cos_t[i] = $cos(2.0 * PI * i / POINTS);
      sin_t[i] = $sin(2.0 * PI * i / POINTS);
    end
  end

  function automatic logic [N_OUT-1:0] adc(real x);
    real    full, s;
    longint q;
    full = $sqrt(real'(POINTS));             // largest |X_k| of one plane
    s    = x * real'(longint'(1) << (N_OUT - 1)) / full;
    q    = (s >= 0.0) ? longint'($floor(s + 0.5)) : -longint'($floor(-s + 0.5));
    if (q > (longint'(1) << (N_OUT - 1)) - 1) q = (longint'(1) << (N_OUT - 1)) - 1;
    if (q < -(longint'(1) << (N_OUT - 1)))    q = -(longint'(1) << (N_OUT - 1));
    return N_OUT'(q);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0; code <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      if (in_valid) begin
        for (int k = 0; k < POINTS; k++) begin
          real re, im;
          re = 0.0; im = 0.0;
          for (int n = 0; n < POINTS; n++) begin
            if (amp[n]) begin
              re = re + (sgn[n] ? -cos_t[(k * n) % POINTS] :  cos_t[(k * n) % POINTS]);
              im = im + (sgn[n] ?  sin_t[(k * n) % POINTS] : -sin_t[(k * n) % POINTS]);
            end
          end
          re = re / $sqrt(real'(POINTS));
          im = im / $sqrt(real'(POINTS));
          code[k*N_OUT +: N_OUT] <= adc((k <= POINTS / 2) ? re : im);
        end
      end
    end
  end
endmodule
