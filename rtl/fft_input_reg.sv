// fft_input_reg: stage 1 of the OFHE FFT pipeline (photonic-chip side).
//
// The photonic FFT engine is driven by 1-bit DACs, so an m-bit input
// (m = 32, 64, 128) is sent to it one bit-plane per cycle and the partial
// spectra are recombined later by shift-and-add on the CMOS chip. This
// register holds the 64 signed inputs of one transform. Each input is held
// in sign-magnitude form: per cycle the unit presents one magnitude bit of
// every point (`amp`, to the amplitude-modulator DACs) and every point's
// sign (`sgn`, to the phase-modulator DACs, phase 0 or pi), most
// significant magnitude bit first. A transform takes m cycles;
// `bp_first`/`bp_last` mark the first and last plane.
// Timing: `load` at edge t (accepted when `ready`), planes valid after
// edges t+1 .. t+m; a new vector can be loaded in the cycle of the last
// plane, so back-to-back transforms leave no gap.
// MSB-first, one bit per cycle (n_in = 1) and the amplitude/phase DAC pair
// follow the paper; the sign-magnitude coding is this design's choice.
module fft_input_reg
  import ofhe_pkg::*;
#(
  parameter int unsigned POINTS = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  width_e                  mode,
  input  logic [POINTS*MAX_W-1:0] din,      // point i at [i*MAX_W +: MAX_W], low m bits used
  output logic                    ready,
  output logic                    bp_valid,
  output logic [POINTS-1:0]       amp,
  output logic [POINTS-1:0]       sgn,
  output logic                    bp_first,
  output logic                    bp_last
);
  logic [MAX_W-1:0]  mag [POINTS];
  logic [POINTS-1:0] sign_q;
  logic [7:0]        bitpos;   // magnitude bit being presented
  logic              active;

  assign ready = !active || (bitpos == 8'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sign_q <= '0; bitpos <= '0; active <= 1'b0;
      for (int i = 0; i < POINTS; i++) mag[i] <= '0;
    end else begin
      if (load && ready) begin
        for (int i = 0; i < POINTS; i++) begin
          logic [MAX_W-1:0] v;
          v = sext_w(mode, din[i*MAX_W +: MAX_W]);
          sign_q[i] <= v[MAX_W-1];
          mag[i]    <= mask_w(mode, v[MAX_W-1] ? -v : v);
        end
        bitpos <= 8'(width_bits(mode) - 1);
        active <= 1'b1;
      end else if (active) begin
        if (bitpos == 8'd0) active <= 1'b0;
        else                bitpos <= bitpos - 8'd1;
      end
    end
  end

  logic first_q;   // the plane on display is the first of its vector
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) first_q <= 1'b0;
    else        first_q <= load && ready;
  end

  always_comb begin
    for (int i = 0; i < POINTS; i++) amp[i] = mag[i][bitpos[6:0]];
    sgn      = sign_q;
    bp_valid = active;
    bp_first = active && first_q;
    bp_last  = active && (bitpos == 8'd0);
  end
endmodule
