// shift_add_collator: stage 3 of the OFHE FFT pipeline (CMOS side).
//
// The photonic engine transforms one bit-plane of the m-bit inputs per
// cycle, most significant plane first, and returns one N_OUT-bit ADC code
// per output lane. Because the FFT is linear, the transform of the full
// inputs is sum_b 2^b * FFT(plane_b). This unit forms that sum in Horner
// form: on the first plane acc = code, on every later plane
// acc = 2*acc + code (sign-extended). On the last plane the sum is
// registered, and `out_valid` pulses in the following cycle with all
// POINTS accumulators (MAX_W + N_OUT bits each, two's complement).
// Timing: one cycle per plane, result valid one cycle after the last code,
// so m planes yield a result m+1 cycles after the first code arrives.
// Shift-and-add recombination follows the paper; the Horner ordering,
// accumulator widths and framing by first/last are this design's choices.
// The paper lets the serial adders of one core do this collation; here one
// collator per link with a parallel adder does it, so the core stays free.
module shift_add_collator
  import ofhe_pkg::*;
#(
  parameter int unsigned POINTS = 64,
  parameter int unsigned N_OUT  = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic                              first,
  input  logic                              last,
  input  logic [POINTS*N_OUT-1:0]           code,
  output logic                              out_valid,
  output logic [POINTS*(MAX_W+N_OUT)-1:0]   acc
);
  localparam int unsigned AW = MAX_W + N_OUT;

  logic [AW-1:0] run [POINTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc       <= '0;
      for (int i = 0; i < POINTS; i++) run[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int i = 0; i < POINTS; i++) begin
          logic [AW-1:0] c, nxt;
          c   = AW'($signed(code[i*N_OUT +: N_OUT]));
          nxt = first ? c : ((run[i] << 1) + c);
          run[i] <= nxt;
          if (last) acc[i*AW +: AW] <= nxt;
        end
        if (last) out_valid <= 1'b1;
      end
    end
  end
endmodule
