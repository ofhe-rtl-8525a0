// serial_adder: bit-serial adder with run-time width 32, 64 or 128 bits.
//
// The CMOS cores of OFHE add polynomial coefficients with serial adders so
// that one piece of hardware serves all three datapath widths; a wider
// datapath costs cycles, not area. On `start` the operands are captured in
// two shift registers. Each following cycle one bit of each operand, least
// significant first, goes through a full adder whose carry is kept in a
// flip-flop; the sum bit enters the result shift register. After m cycles
// (m = 32, 64, 128 from `mode`) `done` pulses for one cycle and `sum`
// holds (a + b) mod 2^m, zero-extended to MAX_W.
// Timing: start at edge t, done high after edge t+m. `busy` is high in
// between; a `start` while busy is ignored.
// The serial principle follows the paper; bit-at-a-time (digit size 1)
// and the load/done handshake are this design's choices.
module serial_adder
  import ofhe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  width_e           mode,
  input  logic [MAX_W-1:0] a,
  input  logic [MAX_W-1:0] b,
  output logic [MAX_W-1:0] sum,
  output logic             busy,
  output logic             done
);
  logic [MAX_W-1:0] sa, sb, sr;
  logic [7:0]       cnt, len;
  logic             carry;
  logic             s_bit, c_next;

  assign s_bit  = sa[0] ^ sb[0] ^ carry;
  assign c_next = (sa[0] & sb[0]) | (carry & (sa[0] ^ sb[0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa <= '0; sb <= '0; sr <= '0; cnt <= '0; len <= '0;
      carry <= 1'b0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        sa    <= a;
        sb    <= b;
        sr    <= '0;
        carry <= 1'b0;
        cnt   <= '0;
        len   <= 8'(width_bits(mode));
        busy  <= 1'b1;
      end else if (busy) begin
        sa    <= sa >> 1;
        sb    <= sb >> 1;
        carry <= c_next;
        // the new bit enters at the top; after len shifts it sits at bit len-1
        sr    <= {s_bit, sr[MAX_W-1:1]};
        cnt   <= cnt + 8'd1;
        if (cnt == len - 8'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // right-align the collected bits: after len shifts they occupy the top len bits
  always_comb begin
    case (len)
      8'd32:   sum = MAX_W'(sr[MAX_W-1 -: 32]);
      8'd64:   sum = MAX_W'(sr[MAX_W-1 -: 64]);
      default: sum = sr;
    endcase
  end
endmodule
