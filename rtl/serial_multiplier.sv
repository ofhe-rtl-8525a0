// serial_multiplier: serial-parallel multiplier, run-time width 32/64/128.
//
// Used by the CMOS cores for element-wise polynomial products and twiddle
// multiplications. The multiplicand `a` is held in parallel; the
// multiplier `b` is consumed one bit per cycle, least significant first.
// Each cycle the partial product register P (m+1 bits) adds `a` when the
// current multiplier bit is 1, and its lowest bit is shifted out into the
// low half of the product. After m cycles `prod` holds the full 2m-bit
// unsigned product a*b (zero-extended to 2*MAX_W); its low m bits are the
// product mod q = 2^m, its high bits serve fixed-point products.
// Timing: start at edge t, done pulses after edge t+m.
// Bit-serial operation follows the paper's "serial multipliers"; the
// serial-parallel structure and handshake are this design's choices.
module serial_multiplier
  import ofhe_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  width_e             mode,
  input  logic [MAX_W-1:0]   a,
  input  logic [MAX_W-1:0]   b,
  output logic [2*MAX_W-1:0] prod,
  output logic               busy,
  output logic               done
);
  logic [MAX_W-1:0] ra, rb, lo;
  logic [MAX_W:0]   p, p_add;
  logic [7:0]       cnt, len;

  assign p_add = p + (rb[0] ? {1'b0, ra} : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ra <= '0; rb <= '0; lo <= '0; p <= '0; cnt <= '0; len <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        ra   <= mask_w(mode, a);
        rb   <= mask_w(mode, b);
        p    <= '0;
        lo   <= '0;
        cnt  <= '0;
        len  <= 8'(width_bits(mode));
        busy <= 1'b1;
      end else if (busy) begin
        rb  <= rb >> 1;
        p   <= p_add >> 1;
        lo  <= {p_add[0], lo[MAX_W-1:1]};
        cnt <= cnt + 8'd1;
        if (cnt == len - 8'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // low half: top len bits of lo; high half: P (m bits)
  always_comb begin
    case (len)
      8'd32:   prod = (2*MAX_W)'({p[31:0], lo[MAX_W-1 -: 32]});
      8'd64:   prod = (2*MAX_W)'({p[63:0], lo[MAX_W-1 -: 64]});
      default: prod = {p[MAX_W-1:0], lo};
    endcase
  end
endmodule
