// transpose_unit: streaming transposer for one R x C tile.
//
// Step two of the 4-step FFT transposes the matrix of 64-point results
// before the second round of engine transforms. A core holds four of these
// units, each working on one quarter of its input register. After `start`
// (which latches R = 2^rows_log2 and C = 2^cols_log2, R*C <= MAX_ELEMS),
// the unit accepts R*C elements in row-major order on in_valid/in_data and
// stores element (r, c) at address c*R + r. It then plays the buffer out in
// address order, one element per cycle on out_valid/out_data, which is the
// tile in column-major order (the transpose, row-major). `done` pulses with
// the last output element. Timing: R*C input cycles, then R*C output
// cycles starting the cycle after the last input.
// Transposition follows the paper; the tile size, the streaming interface
// and the single buffer are this design's choices (the paper's "shuffling"
// pattern is not described and is not built).
module transpose_unit #(
  parameter int unsigned MAX_W     = 128,
  parameter int unsigned MAX_ELEMS = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [2:0]       rows_log2,
  input  logic [2:0]       cols_log2,
  input  logic             in_valid,
  input  logic [MAX_W-1:0] in_data,
  output logic             out_valid,
  output logic [MAX_W-1:0] out_data,
  output logic             busy,
  output logic             done
);
  localparam int unsigned AW = $clog2(MAX_ELEMS);

  typedef enum logic [1:0] {T_IDLE, T_FILL, T_DRAIN} tstate_e;
  tstate_e state;

  logic [MAX_W-1:0] buf_q [MAX_ELEMS];
  logic [2:0]       rl2, cl2;
  logic [AW:0]      r, c, total, rd;
  logic [AW:0]      wr_addr;

  assign total   = (AW+1)'(1) << (rl2 + cl2);
  assign wr_addr = (c << rl2) + r;  // < MAX_ELEMS, top bit always 0
  assign busy    = (state != T_IDLE);

  always_ff @(posedge clk) begin
    if (state == T_FILL && in_valid) buf_q[wr_addr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; rl2 <= '0; cl2 <= '0; r <= '0; c <= '0; rd <= '0;
      out_valid <= 1'b0; out_data <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      case (state)
        T_IDLE: if (start) begin
          rl2 <= rows_log2; cl2 <= cols_log2;
          r <= '0; c <= '0; rd <= '0;
          state <= T_FILL;
        end
        T_FILL: if (in_valid) begin
          if (c == ((AW+1)'(1) << cl2) - 1) begin
            c <= '0;
            if (r == ((AW+1)'(1) << rl2) - 1) state <= T_DRAIN;
            else r <= r + 1'b1;
          end else begin
            c <= c + 1'b1;
          end
        end
        T_DRAIN: begin
          out_valid <= 1'b1;
          out_data  <= buf_q[rd[AW-1:0]];
          rd        <= rd + 1'b1;
          if (rd == total - 1) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  initial assert (MAX_ELEMS >= 2 && (MAX_ELEMS & (MAX_ELEMS - 1)) == 0);
endmodule
