// ofhe_core: one CMOS compute core of OFHE.
//
// A core does all the work of a discretized-TFHE operation except the
// (I)FFT kernels: polynomial additions, element-wise (and twiddle)
// multiplications, conjugation around the IFFT, and transposition for the
// 4-step FFT. Its units read a 1 KB input register and write a 1 KB output
// register; both are seen as REG_BITS/m elements of m = 32, 64 or 128 bits
// (element i at bits [i*m +: m]). Commands (ofhe_pkg::core_cmd_t) are
// accepted on cmd_valid when cmd_ready is high; `done` pulses when one
// completes:
//   LOAD   32 NoC words from SPM word address addr.. into the input register
//   STORE  the output register to SPM addr..; both go through the crossbar,
//          one request per cycle, held until granted
//   ADD    A = elements [0, E/2), B = elements [E/2, E): out[i] = A+B mod 2^m,
//          upper half cleared; bit-serial adders, m cycles
//   MUL    out[i] = low m bits of A*B, out[E/2+i] = high m bits;
//          serial-parallel multipliers, m cycles
//   CONJ   elements (2i, 2i+1) are (re, im); out = (re, -im); one cycle
//   TRANS  each quarter of the register is an R x C tile (R*C = E/4),
//          transposed by its own transpose unit; 2*E/4 cycles
//   FSEND  (HAS_FFT only) groups of 64 elements are pushed as jobs into up
//          to NUM_LINKS link buffers (group g to link g), waiting while a
//          buffer is full; the command ends when all are pushed
//   FRECV  (HAS_FFT only) waits until every used link has a result, then
//          pops one from each into the output register (64 m-bit words per
//          group). Several FSENDs may be outstanding; results come back in
//          order, so a 4-step FFT can keep the engines busy. The link
//          width (fft_mode) follows the latest FSEND and may only change
//          when every FSEND has been matched by an FRECV
// The core holds LANES serial adders, multipliers and conjugate units in
// the paper; with 1 KB registers no more than REG_BITS/64 operand pairs
// exist, so only that many lanes are built (LANES is the upper bound).
// The unit mix and register sizes follow the paper; the command set, the
// register layout and the link protocol are this design's choices.
module ofhe_core
  import ofhe_pkg::*;
#(
  parameter int unsigned LANES     = 1024,
  parameter int unsigned REG_BYTES = 1024,
  parameter int unsigned N_TRANS   = 4,
  parameter bit          HAS_FFT   = 1'b0,
  parameter int unsigned NUM_LINKS = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  cmd_valid,
  input  core_cmd_t             cmd,
  output logic                  cmd_ready,
  output logic                  done,
  // crossbar master port
  output logic                  m_req,
  output logic                  m_we,
  output logic [SPM_AW-1:0]     m_addr,
  output logic [NOC_BITS-1:0]   m_wdata,
  input  logic                  m_gnt,
  input  logic                  m_rvalid,
  input  logic [NOC_BITS-1:0]   m_rdata,
  // photonic FFT links (used when HAS_FFT)
  output width_e                fft_mode,
  output logic [NUM_LINKS-1:0]  job_push,
  output logic [NUM_LINKS-1:0][LINK_BITS-1:0] job_data,
  input  logic [NUM_LINKS-1:0]  job_full,
  output logic [NUM_LINKS-1:0]  res_pop,
  input  logic [NUM_LINKS-1:0][LINK_BITS-1:0] res_data,
  input  logic [NUM_LINKS-1:0]  res_empty
);
  localparam int unsigned REG_BITS = REG_BYTES * 8;
  localparam int unsigned NWORDS   = REG_BITS / NOC_BITS;
  localparam int unsigned MAXPAIRS = REG_BITS / 64;              // pairs at m = 32
  localparam int unsigned NL       = (LANES < MAXPAIRS) ? LANES : MAXPAIRS;
  localparam int unsigned QBITS    = REG_BITS / N_TRANS;         // bits per transpose tile
  localparam int unsigned QMAX     = QBITS / 32;                 // tile elements at m = 32
  localparam int unsigned WW       = $clog2(NWORDS) + 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_STORE, S_ALU_GO, S_ALU, S_TRANS_GO, S_TRANS, S_FFT_PUSH, S_FFT_WAIT, S_DONE
  } state_e;
  state_e state;

  logic [REG_BITS-1:0] in_q, out_q;
  core_cmd_t           cur;
  logic [WW-1:0]       widx, ridx;     // words requested / returned

  // ---------------------------------------------------------------- lanes
  logic               lane_start_add, lane_start_mul;
  logic [NL-1:0][MAX_W-1:0]   add_sum;
  logic [NL-1:0][2*MAX_W-1:0] mul_prod;
  logic [NL-1:0]      add_done, mul_done, add_busy, mul_busy;
  logic [NL-1:0][MAX_W-1:0]   conj_re, conj_im;

  // operand A/B of lane i and the conjugate pair of lane i
  function automatic logic [MAX_W-1:0] elem(input logic [REG_BITS-1:0] r, input width_e w, input int unsigned i);
    case (w)
      W32:     return MAX_W'(r[i*32  +: 32]);
      W64:     return MAX_W'(r[i*64  +: 64]);
      default: return r[i*128 +: 128];
    endcase
  endfunction

  function automatic int unsigned pairs(input width_e w);
    return REG_BITS / (2 * width_bits(w));
  endfunction

  for (genvar i = 0; i < NL; i++) begin : g_lane
    logic [MAX_W-1:0] op_a, op_b, c_re, c_im;
    logic             en;
    always_comb begin
      en   = (i < pairs(cur.mode));
      op_a = en ? elem(in_q, cur.mode, i) : '0;
      op_b = en ? elem(in_q, cur.mode, (i < pairs(cur.mode)) ? pairs(cur.mode) + i : 0) : '0;
      c_re = en ? elem(in_q, cur.mode, 2*i)     : '0;
      c_im = en ? elem(in_q, cur.mode, 2*i + 1) : '0;
    end
    serial_adder u_add (
      .clk, .rst_n, .start(lane_start_add && en), .mode(cur.mode),
      .a(op_a), .b(op_b), .sum(add_sum[i]), .busy(add_busy[i]), .done(add_done[i]));
    serial_multiplier u_mul (
      .clk, .rst_n, .start(lane_start_mul && en), .mode(cur.mode),
      .a(op_a), .b(op_b), .prod(mul_prod[i]), .busy(mul_busy[i]), .done(mul_done[i]));
    conjugate_unit u_conj (
      .mode(cur.mode), .re_i(c_re), .im_i(c_im), .re_o(conj_re[i]), .im_o(conj_im[i]));
  end

  // ------------------------------------------------------- transpose units
  logic                 tr_start;
  logic [7:0]           tr_feed;                // element index being fed
  logic [N_TRANS-1:0]   tr_ovalid, tr_done, tr_busy;
  logic [N_TRANS-1:0][MAX_W-1:0] tr_out;
  logic [7:0]           tr_oidx;
  logic [7:0]           tr_n;                   // elements per tile

  assign tr_n = 8'(QBITS / width_bits(cur.mode));

  for (genvar q = 0; q < N_TRANS; q++) begin : g_tr
    logic [MAX_W-1:0] din;
    always_comb din = elem(in_q, cur.mode, q * (QBITS / width_bits(cur.mode)) + int'(tr_feed));
    transpose_unit #(.MAX_W(MAX_W), .MAX_ELEMS(QMAX)) u_tr (
      .clk, .rst_n, .start(tr_start), .rows_log2(cur.rows_log2), .cols_log2(cur.cols_log2),
      .in_valid(state == S_TRANS && tr_feed < tr_n), .in_data(din),
      .out_valid(tr_ovalid[q]), .out_data(tr_out[q]), .busy(tr_busy[q]), .done(tr_done[q]));
  end

  // ------------------------------------------------------------ FFT links
  logic [NUM_LINKS-1:0] grp_used, grp_pushed;
  int unsigned          ngroups;
  assign ngroups = (REG_BITS / width_bits(cur.mode)) / FFT_POINTS;
  // link width: set by FSEND; may only change while no job is outstanding
  width_e      fft_mode_q;
  logic [7:0]  outstanding;    // FSENDs not yet matched by an FRECV
  assign fft_mode = fft_mode_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fft_mode_q  <= W32;
      outstanding <= '0;
    end else if (state == S_IDLE && cmd_valid && HAS_FFT) begin
      if (cmd.op == OP_FSEND) begin
        fft_mode_q  <= cmd.mode;
        outstanding <= outstanding + 8'd1;
      end else if (cmd.op == OP_FRECV && outstanding != '0) begin
        outstanding <= outstanding - 8'd1;
      end
    end
  end
  a_width_switch_when_drained: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && cmd_valid && cmd.op == OP_FSEND && outstanding != '0) |-> (cmd.mode == fft_mode_q));

  always_comb begin
    for (int g = 0; g < NUM_LINKS; g++) begin
      grp_used[g] = HAS_FFT && (g < int'(ngroups));
      job_data[g] = '0;
      for (int i = 0; i < FFT_POINTS; i++)
        if (g * FFT_POINTS + i < int'(REG_BITS / 32))
          job_data[g][i*MAX_W +: MAX_W] = elem(in_q, cur.mode, g * FFT_POINTS + i);
      job_push[g] = (state == S_FFT_PUSH) && grp_used[g] && !grp_pushed[g] && !job_full[g];
      res_pop[g]  = (state == S_FFT_WAIT) && grp_used[g] && ((res_empty & grp_used) == '0);
    end
  end

  // ------------------------------------------------------------ control
  assign cmd_ready      = (state == S_IDLE);
  // units are started one cycle after the command is latched in `cur`
  assign lane_start_add = (state == S_ALU_GO) && cur.op == OP_ADD;
  assign lane_start_mul = (state == S_ALU_GO) && cur.op == OP_MUL;
  assign tr_start       = (state == S_TRANS_GO);

  always_comb begin
    m_req   = (state == S_LOAD || state == S_STORE) && widx < WW'(NWORDS);
    m_we    = (state == S_STORE);
    m_addr  = cur.addr + SPM_AW'(widx);
    m_wdata = out_q[widx[WW-2:0]*NOC_BITS +: NOC_BITS];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; in_q <= '0; out_q <= '0;
      widx <= '0; ridx <= '0; tr_feed <= '0; tr_oidx <= '0;
      grp_pushed <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          cur  <= cmd;
          widx <= '0; ridx <= '0; tr_feed <= '0; tr_oidx <= '0;
          grp_pushed <= '0;
          case (cmd.op)
            OP_LOAD:  state <= S_LOAD;
            OP_STORE: state <= S_STORE;
            OP_ADD, OP_MUL: state <= S_ALU_GO;
            OP_CONJ:  state <= S_ALU;
            OP_TRANS: state <= S_TRANS_GO;
            OP_FSEND: state <= HAS_FFT ? S_FFT_PUSH : S_DONE;
            OP_FRECV: state <= HAS_FFT ? S_FFT_WAIT : S_DONE;
            default:  state <= S_DONE;
          endcase
        end
        S_LOAD: begin
          if (m_req && m_gnt) widx <= widx + 1'b1;
          if (m_rvalid) begin
            in_q[ridx[WW-2:0]*NOC_BITS +: NOC_BITS] <= m_rdata;
            ridx <= ridx + 1'b1;
          end
          if (!m_req && !m_rvalid && ridx == WW'(NWORDS)) state <= S_DONE;
        end
        S_STORE: begin
          if (m_req && m_gnt) widx <= widx + 1'b1;
          if (!m_req) state <= S_DONE;
        end
        S_ALU_GO:   state <= S_ALU;
        S_TRANS_GO: state <= S_TRANS;
        S_ALU: begin
          if (cur.op == OP_CONJ) begin
            out_q <= '0;
            for (int i = 0; i < NL; i++) begin
              if (i < int'(pairs(cur.mode))) begin
                case (cur.mode)
                  W32:  begin out_q[(2*i)*32 +: 32]  <= conj_re[i][31:0]; out_q[(2*i+1)*32 +: 32]  <= conj_im[i][31:0]; end
                  W64:  begin out_q[(2*i)*64 +: 64]  <= conj_re[i][63:0]; out_q[(2*i+1)*64 +: 64]  <= conj_im[i][63:0]; end
                  default: begin out_q[(2*i)*128 +: 128] <= conj_re[i]; out_q[(2*i+1)*128 +: 128] <= conj_im[i]; end
                endcase
              end
            end
            state <= S_DONE;
          end else if (add_done[0] || mul_done[0]) begin
            out_q <= '0;
            for (int i = 0; i < NL; i++) begin
              if (i < int'(pairs(cur.mode))) begin
                int unsigned p;
                p = pairs(cur.mode);
                case (cur.mode)
                  W32: begin
                    out_q[i*32 +: 32] <= (cur.op == OP_ADD) ? add_sum[i][31:0] : mul_prod[i][31:0];
                    if (cur.op == OP_MUL) out_q[(p+i)*32 +: 32] <= mul_prod[i][63:32];
                  end
                  W64: begin
                    out_q[i*64 +: 64] <= (cur.op == OP_ADD) ? add_sum[i][63:0] : mul_prod[i][63:0];
                    if (cur.op == OP_MUL) out_q[(p+i)*64 +: 64] <= mul_prod[i][127:64];
                  end
                  default: begin
                    out_q[i*128 +: 128] <= (cur.op == OP_ADD) ? add_sum[i] : mul_prod[i][127:0];
                    if (cur.op == OP_MUL) out_q[(p+i)*128 +: 128] <= mul_prod[i][255:128];
                  end
                endcase
              end
            end
            state <= S_DONE;
          end
        end
        S_TRANS: begin
          if (tr_feed < tr_n) tr_feed <= tr_feed + 8'd1;
          if (tr_ovalid[0]) begin
            for (int q = 0; q < N_TRANS; q++) begin
              int unsigned e;
              e = q * int'(tr_n) + int'(tr_oidx);
              case (cur.mode)
                W32:     out_q[e*32  +: 32]  <= tr_out[q][31:0];
                W64:     out_q[e*64  +: 64]  <= tr_out[q][63:0];
                default: out_q[e*128 +: 128] <= tr_out[q];
              endcase
            end
            tr_oidx <= tr_oidx + 8'd1;
          end
          if (tr_done[0]) state <= S_DONE;
        end
        S_FFT_PUSH: begin
          grp_pushed <= grp_pushed | job_push;
          if (((grp_pushed | job_push) & grp_used) == grp_used) state <= S_DONE;
        end
        S_FFT_WAIT: if (res_pop != '0) begin
          out_q <= '0;
          for (int g = 0; g < NUM_LINKS; g++) begin
            if (grp_used[g]) begin
              for (int i = 0; i < FFT_POINTS; i++) begin
                int unsigned e;
                e = g * FFT_POINTS + i;
                case (cur.mode)
                  W32:     if (e < REG_BITS/32)  out_q[e*32  +: 32]  <= res_data[g][i*MAX_W +: 32];
                  W64:     if (e < REG_BITS/64)  out_q[e*64  +: 64]  <= res_data[g][i*MAX_W +: 64];
                  default: if (e < REG_BITS/128) out_q[e*128 +: 128] <= res_data[g][i*MAX_W +: 128];
                endcase
              end
            end
          end
          state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // link jobs only leave a core that owns the links
  a_jobs_fft_only: assert property (@(posedge clk) disable iff (!rst_n)
    (job_push != '0) |-> (state == S_FFT_PUSH));
endmodule
