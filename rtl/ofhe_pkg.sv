// ofhe_pkg: types and constants shared by the OFHE electro-optical TFHE
// accelerator RTL.
//
// The datapath width m is run-time selectable between 32, 64 and 128 bits
// (the three torus precisions q = 2^32, 2^64 and 2^128 of discretized TFHE).
// The photonic FFT engine works on 64 points; one chiplet link word is 1 KB.
// The core command set (core_op_e / core_cmd_t) is this design's own
// choice: the paper names the core's units but gives no instruction set.
package ofhe_pkg;

  // datapath width selection
  typedef enum logic [1:0] {
    W32  = 2'd0,
    W64  = 2'd1,
    W128 = 2'd2
  } width_e;

  localparam int unsigned MAX_W        = 128;   // widest datapath
  localparam int unsigned FFT_POINTS   = 64;    // points per photonic FFT engine
  localparam int unsigned LINK_BITS    = 8192;  // one 1 KB chiplet link word
  localparam int unsigned NOC_BITS     = 256;   // crossbar word
  localparam int unsigned SPM_BANKS    = 32;
  localparam int unsigned SPM_BANK_WORDS = 2048; // 2 MB / 32 banks / 32 B
  localparam int unsigned SPM_AW       = 16;    // word address: 11 row + 5 bank bits

  // m as a number
  function automatic int unsigned width_bits(width_e w);
    case (w)
      W32:     return 32;
      W64:     return 64;
      default: return 128;
    endcase
  endfunction

  // keep the low m bits of a MAX_W value (reduction mod q = 2^m)
  function automatic logic [MAX_W-1:0] mask_w(width_e w, logic [MAX_W-1:0] v);
    case (w)
      W32:     return {96'b0, v[31:0]};
      W64:     return {64'b0, v[63:0]};
      default: return v;
    endcase
  endfunction

  // sign-extend the low m bits of v to MAX_W bits
  function automatic logic [MAX_W-1:0] sext_w(width_e w, logic [MAX_W-1:0] v);
    case (w)
      W32:     return {{96{v[31]}}, v[31:0]};
      W64:     return {{64{v[63]}}, v[63:0]};
      default: return v;
    endcase
  endfunction

  // core commands
  typedef enum logic [2:0] {
    OP_LOAD  = 3'd0,  // 32 NoC words from SPM into the input register
    OP_STORE = 3'd1,  // 32 NoC words of the output register into SPM
    OP_ADD   = 3'd2,  // element-wise A+B mod 2^m (serial adders)
    OP_MUL   = 3'd3,  // element-wise A*B, 2m-bit product (serial multipliers)
    OP_CONJ  = 3'd4,  // complex conjugate of (re,im) pairs (conjugate units)
    OP_TRANS = 3'd5,  // transpose four R x C tiles (transpose units)
    OP_FSEND = 3'd6,  // send 64-point FFT jobs to the photonic links (core 0 only)
    OP_FRECV = 3'd7   // gather the oldest FFT results into the output register
  } core_op_e;

  typedef struct packed {
    core_op_e            op;
    width_e              mode;
    logic [SPM_AW-1:0]   addr;       // SPM word address for LOAD/STORE
    logic [2:0]          rows_log2;  // TRANS tile rows
    logic [2:0]          cols_log2;  // TRANS tile columns
  } core_cmd_t;

endpackage
