// ofhe_top: one OFHE CMOS chip with its four photonic FFT chiplets.
//
// OFHE accelerates discretized TFHE by moving the 64-point FFT kernels onto
// photonic chiplets and keeping everything else on a CMOS chip. This top
// holds one CMOS chip (NUM_CORES cores, an NUM_CORES x 32 crossbar, the 2 MB
// SPM, eight 4 KB I/O buffers and the shift-and-add collators) and the
// NUM_LINKS photonic chips it drives (each: a 32 KB I/O buffer, the stage-1
// input register and the analog engine, a behavioural model). The full
// system of the paper is two such tops, 8 photonic and 2 CMOS chips.
//
// FFT path for link g (core 0 only): core 0 pushes a 64-point job into the
// CMOS outbound buffer g; the word crosses the chiplet link (a plain wire
// here) into the photonic buffer; the input register loads it and sends m
// bit-planes to the engine, one per cycle; the ADC codes return to the
// collator on the CMOS chip, whose result (acc >>> N_OUT, the unitary DFT
// divided by 16, m bits per point) enters the CMOS inbound buffer g, from
// which core 0 gathers it. A job is only started when its result has room
// in the inbound buffer. The datapath width is a configuration sideband
// (fft_mode) set by core 0.
// Ports: per-core command interfaces, and the SPM's second port for the
// off-chip memory controller (ext_*), which is not part of this RTL.
// The photonic chips run at 12 GHz and the CMOS chip at 1.2 GHz in the
// paper; here one clock drives both, so cycle counts are in link cycles.
module ofhe_top
  import ofhe_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 8,
  parameter int unsigned NUM_LINKS  = 4,
  parameter int unsigned LANES      = 1024,
  parameter int unsigned N_OUT      = 6,
  parameter int unsigned CMOS_DEPTH = 4,
  parameter int unsigned PHOT_DEPTH = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic      [NUM_CORES-1:0]      cmd_valid,
  input  core_cmd_t [NUM_CORES-1:0]      cmd,
  output logic      [NUM_CORES-1:0]      cmd_ready,
  output logic      [NUM_CORES-1:0]      cmd_done,
  input  logic                           ext_req,
  input  logic                           ext_we,
  input  logic [SPM_AW-1:0]              ext_addr,
  input  logic [NOC_BITS-1:0]            ext_wdata,
  output logic [NOC_BITS-1:0]            ext_rdata,
  // activity, for observation
  output logic [NUM_LINKS-1:0]           link_load,
  output logic [NUM_LINKS-1:0]           link_stall
);
  localparam int unsigned RW = SPM_AW - $clog2(SPM_BANKS);
  localparam int unsigned AW = MAX_W + N_OUT;

  // ------------------------------------------------------------ cores
  logic [NUM_CORES-1:0]                m_req, m_we, m_gnt, m_rvalid;
  logic [NUM_CORES-1:0][SPM_AW-1:0]    m_addr;
  logic [NUM_CORES-1:0][NOC_BITS-1:0]  m_wdata, m_rdata;

  width_e                              fft_mode;
  logic [NUM_LINKS-1:0]                job_push, job_full, res_pop, res_empty;
  logic [NUM_LINKS-1:0][LINK_BITS-1:0] job_data, res_data;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    if (c == 0) begin : g_fft
      ofhe_core #(.LANES(LANES), .HAS_FFT(1'b1), .NUM_LINKS(NUM_LINKS)) u_core (
        .clk, .rst_n, .cmd_valid(cmd_valid[c]), .cmd(cmd[c]), .cmd_ready(cmd_ready[c]), .done(cmd_done[c]),
        .m_req(m_req[c]), .m_we(m_we[c]), .m_addr(m_addr[c]), .m_wdata(m_wdata[c]),
        .m_gnt(m_gnt[c]), .m_rvalid(m_rvalid[c]), .m_rdata(m_rdata[c]),
        .fft_mode, .job_push, .job_data, .job_full, .res_pop, .res_data, .res_empty);
    end else begin : g_plain
      width_e                              nc_mode;
      logic [NUM_LINKS-1:0]                nc_push, nc_pop;
      logic [NUM_LINKS-1:0][LINK_BITS-1:0] nc_data;
      ofhe_core #(.LANES(LANES), .HAS_FFT(1'b0), .NUM_LINKS(NUM_LINKS)) u_core (
        .clk, .rst_n, .cmd_valid(cmd_valid[c]), .cmd(cmd[c]), .cmd_ready(cmd_ready[c]), .done(cmd_done[c]),
        .m_req(m_req[c]), .m_we(m_we[c]), .m_addr(m_addr[c]), .m_wdata(m_wdata[c]),
        .m_gnt(m_gnt[c]), .m_rvalid(m_rvalid[c]), .m_rdata(m_rdata[c]),
        .fft_mode(nc_mode), .job_push(nc_push), .job_data(nc_data), .job_full('1),
        .res_pop(nc_pop), .res_data('0), .res_empty('1));
    end
  end

  // ---------------------------------------------------- crossbar + SPM
  logic [SPM_BANKS-1:0]                b_req, b_we;
  logic [SPM_BANKS-1:0][RW-1:0]        b_addr;
  logic [SPM_BANKS-1:0][NOC_BITS-1:0]  b_wdata, b_rdata;

  crossbar #(.MASTERS(NUM_CORES), .BANKS(SPM_BANKS), .WORD_BITS(NOC_BITS), .ROW_BITS(RW)) u_xbar (
    .clk, .rst_n, .m_req, .m_we, .m_addr, .m_wdata, .m_gnt, .m_rvalid, .m_rdata,
    .b_req, .b_we, .b_addr, .b_wdata, .b_rdata);

  spm #(.BANKS(SPM_BANKS), .BANK_WORDS(SPM_BANK_WORDS), .WORD_BITS(NOC_BITS)) u_spm (
    .clk, .a_req(b_req), .a_we(b_we), .a_addr(b_addr), .a_wdata(b_wdata), .a_rdata(b_rdata),
    .b_req(ext_req), .b_we(ext_we), .b_addr(ext_addr), .b_wdata(ext_wdata), .b_rdata(ext_rdata));

  // ---------------------------------------------------- photonic links
  for (genvar g = 0; g < NUM_LINKS; g++) begin : g_link
    // CMOS outbound buffer -> link -> photonic buffer
    logic [LINK_BITS-1:0] ob_dout, pb_dout, ib_din;
    logic ob_empty, ob_pop, pb_full, pb_empty, pb_pop, ib_full, ib_push;
    logic [$clog2(CMOS_DEPTH):0] ob_cnt, ib_cnt;
    logic [$clog2(PHOT_DEPTH):0] pb_cnt;

    io_buffer #(.WORD_BITS(LINK_BITS), .DEPTH(CMOS_DEPTH)) u_obuf (
      .clk, .rst_n, .push(job_push[g]), .din(job_data[g]), .full(job_full[g]),
      .pop(ob_pop), .dout(ob_dout), .empty(ob_empty), .count(ob_cnt));

    assign ob_pop = !ob_empty && !pb_full;   // one link word per cycle

    io_buffer #(.WORD_BITS(LINK_BITS), .DEPTH(PHOT_DEPTH)) u_pbuf (
      .clk, .rst_n, .push(ob_pop), .din(ob_dout), .full(pb_full),
      .pop(pb_pop), .dout(pb_dout), .empty(pb_empty), .count(pb_cnt));

    // stage 1: input register / DAC bit-planes
    logic ir_ready, bp_valid, bp_first, bp_last;
    logic [FFT_POINTS-1:0] amp, sgn;
    logic [$clog2(CMOS_DEPTH)+1:0] inflight;
    logic room;

    assign room   = (32'(ib_cnt) + 32'(inflight)) < CMOS_DEPTH;
    assign pb_pop = !pb_empty && ir_ready && room;
    assign link_load[g]  = pb_pop;
    assign link_stall[g] = !pb_empty && ir_ready && !room;

    fft_input_reg #(.POINTS(FFT_POINTS)) u_ireg (
      .clk, .rst_n, .load(pb_pop), .mode(fft_mode), .din(pb_dout), .ready(ir_ready),
      .bp_valid, .amp, .sgn, .bp_first, .bp_last);

    // stage 2: photonic engine + ADCs (behavioural)
    logic c_valid, c_first, c_last;
    logic [FFT_POINTS*N_OUT-1:0] code;
    pffte #(.POINTS(FFT_POINTS), .N_OUT(N_OUT)) u_pffte (
      .clk, .rst_n, .in_valid(bp_valid), .in_first(bp_first), .in_last(bp_last), .amp, .sgn,
      .out_valid(c_valid), .out_first(c_first), .out_last(c_last), .code);

    // stage 3: shift-and-add on the CMOS chip
    logic r_valid;
    logic [FFT_POINTS*AW-1:0] acc;
    shift_add_collator #(.POINTS(FFT_POINTS), .N_OUT(N_OUT)) u_coll (
      .clk, .rst_n, .in_valid(c_valid), .first(c_first), .last(c_last), .code,
      .out_valid(r_valid), .acc);

    always_comb begin
      ib_din = '0;
      for (int i = 0; i < FFT_POINTS; i++) begin
        logic [AW-1:0] a, s;
        a = acc[i*AW +: AW];
        s = AW'($signed(a) >>> N_OUT);
        ib_din[i*MAX_W +: MAX_W] = mask_w(fft_mode, s[MAX_W-1:0]);
      end
    end
    assign ib_push = r_valid;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) inflight <= '0;
      else        inflight <= inflight + ($bits(inflight))'(pb_pop) - ($bits(inflight))'(ib_push);
    end

    io_buffer #(.WORD_BITS(LINK_BITS), .DEPTH(CMOS_DEPTH)) u_ibuf (
      .clk, .rst_n, .push(ib_push), .din(ib_din), .full(ib_full),
      .pop(res_pop[g]), .dout(res_data[g]), .empty(res_empty[g]), .count(ib_cnt));
  end
endmodule
