// llm_acc_top: the Q3_K x Q8_K MatMul accelerator. One AXI-Stream slave carries instructions
// and super-block data from main memory; one AXI-Stream master returns the results.
//
// Structure, as in the paper's accelerator figure: the instruction decoder reads instruction
// words from the input stream and starts either the data mapper (loads) or the scheduler
// (compute). The data mapper writes weight SBs into the weight buffer and input SBs into the
// input buffer. The scheduler runs one job per (weight row, input column) on the super-block
// vector processor, whose SB loader reads both buffers and feeds the vector PU, and sends the
// accumulated sums on the output stream. A profiler counts events for performance analysis.
//
// Use: send LOAD_W (rows, ksb) and its rows*ksb Q3_K SBs, LOAD_X (cols, ksb) and its cols*ksb
// Q8_K SBs, then COMPUTE (rows, cols, ksb); rows*cols single-precision words come back, input
// column by input column, tlast on the last. A layer larger than the buffers is covered by the
// host sending one buffer-sized tile after another. s_axis_tlast is accepted and ignored:
// instruction counts, not tlast, delimit the data. err is sticky and flags a dropped, invalid
// instruction. The buffer sizes (W_ROWS, X_COLS, K_MAX) are not given by the paper; K_MAX = 22
// SBs holds a 5632-long row, the widest in TinyLlama.
module llm_acc_top
  import llm_acc_pkg::*;
#(
  parameter int unsigned W_ROWS = 16,
  parameter int unsigned X_COLS = 4,
  parameter int unsigned K_MAX  = 22
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AXIS_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic              s_axis_tlast,
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tlast,
  output logic              busy,
  output logic              err,
  input  logic              prof_clear,
  output prof_t             prof
);
  localparam int unsigned WTAW = $clog2(W_ROWS * K_MAX * N_TILES);
  localparam int unsigned WSAW = $clog2(W_ROWS * K_MAX);
  localparam int unsigned XTAW = $clog2(X_COLS * K_MAX * N_TILES);
  localparam int unsigned XSAW = $clog2(X_COLS * K_MAX);

  // decoder <-> mapper / scheduler
  logic   map_start, map_tvalid, map_tready, map_done, map_busy;
  instr_t map_instr, sch_instr;
  logic   sch_start, sch_done, sch_busy, sch_hold, dec_busy, instr_fire;

  // buffer ports
  logic            w_t_we, w_s_we, x_t_we, x_s_we, w_re, x_re;
  logic [WTAW-1:0] w_t_waddr, w_t_raddr;
  logic [WSAW-1:0] w_s_waddr, w_s_raddr;
  logic [XTAW-1:0] x_t_waddr, x_t_raddr;
  logic [XSAW-1:0] x_s_waddr, x_s_raddr;
  w_tile_t         w_t_wdata, w_t_rdata;
  x_tile_t         x_t_wdata, x_t_rdata;
  fp16_t           w_s_wdata, w_s_rdata, x_s_wdata, x_s_rdata;

  // scheduler <-> SBVP
  logic        job_valid, job_ready, res_valid, vpu_active;
  logic [11:0] job_row;
  logic [7:0]  job_col, job_ksb;
  fp32_t       res_data;

  instr_decoder #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) u_decoder (
    .clk, .rst_n,
    .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .map_start, .map_instr, .map_tvalid, .map_tready, .map_done,
    .sch_start, .sch_instr, .sch_done,
    .busy(dec_busy), .err, .instr_fire
  );

  data_mapper #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) u_mapper (
    .clk, .rst_n, .start(map_start), .instr(map_instr), .busy(map_busy), .done(map_done),
    .s_tdata(s_axis_tdata), .s_tvalid(map_tvalid), .s_tready(map_tready),
    .w_t_we, .w_t_waddr, .w_t_wdata, .w_s_we, .w_s_waddr, .w_s_wdata,
    .x_t_we, .x_t_waddr, .x_t_wdata, .x_s_we, .x_s_waddr, .x_s_wdata
  );

  weight_buffer #(.W_ROWS(W_ROWS), .K_MAX(K_MAX)) u_wbuf (
    .clk, .t_we(w_t_we), .t_waddr(w_t_waddr), .t_wdata(w_t_wdata),
    .s_we(w_s_we), .s_waddr(w_s_waddr), .s_wdata(w_s_wdata),
    .re(w_re), .t_raddr(w_t_raddr), .s_raddr(w_s_raddr), .t_rdata(w_t_rdata), .s_rdata(w_s_rdata)
  );

  input_buffer #(.X_COLS(X_COLS), .K_MAX(K_MAX)) u_xbuf (
    .clk, .t_we(x_t_we), .t_waddr(x_t_waddr), .t_wdata(x_t_wdata),
    .s_we(x_s_we), .s_waddr(x_s_waddr), .s_wdata(x_s_wdata),
    .re(x_re), .t_raddr(x_t_raddr), .s_raddr(x_s_raddr), .t_rdata(x_t_rdata), .s_rdata(x_s_rdata)
  );

  sbvp #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) u_sbvp (
    .clk, .rst_n,
    .job_valid, .job_ready, .job_row, .job_col, .job_ksb,
    .w_re, .w_t_raddr, .w_s_raddr, .w_t_rdata, .w_s_rdata,
    .x_re, .x_t_raddr, .x_s_raddr, .x_t_rdata, .x_s_rdata,
    .vpu_active, .res_valid, .res_data
  );

  scheduler u_sched (
    .clk, .rst_n, .start(sch_start), .instr(sch_instr),
    .busy(sch_busy), .done(sch_done), .hold(sch_hold),
    .job_valid, .job_ready, .job_row, .job_col, .job_ksb,
    .res_valid, .res_data,
    .m_tdata(m_axis_tdata), .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready), .m_tlast(m_axis_tlast)
  );

  profiler u_prof (
    .clk, .rst_n, .clear(prof_clear),
    .ev_busy(busy), .ev_vpu(vpu_active),
    .ev_in_beat(s_axis_tvalid && s_axis_tready), .ev_out_beat(m_axis_tvalid && m_axis_tready),
    .ev_out_stall(m_axis_tvalid && !m_axis_tready), .ev_hold(sch_hold),
    .ev_w_write(w_t_we), .ev_x_write(x_t_we), .ev_instr(instr_fire),
    .prof
  );

  assign busy = dec_busy || map_busy || sch_busy;

  // tlast is not used to frame data (see above)
  logic unused_tlast;
  assign unused_tlast = s_axis_tlast;
endmodule
