// sbvp: the super-block vector processor, an SB loader feeding a vector PU (as drawn in the
// paper's accelerator figure: the buffers feed the SB loader, the loader feeds the vector PU).
//
// A job (weight row, input column, ksb) is accepted on job_valid && job_ready; the SBVP then
// returns ksb results on res_valid, one single-precision SB dot product per SB, in SB order.
// The first result of a job is valid 20 cycles after the cycle that accepts the job (16 tile
// reads, 1 cycle of buffer latency, 3 vector PU stages), later ones follow every 16 cycles.
// The buffers sit outside, so their read ports are this module's ports. res_valid has no
// back-pressure: whoever issues a job must take all of its results.
module sbvp
  import llm_acc_pkg::*;
#(
  parameter int unsigned W_ROWS = 16,
  parameter int unsigned X_COLS = 4,
  parameter int unsigned K_MAX  = 22,
  localparam int unsigned WTAW = $clog2(W_ROWS * K_MAX * N_TILES),
  localparam int unsigned WSAW = $clog2(W_ROWS * K_MAX),
  localparam int unsigned XTAW = $clog2(X_COLS * K_MAX * N_TILES),
  localparam int unsigned XSAW = $clog2(X_COLS * K_MAX)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            job_valid,
  output logic            job_ready,
  input  logic [11:0]     job_row,
  input  logic [7:0]      job_col,
  input  logic [7:0]      job_ksb,
  output logic            w_re,
  output logic [WTAW-1:0] w_t_raddr,
  output logic [WSAW-1:0] w_s_raddr,
  input  w_tile_t         w_t_rdata,
  input  fp16_t           w_s_rdata,
  output logic            x_re,
  output logic [XTAW-1:0] x_t_raddr,
  output logic [XSAW-1:0] x_s_raddr,
  input  x_tile_t         x_t_rdata,
  input  fp16_t           x_s_rdata,
  output logic            vpu_active,   // a tile enters the vector PU this cycle
  output logic            res_valid,
  output fp32_t           res_data
);
  logic    v_valid, v_first, v_last;
  w_tile_t v_w_tile;
  x_tile_t v_x_tile;
  fp16_t   v_w_ssf, v_x_ssf;

  sb_loader #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) u_loader (
    .clk, .rst_n,
    .job_valid, .job_ready, .job_row, .job_col, .job_ksb,
    .w_re, .w_t_raddr, .w_s_raddr, .w_t_rdata, .w_s_rdata,
    .x_re, .x_t_raddr, .x_s_raddr, .x_t_rdata, .x_s_rdata,
    .v_valid, .v_first, .v_last, .v_w_tile, .v_x_tile, .v_w_ssf, .v_x_ssf
  );

  vector_pu u_vpu (
    .clk, .rst_n,
    .in_valid(v_valid), .in_first(v_first), .in_last(v_last),
    .w_tile(v_w_tile), .x_tile(v_x_tile), .w_ssf(v_w_ssf), .x_ssf(v_x_ssf),
    .out_valid(res_valid), .out_result(res_data)
  );

  assign vpu_active = v_valid;
endmodule
