// sb_loader: front end of the super-block vector processor. For one job (weight row, input
// column, number of SBs) it reads the matching weight and input tiles from the two buffers,
// one tile pair per cycle, and passes them to the vector PU together with both SSFs.
//
// Interface: a job is accepted on job_valid && job_ready (ready whenever no job is running).
// The loader then issues ksb*16 consecutive buffer reads, SB by SB and tile 0..15 within an SB,
// with no gaps. Buffer data come back one cycle after the read, so the loader delays its tile
// markers by one cycle: v_valid/v_first/v_last line up with the tile and SSF read data, which
// the module passes straight through. v_first marks tile 0 and v_last tile 15 of every SB.
// A job of ksb SBs occupies the loader for ksb*16 cycles plus one cycle to accept it.
// Everything past "loads SBs from the buffers into the vector PU" is this design's choice.
module sb_loader
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
  // job from the scheduler
  input  logic            job_valid,
  output logic            job_ready,
  input  logic [11:0]     job_row,
  input  logic [7:0]      job_col,
  input  logic [7:0]      job_ksb,
  // weight buffer read port
  output logic            w_re,
  output logic [WTAW-1:0] w_t_raddr,
  output logic [WSAW-1:0] w_s_raddr,
  input  w_tile_t         w_t_rdata,
  input  fp16_t           w_s_rdata,
  // input buffer read port
  output logic            x_re,
  output logic [XTAW-1:0] x_t_raddr,
  output logic [XSAW-1:0] x_s_raddr,
  input  x_tile_t         x_t_rdata,
  input  fp16_t           x_s_rdata,
  // tile stream to the vector PU
  output logic            v_valid,
  output logic            v_first,
  output logic            v_last,
  output w_tile_t         v_w_tile,
  output x_tile_t         v_x_tile,
  output fp16_t           v_w_ssf,
  output fp16_t           v_x_ssf
);
  logic        active;
  logic [11:0] row;
  logic [7:0]  col;
  logic [7:0]  ksb;
  logic [7:0]  k;
  logic [3:0]  t;

  wire [31:0] w_sb = 32'(row) * K_MAX + 32'(k);
  wire [31:0] x_sb = 32'(col) * K_MAX + 32'(k);

  assign job_ready = !active;
  assign w_re      = active;
  assign x_re      = active;
  assign w_t_raddr = WTAW'(w_sb * N_TILES + 32'(t));
  assign w_s_raddr = WSAW'(w_sb);
  assign x_t_raddr = XTAW'(x_sb * N_TILES + 32'(t));
  assign x_s_raddr = XSAW'(x_sb);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      row     <= '0;
      col     <= '0;
      ksb     <= '0;
      k       <= '0;
      t       <= '0;
      v_valid <= 1'b0;
      v_first <= 1'b0;
      v_last  <= 1'b0;
    end else begin
      v_valid <= active;
      v_first <= active && (t == 4'd0);
      v_last  <= active && (t == 4'd15);
      if (!active) begin
        if (job_valid) begin
          active <= 1'b1;
          row    <= job_row;
          col    <= job_col;
          ksb    <= job_ksb;
          k      <= '0;
          t      <= '0;
        end
      end else begin
        t <= t + 4'd1;
        if (t == 4'd15) begin
          if (k == ksb - 8'd1) active <= 1'b0;
          else k <= k + 8'd1;
        end
      end
    end
  end

  assign v_w_tile = w_t_rdata;
  assign v_x_tile = x_t_rdata;
  assign v_w_ssf  = w_s_rdata;
  assign v_x_ssf  = x_s_rdata;

  a_job_ksb: assert property (@(posedge clk) disable iff (!rst_n)
    job_valid && job_ready |-> job_ksb != 0 && 32'(job_ksb) <= K_MAX && 32'(job_row) < W_ROWS && 32'(job_col) < X_COLS);
endmodule
