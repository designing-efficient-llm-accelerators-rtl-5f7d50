// data_mapper: parses the super-block data that follows a LOAD_W or LOAD_X instruction and
// writes it into the weight or input buffer in the tile-per-word layout the SB loader reads.
//
// start (one cycle) hands over the decoded instruction; from then on the mapper owns the input
// stream (s_tvalid/s_tready) until it has taken rows*ksb weight SBs or cols*ksb input SBs, in
// row-major order (all SBs of row 0 first). It then pulses done, after its last buffer write.
//
// Weights: a Q3_K SB arrives as 28 words of the GGML block_q3_K byte layout (little-endian
// bytes: hmask[0:31], qs[32:95], scales[96:107], d[108:109]). The words are collected in a
// staging register; the cycle after the last one, the whole SB is decoded into 16 tile words
// (6-bit scale and 16 3-bit weights per tile) held in a second register, which is written to
// the weight buffer one tile per cycle while the next SB streams into the staging register.
// For weight i (tile i/16, lane i%16) the decode is
//   low2  = qs[32*(i/128) + i%32] >> (2*((i/32)%4)) & 3
//   hbit  = hmask[i%32] >> (i/32) & 1
//   q     = low2 - (hbit ? 0 : 4)               (3-bit two's complement {~hbit, low2})
// and the 6-bit scale of tile t is
//   low4  = (t < 8) ? scales[t] & 15 : scales[t-8] >> 4
//   high2 = scales[8 + t%4] >> (2*(t/4)) & 3
//   scale = low4 | high2 << 4                   (stored raw, bias 32)
// Inputs: a Q8_K SB arrives as 64 words of int8 (four words per tile, written as one tile
// word when the fourth arrives) and a 65th word whose low half is the fp16 SSF.
// The mapper never deasserts s_tready while loading: an SB takes at least 28 cycles to arrive
// and 16 to write, so the SBVP finds complete SBs without waiting on the mapper.
// The paper states only what the mapper does; the byte layouts follow GGML, the rest of the
// structure is this design's choice.
module data_mapper
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
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,      // OP_LOAD_W or OP_LOAD_X, checked by the decoder
  output logic              busy,
  output logic              done,
  // stream, routed here by the decoder while busy
  input  logic [AXIS_W-1:0] s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  // weight buffer write port
  output logic              w_t_we,
  output logic [WTAW-1:0]   w_t_waddr,
  output w_tile_t           w_t_wdata,
  output logic              w_s_we,
  output logic [WSAW-1:0]   w_s_waddr,
  output fp16_t             w_s_wdata,
  // input buffer write port
  output logic              x_t_we,
  output logic [XTAW-1:0]   x_t_waddr,
  output x_tile_t           x_t_wdata,
  output logic              x_s_we,
  output logic [XSAW-1:0]   x_s_waddr,
  output fp16_t             x_s_wdata
);

  typedef enum logic [1:0] {M_IDLE, M_W, M_X, M_FLUSH} mstate_e;
  mstate_e state;

  logic [11:0] n_vec;         // rows or columns to load
  logic [7:0]  n_sb;          // SBs per row/column
  logic [11:0] vec_cnt;       // current row/column
  logic [7:0]  sb_cnt;        // current SB within it
  logic [6:0]  word_cnt;      // word within the SB

  logic [Q3K_WORDS-1:0][31:0] wstage;   // staged Q3_K SB (word 0 in the low bits)
  logic                       wdec_go;  // staging register holds a complete SB
  logic [15:0]                wdec_base;
  w_tile_t [N_TILES-1:0]      wtiles;   // decoded SB being written
  fp16_t                      wtiles_d;
  logic [15:0]                wwr_base; // (row*K_MAX + sb) of the SB being written
  logic                       wwr_act;
  logic [3:0]                 wwr_t;
  logic [2:0][31:0]           xstage;

  wire beat     = s_tvalid && s_tready;
  wire last_w   = (word_cnt == 7'(Q3K_WORDS - 1));
  wire last_x   = (word_cnt == 7'(Q8K_WORDS - 1));
  wire last_sb  = (sb_cnt == n_sb - 8'd1);
  wire last_vec = (vec_cnt == n_vec - 12'd1);
  wire [15:0] sb_index = 16'(vec_cnt * K_MAX + 32'(sb_cnt));

  assign s_tready = (state == M_W) || (state == M_X);
  assign busy     = (state != M_IDLE);

  // Decode of a complete Q3_K SB from the staging register.
  function automatic w_tile_t [N_TILES-1:0] decode_q3k(logic [Q3K_WORDS-1:0][31:0] w);
    logic [Q3K_WORDS*4-1:0][7:0] b;
    w_tile_t [N_TILES-1:0]       r;
    logic [1:0] low2;
    logic       hbit;
    logic [3:0] low4;
    logic [1:0] high2;
    b = w;
    for (int t = 0; t < 16; t++) begin
      for (int l = 0; l < 16; l++) begin
        int i;
        i = 16 * t + l;
        low2 = 2'((b[32 + 32 * (i / 128) + i % 32] >> (2 * ((i / 32) % 4))) & 8'd3);
        hbit = b[i % 32][i / 32];
        r[t].q[l] = {~hbit, low2};
      end
      low4  = (t < 8) ? b[96 + t][3:0] : b[96 + t - 8][7:4];
      high2 = 2'((b[104 + t % 4] >> (2 * (t / 4))) & 8'd3);
      r[t].scale = {high2, low4};
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= M_IDLE;
      n_vec     <= '0;
      n_sb      <= '0;
      vec_cnt   <= '0;
      sb_cnt    <= '0;
      word_cnt  <= '0;
      wstage    <= '0;
      wdec_go   <= 1'b0;
      wdec_base <= '0;
      wtiles    <= '0;
      wtiles_d  <= '0;
      wwr_base  <= '0;
      wwr_act   <= 1'b0;
      wwr_t     <= '0;
      xstage    <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;

      // second stage of the weight path: decode, then write one tile per cycle
      if (wdec_go) begin
        wtiles   <= decode_q3k(wstage);
        wtiles_d <= wstage[27][15:0];
        wwr_base <= wdec_base;
        wwr_act  <= 1'b1;
        wwr_t    <= '0;
      end else if (wwr_act) begin
        wwr_t <= wwr_t + 4'd1;
        if (wwr_t == 4'd15) wwr_act <= 1'b0;
      end
      wdec_go <= 1'b0;

      unique case (state)
        M_IDLE: if (start) begin
          n_vec    <= (instr.op == OP_LOAD_W) ? instr.rows : 12'(instr.cols);
          n_sb     <= instr.ksb;
          vec_cnt  <= '0;
          sb_cnt   <= '0;
          word_cnt <= '0;
          state    <= (instr.op == OP_LOAD_W) ? M_W : M_X;
        end
        M_W, M_X: if (beat) begin
          if (state == M_W) begin
            wstage[word_cnt[4:0]] <= s_tdata;
            if (last_w) begin
              wdec_go   <= 1'b1;
              wdec_base <= sb_index;
            end
          end else if (word_cnt[1:0] != 2'd3) begin
            xstage[word_cnt[1:0]] <= s_tdata;
          end
          if ((state == M_W) ? last_w : last_x) begin
            word_cnt <= '0;
            if (last_sb) begin
              sb_cnt <= '0;
              if (last_vec) state <= M_FLUSH;
              else vec_cnt <= vec_cnt + 12'd1;
            end else begin
              sb_cnt <= sb_cnt + 8'd1;
            end
          end else begin
            word_cnt <= word_cnt + 7'd1;
          end
        end
        M_FLUSH: if (!wdec_go && !wwr_act) begin
          state <= M_IDLE;
          done  <= 1'b1;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // weight buffer writes
  assign w_t_we    = wwr_act;
  assign w_t_waddr = WTAW'(32'(wwr_base) * N_TILES + 32'(wwr_t));
  assign w_t_wdata = wtiles[wwr_t];
  assign w_s_we    = wwr_act && (wwr_t == 4'd0);
  assign w_s_waddr = WSAW'(wwr_base);
  assign w_s_wdata = wtiles_d;

  // input buffer writes, straight from the stream
  assign x_t_we    = (state == M_X) && beat && (word_cnt != 7'(Q8K_WORDS - 1)) && (word_cnt[1:0] == 2'd3);
  assign x_t_waddr = XTAW'(32'(sb_index) * N_TILES + 32'(word_cnt[5:2]));
  assign x_t_wdata = {s_tdata, xstage[2], xstage[1], xstage[0]};
  assign x_s_we    = (state == M_X) && beat && last_x;
  assign x_s_waddr = XSAW'(sb_index);
  assign x_s_wdata = s_tdata[15:0];

  // The stream belongs to the mapper only while it is loading.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == M_IDLE);
  a_start_op: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (instr.op == OP_LOAD_W || instr.op == OP_LOAD_X) && instr.ksb != 0);
endmodule
