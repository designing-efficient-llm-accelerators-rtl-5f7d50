// scheduler: runs a COMPUTE instruction. It splits the rows x cols MatMul tile held in the
// buffers into one job per (weight row, input column), sends each job to the SBVP, adds up the
// job's ksb per-SB results in single precision, and sends every finished sum on the output
// AXI-Stream (one 32-bit IEEE single word per output, tlast on the last output of the
// instruction).
//
// Order: input column outer, weight row inner, so the words for one input column (one row of
// the GGML result tensor) leave contiguously. Timing: a job costs 1 + 16*ksb cycles in the
// SBVP plus 4 cycles of latency; the next job is issued as soon as the previous sum has been
// moved into the one-word output slot. If the slot is still full (the consumer is not taking
// words), the scheduler holds the sum and stalls (hold = 1) until the slot frees.
// done pulses once the last word has been taken. The paper says the scheduler tiles the
// MatMul, synchronises and accumulates the SBVP's output and returns it over the AXI-Stream;
// the loop order, the output slot and the number format are this design's choices.
module scheduler
  import llm_acc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  output logic              busy,
  output logic              done,
  output logic              hold,
  // jobs to the SBVP
  output logic              job_valid,
  input  logic              job_ready,
  output logic [11:0]       job_row,
  output logic [7:0]        job_col,
  output logic [7:0]        job_ksb,
  // per-SB results from the SBVP
  input  logic              res_valid,
  input  fp32_t             res_data,
  // output stream
  output logic [AXIS_W-1:0] m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast
);
  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_ACC, S_HOLD, S_DRAIN} sstate_e;
  sstate_e state;

  logic [11:0] n_rows, r;
  logic [7:0]  n_cols, c;
  logic [7:0]  ksb, res_cnt;
  fp32_t       acc;

  wire   last_job  = (r == n_rows - 12'd1) && (c == n_cols - 8'd1);
  wire   slot_free = !m_tvalid || m_tready;
  fp32_t acc_next;
  assign acc_next = fp32_add(acc, res_data);

  assign busy      = (state != S_IDLE);
  assign hold      = (state == S_HOLD);
  assign job_valid = (state == S_ISSUE);
  assign job_row   = r;
  assign job_col   = c;
  assign job_ksb   = ksb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      n_rows   <= '0;
      n_cols   <= '0;
      ksb      <= '0;
      r        <= '0;
      c        <= '0;
      res_cnt  <= '0;
      acc      <= '0;
      m_tdata  <= '0;
      m_tvalid <= 1'b0;
      m_tlast  <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;

      unique case (state)
        S_IDLE: if (start) begin
          n_rows <= instr.rows;
          n_cols <= instr.cols;
          ksb    <= instr.ksb;
          r      <= '0;
          c      <= '0;
          state  <= S_ISSUE;
        end
        S_ISSUE: if (job_ready) begin
          res_cnt <= '0;
          acc     <= '0;
          state   <= S_ACC;
        end
        S_ACC: if (res_valid) begin
          res_cnt <= res_cnt + 8'd1;
          acc     <= acc_next;
          if (res_cnt == ksb - 8'd1) begin
            if (slot_free) begin
              m_tdata  <= acc_next;
              m_tvalid <= 1'b1;
              m_tlast  <= last_job;
              state    <= last_job ? S_DRAIN : S_ISSUE;
              if (r == n_rows - 12'd1) begin
                r <= '0;
                c <= c + 8'd1;
              end else begin
                r <= r + 12'd1;
              end
            end else begin
              state <= S_HOLD;
            end
          end
        end
        S_HOLD: if (slot_free) begin
          m_tdata  <= acc;
          m_tvalid <= 1'b1;
          m_tlast  <= last_job;
          state    <= last_job ? S_DRAIN : S_ISSUE;
          if (r == n_rows - 12'd1) begin
            r <= '0;
            c <= c + 8'd1;
          end else begin
            r <= r + 12'd1;
          end
        end
        S_DRAIN: if (!m_tvalid || m_tready) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI-Stream: once raised, tvalid stays up and tdata stays put until the word is taken.
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tlast));
  // SBVP results arrive only while a job's sum is being built.
  a_res_in_acc: assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> state == S_ACC);
endmodule
