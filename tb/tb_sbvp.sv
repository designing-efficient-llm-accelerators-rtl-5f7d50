// tb_sbvp: behavioural buffers are filled with random super-blocks, decoded into tile words by
// the reference model; jobs for several (row, column, ksb) are run through the SBVP and every
// per-SB result is compared with the real-valued reference dot product. Timing checks: the
// first result of a job 20 cycles after the cycle that accepts the job, then one result every 16 cycles.
module tb_sbvp;
  import llm_acc_pkg::*;
  import tb_q3k_pkg::*;

  localparam int unsigned W_ROWS = 3, X_COLS = 2, K_MAX = 3;
  localparam int unsigned WTAW = $clog2(W_ROWS * K_MAX * 16), WSAW = $clog2(W_ROWS * K_MAX);
  localparam int unsigned XTAW = $clog2(X_COLS * K_MAX * 16), XSAW = $clog2(X_COLS * K_MAX);

  logic clk = 0, rst_n = 0;
  logic job_valid = 0, job_ready;
  logic [11:0] job_row = 0;
  logic [7:0]  job_col = 0, job_ksb = 1;
  logic w_re, x_re;
  logic [WTAW-1:0] w_t_raddr; logic [WSAW-1:0] w_s_raddr;
  logic [XTAW-1:0] x_t_raddr; logic [XSAW-1:0] x_s_raddr;
  w_tile_t w_t_rdata; x_tile_t x_t_rdata; fp16_t w_s_rdata, x_s_rdata;
  logic vpu_active, res_valid;
  fp32_t res_data;

  sbvp #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) dut (.*);

  always #5 clk = ~clk;

  q3k_raw_t wsb [W_ROWS * K_MAX];
  q8k_raw_t xsb [X_COLS * K_MAX];
  w_tile_t  wmem [W_ROWS * K_MAX * 16];
  x_tile_t  xmem [X_COLS * K_MAX * 16];

  always_ff @(posedge clk) begin
    if (w_re) begin w_t_rdata <= wmem[w_t_raddr]; w_s_rdata <= q3k_d(wsb[w_s_raddr]); end
    if (x_re) begin x_t_rdata <= xmem[x_t_raddr]; x_s_rdata <= q8k_d(xsb[x_s_raddr]); end
  end

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_job(int r, int c, int ks);
    int acc_cycle, prev, got;
    while (!job_ready) @(posedge clk);
    #1;
    job_valid = 1; job_row = 12'(r); job_col = 8'(c); job_ksb = 8'(ks);
    @(posedge clk);
    acc_cycle = cycle;
    #1 job_valid = 0;
    got = 0;
    prev = 0;
    while (got < ks && cycle - acc_cycle < 2000) begin
      @(posedge clk);
      if (res_valid) begin
        real want;
        want = sb_dot_real(wsb[r * K_MAX + got], xsb[c * K_MAX + got]);
        checks++;
        if (!close(fp32_to_real(res_data), want, fabs(want))) begin
          failures++;
          $display("FAIL job (%0d,%0d) sb %0d: got %g want %g", r, c, got, fp32_to_real(res_data), want);
        end
        checks++;
        if ((got == 0 && cycle - acc_cycle != 20) || (got > 0 && cycle - prev != 16)) begin
          failures++;
          $display("FAIL job (%0d,%0d) sb %0d timing: %0d after accept", r, c, got, cycle - acc_cycle);
        end
        prev = cycle;
        got++;
      end
    end
    checks++;
    if (got != ks) begin failures++; $display("FAIL job (%0d,%0d) %0d results", r, c, got); end
  endtask

  initial begin
    int w[256];
    int sc[16];
    for (int s = 0; s < int'(W_ROWS * K_MAX); s++) begin
      wsb[s] = rand_q3k(rand_fp16());
      q3k_decode(wsb[s], w, sc);
      for (int t = 0; t < 16; t++) begin
        for (int l = 0; l < 16; l++) wmem[s * 16 + t].q[l] = 3'(w[16 * t + l]);
        wmem[s * 16 + t].scale = 6'(sc[t] + 32);
      end
    end
    for (int s = 0; s < int'(X_COLS * K_MAX); s++) begin
      xsb[s] = rand_q8k(rand_fp16());
      for (int t = 0; t < 16; t++)
        for (int l = 0; l < 16; l++) xmem[s * 16 + t][l] = xsb[s][16 * t + l];
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    run_job(0, 0, 3);
    run_job(2, 1, 3);
    run_job(1, 0, 1);
    run_job(2, 0, 2);
    for (int i = 0; i < 6; i++) run_job($urandom_range(0, W_ROWS-1), $urandom_range(0, X_COLS-1), $urandom_range(1, K_MAX));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
