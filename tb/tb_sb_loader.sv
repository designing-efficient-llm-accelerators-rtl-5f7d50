// tb_sb_loader: the SB loader reads from two behavioural buffers (one-cycle read latency,
// contents a known function of the address). For a series of jobs the testbench checks that
// every tile pair handed to the vector PU is the one at the expected address, in SB and tile
// order, with the right first/last markers and SSFs, that the ksb*16 tiles come without gaps,
// and that job_ready is low while a job runs.
module tb_sb_loader;
  import llm_acc_pkg::*;

  localparam int unsigned W_ROWS = 3, X_COLS = 2, K_MAX = 4;
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
  logic v_valid, v_first, v_last;
  w_tile_t v_w_tile; x_tile_t v_x_tile; fp16_t v_w_ssf, v_x_ssf;

  sb_loader #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) dut (.*);

  always #5 clk = ~clk;

  function automatic w_tile_t wcont(int a); return w_tile_t'({32'(a * 7919 + 13), 32'(a) ^ 32'h5a5a}); endfunction
  function automatic x_tile_t xcont(int a); return x_tile_t'({4{32'(a * 104729 + 5)}}); endfunction

  // behavioural buffers
  always_ff @(posedge clk) begin
    if (w_re) begin w_t_rdata <= wcont(int'(w_t_raddr)); w_s_rdata <= 16'(int'(w_s_raddr) + 16'h100); end
    if (x_re) begin x_t_rdata <= xcont(int'(x_t_raddr)); x_s_rdata <= 16'(int'(x_s_raddr) + 16'h200); end
  end

  int checks = 0, failures = 0;
  int exp_row, exp_col, exp_ksb, seen;
  int gaps;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && v_valid) begin
    int k, t, wa, xa;
    k  = seen / 16;
    t  = seen % 16;
    wa = (exp_row * K_MAX + k) * 16 + t;
    xa = (exp_col * K_MAX + k) * 16 + t;
    checks++;
    if (v_w_tile != wcont(wa) || v_x_tile != xcont(xa) || v_first != (t == 0) || v_last != (t == 15) ||
        v_w_ssf != 16'(exp_row * K_MAX + k + 16'h100) || v_x_ssf != 16'(exp_col * K_MAX + k + 16'h200)) begin
      failures++;
      $display("FAIL job (%0d,%0d) tile %0d", exp_row, exp_col, seen);
    end
    seen++;
  end

  task automatic run_job(int r, int c, int ks);
    int n;
    while (!job_ready) @(posedge clk);
    #1;
    job_valid = 1; job_row = 12'(r); job_col = 8'(c); job_ksb = 8'(ks);
    exp_row = r; exp_col = c; exp_ksb = ks; seen = 0;
    @(posedge clk);
    #1 job_valid = 0;
    // tiles must start one cycle later and run without gaps
    n = 0;
    @(posedge clk);
    #1;
    checks++;
    if (job_ready) begin failures++; $display("FAIL job_ready high while running"); end
    while (seen < ks * 16 && n < 1000) begin @(posedge clk); #1; n++; end
    checks++;
    if (n != ks * 16) begin failures++; $display("FAIL job took %0d cycles for %0d tiles", n, ks * 16); end
    @(posedge clk);
    #1;
    checks++;
    if (seen != ks * 16 || !job_ready) begin failures++; $display("FAIL tile count %0d", seen); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    run_job(0, 0, 1);
    run_job(2, 1, 4);
    run_job(1, 0, 3);
    run_job(2, 0, 2);
    for (int i = 0; i < 6; i++) run_job($urandom_range(0, W_ROWS-1), $urandom_range(0, X_COLS-1), $urandom_range(1, K_MAX));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
