// tb_scheduler: the scheduler drives a behavioural SBVP that answers each job with ksb random
// single-precision values (first one 20 cycles after acceptance, then every 16 cycles, as the
// real SBVP does). The testbench checks the job order (input column outer, weight row inner),
// every output word against the real-valued sum of its job's values, tlast, and done. The
// output consumer drops tready for long stretches, so output stalls and scheduler holds both
// happen; each is counted and must occur. The words must survive the back-pressure unchanged.
module tb_scheduler;
  import llm_acc_pkg::*;
  import tb_q3k_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  instr_t instr = '0;
  logic busy, done, hold;
  logic job_valid, job_ready;
  logic [11:0] job_row;
  logic [7:0] job_col, job_ksb;
  logic res_valid;
  fp32_t res_data;
  logic [31:0] m_tdata;
  logic m_tvalid, m_tready, m_tlast;

  scheduler dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hold = 0, n_stall = 0;

  // behavioural SBVP
  int    mb_left = 0, mb_wait = 0;
  real   job_sum [$];
  real   job_mag [$];
  int    job_r [$];
  int    job_c [$];
  real   cur_sum, cur_mag;
  assign job_ready = (mb_left == 0);

  function automatic fp32_t rand_fp32();
    return {1'($urandom), 8'($urandom_range(110, 140)), 23'($urandom)};
  endfunction

  always @(posedge clk) begin
    res_valid <= 1'b0;
    if (rst_n) begin
      if (hold) n_hold++;
      if (m_tvalid && !m_tready) n_stall++;
      if (job_valid && job_ready) begin
        mb_left <= int'(job_ksb);
        mb_wait <= 19;
        job_r.push_back(int'(job_row));
        job_c.push_back(int'(job_col));
        cur_sum = 0.0;
        cur_mag = 0.0;
      end else if (mb_left > 0) begin
        if (mb_wait == 0) begin
          fp32_t v;
          v = rand_fp32();
          res_valid <= 1'b1;
          res_data  <= v;
          cur_sum += fp32_to_real(v);
          cur_mag += fabs(fp32_to_real(v));
          mb_left <= mb_left - 1;
          mb_wait <= 15;
          if (mb_left == 1) begin
            job_sum.push_back(cur_sum);
            job_mag.push_back(cur_mag);
          end
        end else begin
          mb_wait <= mb_wait - 1;
        end
      end
    end
  end

  // output consumer with long tready-low stretches
  int rdy_cnt = 0;
  always @(posedge clk) begin
    if (rdy_cnt == 0) begin
      m_tready <= ($urandom_range(0, 2) != 0);
      rdy_cnt  <= $urandom_range(1, 120);
    end else rdy_cnt <= rdy_cnt - 1;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int rows, int cols, int ksb);
    int outs, n;
    #1;
    instr = '{op: OP_COMPUTE, rows: 12'(rows), cols: 8'(cols), ksb: 8'(ksb)};
    start = 1;
    @(posedge clk);
    #1 start = 0;
    outs = 0;
    n = 0;
    while (outs < rows * cols && n < 200000) begin
      @(posedge clk);
      n++;
      if (m_tvalid && m_tready) begin
        int er, ec;
        er = outs % rows;
        ec = outs / rows;
        checks++;
        if (job_r.size() == 0 || job_sum.size() == 0) begin
          failures++; $display("FAIL output without a finished job");
        end else begin
          if (job_r[0] != er || job_c[0] != ec) begin
            failures++; $display("FAIL job order: got (%0d,%0d) want (%0d,%0d)", job_r[0], job_c[0], er, ec);
          end
          checks++;
          if (!close(fp32_to_real(m_tdata), job_sum[0], job_mag[0])) begin
            failures++; $display("FAIL out %0d: got %g want %g", outs, fp32_to_real(m_tdata), job_sum[0]);
          end
          void'(job_r.pop_front()); void'(job_c.pop_front());
          void'(job_sum.pop_front()); void'(job_mag.pop_front());
        end
        checks++;
        if (m_tlast != (outs == rows * cols - 1)) begin failures++; $display("FAIL tlast at %0d", outs); end
        outs++;
      end
    end
    n = 0;
    while (!done && n < 10) begin @(posedge clk); n++; end
    checks++;
    if (!done) begin failures++; $display("FAIL no done"); end
    @(posedge clk);
    #1;
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    run(1, 1, 1);
    run(3, 2, 4);
    run(16, 4, 2);
    run(5, 1, 8);
    checks++;
    if (n_hold == 0) begin failures++; $display("FAIL scheduler never held a sum"); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL output never stalled"); end
    $display("scheduler holds: %0d cycles, output stalls: %0d cycles", n_hold, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
