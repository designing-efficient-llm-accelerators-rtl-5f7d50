// tb_llm_acc_top: end-to-end test of the accelerator at its default sizes (16 weight rows,
// 4 input columns, 22 super-blocks per row, i.e. rows of 5632 values).
//
// Program:
//   1. LOAD_W 16x22, LOAD_X 4x22, COMPUTE 16x4x22 - the full buffers, with random gaps on the
//      input stream and long stretches of output back-pressure;
//   2. NOP, LOAD_W 5x8, LOAD_X 1x8 (a 2048-long dot product, TinyLlama's hidden size),
//      COMPUTE 5x1x8 with the output always ready, timed;
//   3. COMPUTE 5x1x8 again on the same buffers;
//   4. an instruction that exceeds the buffers, which must be dropped and raise err.
// Every output word is compared with a real-valued reference of the Q3_K x Q8_K dot product.
// Mechanisms that must each happen at least once, and are counted: gaps in the input stream,
// output stalls, scheduler holds (a finished sum waiting for the output slot), NOP, buffer
// reuse without reloading, and the error path. The profiler counters are checked against
// the program.
module tb_llm_acc_top;
  import llm_acc_pkg::*;
  import tb_q3k_pkg::*;

  localparam int unsigned W_ROWS = 16, X_COLS = 4, K_MAX = 22;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic busy, err, prof_clear = 0;
  prof_t prof;

  llm_acc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_gap = 0, n_stall = 0, n_hold = 0, n_nop = 0, n_reuse = 0, n_err = 0;

  q3k_raw_t W [W_ROWS][K_MAX];
  q8k_raw_t X [X_COLS][K_MAX];

  // output collector
  logic [31:0] outq [$];
  logic        lastq [$];
  bit          bp_on = 1;
  int          rdy_cnt = 0;
  always @(posedge clk) begin
    if (m_axis_tvalid && m_axis_tready) begin outq.push_back(m_axis_tdata); lastq.push_back(m_axis_tlast); end
    if (m_axis_tvalid && !m_axis_tready) n_stall++;
    if (!bp_on) m_axis_tready <= 1'b1;
    else if (rdy_cnt == 0) begin
      m_axis_tready <= ($urandom_range(0, 2) != 0);
      rdy_cnt <= $urandom_range(1, 600);
    end else rdy_cnt <= rdy_cnt - 1;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit gaps = 0;
  task automatic send(logic [31:0] w);
    if (gaps && $urandom_range(0, 3) == 0) begin
      n_gap++;
      repeat ($urandom_range(1, 3)) @(posedge clk);
    end
    #1 s_axis_tdata = w; s_axis_tvalid = 1;
    @(posedge clk);
    while (!s_axis_tready) @(posedge clk);
    #1 s_axis_tvalid = 0;
  endtask

  function automatic logic [31:0] mk(opcode_e op, int rows, int cols, int ksb);
    instr_t i;
    i = '{op: op, rows: 12'(rows), cols: 8'(cols), ksb: 8'(ksb)};
    return 32'(i);
  endfunction

  task automatic load_w(int rows, int ksb);
    for (int r = 0; r < rows; r++) for (int k = 0; k < ksb; k++) W[r][k] = rand_q3k(rand_fp16());
    send(mk(OP_LOAD_W, rows, 0, ksb));
    for (int r = 0; r < rows; r++) for (int k = 0; k < ksb; k++)
      for (int i = 0; i < 28; i++) send(W[r][k][4*i +: 4]);
  endtask

  task automatic load_x(int cols, int ksb);
    for (int c = 0; c < cols; c++) for (int k = 0; k < ksb; k++) X[c][k] = rand_q8k(rand_fp16());
    send(mk(OP_LOAD_X, 0, cols, ksb));
    for (int c = 0; c < cols; c++) for (int k = 0; k < ksb; k++)
      for (int i = 0; i < 65; i++) send(X[c][k][4*i +: 4]);
  endtask

  // COMPUTE and check all rows*cols outputs; returns the cycles from instruction to last word
  task automatic compute(int rows, int cols, int ksb, output int cycles);
    int n;
    outq.delete(); lastq.delete();
    send(mk(OP_COMPUTE, rows, cols, ksb));
    n = 0;
    while (outq.size() < rows * cols && n < 2000000) begin @(posedge clk); n++; end
    cycles = n;
    for (int o = 0; o < rows * cols; o++) begin
      int r, c;
      real want, mag, got;
      r = o % rows;
      c = o / rows;
      want = 0.0; mag = 0.0;
      for (int k = 0; k < ksb; k++) begin
        real v;
        v = sb_dot_real(W[r][k], X[c][k]);
        want += v;
        mag += fabs(v);
      end
      checks++;
      if (o >= outq.size()) begin failures++; $display("FAIL missing output %0d", o); continue; end
      got = fp32_to_real(outq[o]);
      if (!close(got, want, mag)) begin
        failures++; $display("FAIL out r%0d c%0d: got %g want %g", r, c, got, want);
      end
      checks++;
      if (lastq[o] != (o == rows * cols - 1)) begin failures++; $display("FAIL tlast at %0d", o); end
    end
  endtask

  initial begin
    int cyc, cyc2;
    m_axis_tready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);

    // 1. full buffers with stream gaps and back-pressure
    gaps = 1;
    load_w(16, 22);
    load_x(4, 22);
    gaps = 0;
    compute(16, 4, 22, cyc);
    $display("16x4x22 compute: %0d cycles with back-pressure", cyc);
    n_hold = int'(prof.hold_cycles);
    checks++;
    if (prof.vpu_cycles != 32'(16 * 4 * 22 * 16) || prof.w_tile_writes != 32'(16 * 22 * 16) ||
        prof.x_tile_writes != 32'(4 * 22 * 16) || prof.out_beats != 32'(64) ||
        prof.in_beats != 32'(3 + 16 * 22 * 28 + 4 * 22 * 65) || prof.instrs != 32'd3) begin
      failures++; $display("FAIL profiler counters after step 1");
    end

    // 2. TinyLlama hidden-size rows, output always ready, timed
    bp_on = 0;
    repeat (4) @(posedge clk);
    prof_clear = 1; @(posedge clk); #1 prof_clear = 0;
    send(mk(OP_NOP, 0, 0, 0)); n_nop++;
    load_w(5, 8);
    load_x(1, 8);
    compute(5, 1, 8, cyc);
    $display("5x1x8 compute: %0d cycles", cyc);
    // each job: 16*ksb cycles of tiles plus at most 6 cycles of latency and hand-over
    checks++;
    if (cyc > 5 * (16 * 8 + 6) || cyc < 5 * 16 * 8) begin failures++; $display("FAIL compute time %0d", cyc); end

    // 3. same buffers again
    compute(5, 1, 8, cyc2);
    n_reuse++;
    checks++;
    if (cyc2 != cyc) begin failures++; $display("FAIL reuse timing %0d vs %0d", cyc2, cyc); end
    checks++;
    if (prof.instrs != 32'd5 || prof.vpu_cycles != 32'(2 * 5 * 8 * 16) || prof.hold_cycles != 0) begin
      failures++; $display("FAIL profiler counters after step 3");
    end

    // 4. error path
    checks++;
    if (err) begin failures++; $display("FAIL err before any bad instruction"); end
    send(mk(OP_COMPUTE, W_ROWS + 1, 1, 1));
    repeat (3) @(posedge clk);
    checks++;
    if (!err || busy) begin failures++; $display("FAIL bad instruction not flagged"); end
    else n_err++;

    $display("events: gaps=%0d stalls=%0d holds=%0d nops=%0d reuse=%0d err=%0d",
             n_gap, n_stall, n_hold, n_nop, n_reuse, n_err);
    checks++; if (n_gap == 0)   begin failures++; $display("FAIL no input gaps"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no output stall"); end
    checks++; if (n_hold == 0)  begin failures++; $display("FAIL no scheduler hold"); end
    checks++; if (n_nop == 0)   begin failures++; $display("FAIL no NOP"); end
    checks++; if (n_reuse == 0) begin failures++; $display("FAIL no reuse"); end
    checks++; if (n_err == 0)   begin failures++; $display("FAIL no error path"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
