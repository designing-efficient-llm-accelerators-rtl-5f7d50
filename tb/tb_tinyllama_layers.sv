// tb_tinyllama_layers: runs slices of TinyLlama-1.1B's Q3_K MatMuls the way a host driver
// would for token generation (one input vector), at the accelerator's default sizes:
//   * a 2048-wide layer (q/k/v/o projections, FFN gate/up): 64 weight rows, 8 SBs per row,
//     sent as four 16-row weight tiles against one input vector loaded once;
//   * the 5632-wide FFN down projection: 32 rows, 22 SBs per row, two weight tiles.
// Every result is checked against the real-valued reference. The testbench reports the
// cycles per weight super-block (load plus compute), from which the time of a whole layer
// follows; it checks that the rate stays within 28 (stream) + 16 (compute) cycles per SB plus
// a small per-tile overhead. Only the layer widths matter to the accelerator; the number of
// rows only sets how many tiles the host sends, so a few tiles stand for the whole layer.
module tb_tinyllama_layers;
  import llm_acc_pkg::*;
  import tb_q3k_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic busy, err, prof_clear = 0;
  prof_t prof;

  llm_acc_top dut (.*);

  always #5 clk = ~clk;
  assign m_axis_tready = 1'b1;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  q3k_raw_t W [16][22];
  q8k_raw_t X [22];
  logic [31:0] outq [$];
  always @(posedge clk) if (m_axis_tvalid && m_axis_tready) outq.push_back(m_axis_tdata);

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [31:0] w);
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

  task automatic layer(string name, int rows, int ksb);
    int t0, cyc;
    real per_sb;
    for (int k = 0; k < ksb; k++) X[k] = rand_q8k(rand_fp16());
    send(mk(OP_LOAD_X, 0, 1, ksb));
    for (int k = 0; k < ksb; k++) for (int i = 0; i < 65; i++) send(X[k][4*i +: 4]);
    t0 = cycle;
    for (int tile = 0; tile < rows / 16; tile++) begin
      outq.delete();
      for (int r = 0; r < 16; r++) for (int k = 0; k < ksb; k++) W[r][k] = rand_q3k(rand_fp16());
      send(mk(OP_LOAD_W, 16, 0, ksb));
      for (int r = 0; r < 16; r++) for (int k = 0; k < ksb; k++)
        for (int i = 0; i < 28; i++) send(W[r][k][4*i +: 4]);
      send(mk(OP_COMPUTE, 16, 1, ksb));
      while (outq.size() < 16) @(posedge clk);
      for (int r = 0; r < 16; r++) begin
        real want, mag;
        want = 0.0; mag = 0.0;
        for (int k = 0; k < ksb; k++) begin
          real v;
          v = sb_dot_real(W[r][k], X[k]);
          want += v; mag += fabs(v);
        end
        checks++;
        if (!close(fp32_to_real(outq[r]), want, mag)) begin
          failures++; $display("FAIL %s tile %0d row %0d", name, tile, r);
        end
      end
    end
    cyc = cycle - t0;
    per_sb = real'(cyc) / real'(rows * ksb);
    $display("%s: %0d rows x %0d SBs in %0d cycles, %f cycles per weight SB", name, rows, ksb, cyc, per_sb);
    checks++;
    if (per_sb > 28.0 + 16.0 + 1.0 || per_sb < 44.0) begin
      failures++; $display("FAIL %s rate %f cycles per SB", name, per_sb);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    layer("2048-wide projection", 64, 8);
    layer("5632-wide ffn_down", 32, 22);
    checks++;
    if (err) begin failures++; $display("FAIL err"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
