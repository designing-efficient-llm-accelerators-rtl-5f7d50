// tb_data_mapper: streams random weight and input super-blocks (GGML byte layout) into the
// data mapper, once without gaps and once with random gaps in tvalid, records every buffer
// write in shadow memories and compares them, after done, with the reference decode at the
// expected addresses. Also checks that the mapper never stalls the stream while loading, that
// done follows the last word, and that no write lands outside the loaded rows/columns.
module tb_data_mapper;
  import llm_acc_pkg::*;
  import tb_q3k_pkg::*;

  localparam int unsigned W_ROWS = 3, X_COLS = 2, K_MAX = 3;
  localparam int unsigned WTAW = $clog2(W_ROWS * K_MAX * 16), WSAW = $clog2(W_ROWS * K_MAX);
  localparam int unsigned XTAW = $clog2(X_COLS * K_MAX * 16), XSAW = $clog2(X_COLS * K_MAX);

  logic clk = 0, rst_n = 0;
  logic start = 0;
  instr_t instr = '0;
  logic busy, done;
  logic [31:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready;
  logic w_t_we, w_s_we, x_t_we, x_s_we;
  logic [WTAW-1:0] w_t_waddr; logic [WSAW-1:0] w_s_waddr;
  logic [XTAW-1:0] x_t_waddr; logic [XSAW-1:0] x_s_waddr;
  w_tile_t w_t_wdata; x_tile_t x_t_wdata; fp16_t w_s_wdata, x_s_wdata;

  data_mapper #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) dut (.*);

  always #5 clk = ~clk;

  w_tile_t wmem [W_ROWS * K_MAX * 16];
  x_tile_t xmem [X_COLS * K_MAX * 16];
  fp16_t   wssf [W_ROWS * K_MAX];
  fp16_t   xssf [X_COLS * K_MAX];
  int      nw_t = 0, nw_s = 0, nx_t = 0, nx_s = 0;
  int      checks = 0, failures = 0;
  int      stalls = 0;

  always @(posedge clk) if (rst_n) begin
    if (w_t_we) begin wmem[w_t_waddr] <= w_t_wdata; nw_t++; end
    if (w_s_we) begin wssf[w_s_waddr] <= w_s_wdata; nw_s++; end
    if (x_t_we) begin xmem[x_t_waddr] <= x_t_wdata; nx_t++; end
    if (x_s_we) begin xssf[x_s_waddr] <= x_s_wdata; nx_s++; end
    if (busy && s_tvalid && !s_tready) stalls++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [31:0] w, bit gaps);
    if (gaps) while ($urandom_range(0, 2) == 0) @(posedge clk);
    #1 s_tdata = w; s_tvalid = 1;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    #1 s_tvalid = 0;
  endtask

  task automatic wait_done();
    int n;
    n = 0;
    while (!done && n < 200) begin @(posedge clk); n++; end
    checks++;
    if (!done) begin failures++; $display("FAIL no done"); end
    @(posedge clk);
  endtask

  task automatic start_instr(opcode_e op, int rows, int cols, int ksb);
    #1;
    instr = '{op: op, rows: 12'(rows), cols: 8'(cols), ksb: 8'(ksb)};
    start = 1;
    @(posedge clk);
    #1 start = 0;
  endtask

  task automatic load_weights(int rows, int ksb, bit gaps);
    q3k_raw_t sb [W_ROWS][K_MAX];
    int w[256];
    int sc[16];
    nw_t = 0; nw_s = 0;
    for (int r = 0; r < rows; r++) for (int k = 0; k < ksb; k++) sb[r][k] = rand_q3k(rand_fp16());
    start_instr(OP_LOAD_W, rows, 0, ksb);
    for (int r = 0; r < rows; r++)
      for (int k = 0; k < ksb; k++)
        for (int i = 0; i < 28; i++) send(sb[r][k][4*i +: 4], gaps);
    wait_done();
    checks++;
    if (nw_t != rows * ksb * 16 || nw_s != rows * ksb) begin
      failures++; $display("FAIL weight write count %0d %0d", nw_t, nw_s);
    end
    for (int r = 0; r < rows; r++)
      for (int k = 0; k < ksb; k++) begin
        int base;
        base = r * K_MAX + k;
        q3k_decode(sb[r][k], w, sc);
        checks++;
        if (wssf[base] != q3k_d(sb[r][k])) begin failures++; $display("FAIL w ssf %0d %0d", r, k); end
        for (int t = 0; t < 16; t++) begin
          checks++;
          if (int'(wmem[base * 16 + t].scale) - 32 != sc[t]) begin
            failures++; $display("FAIL w scale r%0d k%0d t%0d", r, k, t);
          end
          for (int l = 0; l < 16; l++) begin
            checks++;
            if (int'($signed(wmem[base * 16 + t].q[l])) != w[16 * t + l]) begin
              failures++; $display("FAIL w r%0d k%0d t%0d l%0d", r, k, t, l);
            end
          end
        end
      end
  endtask

  task automatic load_inputs(int cols, int ksb, bit gaps);
    q8k_raw_t sb [X_COLS][K_MAX];
    nx_t = 0; nx_s = 0;
    for (int c = 0; c < cols; c++) for (int k = 0; k < ksb; k++) sb[c][k] = rand_q8k(rand_fp16());
    start_instr(OP_LOAD_X, 0, cols, ksb);
    for (int c = 0; c < cols; c++)
      for (int k = 0; k < ksb; k++)
        for (int i = 0; i < 65; i++) send(sb[c][k][4*i +: 4], gaps);
    wait_done();
    checks++;
    if (nx_t != cols * ksb * 16 || nx_s != cols * ksb) begin
      failures++; $display("FAIL input write count %0d %0d", nx_t, nx_s);
    end
    for (int c = 0; c < cols; c++)
      for (int k = 0; k < ksb; k++) begin
        int base;
        base = c * K_MAX + k;
        checks++;
        if (xssf[base] != q8k_d(sb[c][k])) begin failures++; $display("FAIL x ssf"); end
        for (int t = 0; t < 16; t++)
          for (int l = 0; l < 16; l++) begin
            checks++;
            if (xmem[base * 16 + t][l] != sb[c][k][16 * t + l]) begin
              failures++; $display("FAIL x c%0d k%0d t%0d l%0d", c, k, t, l);
            end
          end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    load_weights(3, 2, 0);
    load_inputs(2, 3, 0);
    load_weights(2, 3, 1);
    load_inputs(1, 2, 1);
    checks++;
    if (stalls != 0) begin failures++; $display("FAIL mapper stalled the stream %0d cycles", stalls); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
