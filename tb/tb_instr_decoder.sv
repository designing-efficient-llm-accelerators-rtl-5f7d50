// tb_instr_decoder: sends a program of instructions and payload words to the decoder, with
// behavioural models of the data mapper (consumes the payload, with random tready gaps, then
// pulses done) and of the scheduler (pulses done after a random delay). Checks: each valid
// load or compute starts the right unit once with the instruction's fields, the payload words
// reach the mapper in order and are not decoded, the stream is held off during a compute,
// NOPs are ignored, invalid instructions start nothing and set err, and instr_fire counts
// every header.
module tb_instr_decoder;
  import llm_acc_pkg::*;

  localparam int unsigned W_ROWS = 4, X_COLS = 2, K_MAX = 3;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready;
  logic map_start, map_tvalid, map_done;
  logic map_tready;
  instr_t map_instr, sch_instr;
  logic sch_start, sch_done;
  logic busy, err, instr_fire;

  instr_decoder #(.W_ROWS(W_ROWS), .X_COLS(X_COLS), .K_MAX(K_MAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_map = 0, n_sch = 0, n_fire = 0, n_comp_stall = 0;
  instr_t last_map, last_sch;
  logic [31:0] pay = 0;      // next payload word sent

  // mapper model
  int   map_left = 0, map_done_dly = -1;
  logic [31:0] exp_word = 0;
  always @(posedge clk) begin
    map_done <= 1'b0;
    map_tready <= ($urandom_range(0, 3) != 0);
    if (rst_n) begin
      if (instr_fire) n_fire++;
      if (map_start) begin
        n_map++;
        last_map <= map_instr;
        map_left <= (map_instr.op == OP_LOAD_W) ? int'(map_instr.rows) * int'(map_instr.ksb) * 28
                                                : int'(map_instr.cols) * int'(map_instr.ksb) * 65;
      end
      if (map_tvalid && map_tready) begin
        checks++;
        if (s_tdata != exp_word) begin failures++; $display("FAIL payload word %h want %h", s_tdata, exp_word); end
        exp_word <= exp_word + 1;
        if (map_left == 1) map_done_dly <= 3;
        map_left <= map_left - 1;
      end
      if (map_done_dly == 0) map_done <= 1'b1;
      if (map_done_dly >= 0) map_done_dly <= map_done_dly - 1;
    end
  end

  // scheduler model
  int sch_dly = -1;
  always @(posedge clk) begin
    sch_done <= 1'b0;
    if (rst_n) begin
      if (sch_start) begin n_sch++; last_sch <= sch_instr; sch_dly <= $urandom_range(5, 40); end
      if (sch_dly == 0) sch_done <= 1'b1;
      if (sch_dly >= 0) sch_dly <= sch_dly - 1;
      if (sch_dly >= 0 && s_tvalid) begin
        n_comp_stall++;
        if (s_tready) begin failures++; $display("FAIL stream taken during compute"); end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [31:0] w);
    #1 s_tdata = w; s_tvalid = 1;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    #1 s_tvalid = 0;
  endtask

  function automatic logic [31:0] mk(opcode_e op, int rows, int cols, int ksb);
    instr_t i;
    i = '{op: op, rows: 12'(rows), cols: 8'(cols), ksb: 8'(ksb)};
    return 32'(i);
  endfunction

  task automatic load(opcode_e op, int n, int ksb);
    int nm, words;
    nm = n_map;
    send(op == OP_LOAD_W ? mk(op, n, 0, ksb) : mk(op, 0, n, ksb));
    words = n * ksb * ((op == OP_LOAD_W) ? 28 : 65);
    for (int i = 0; i < words; i++) begin send(pay); pay++; end
    repeat (8) @(posedge clk);
    checks++;
    if (n_map != nm + 1 || last_map.op != op || last_map.ksb != 8'(ksb) ||
        (op == OP_LOAD_W ? int'(last_map.rows) : int'(last_map.cols)) != n) begin
      failures++; $display("FAIL load start");
    end
  endtask

  initial begin
    int ns, nm;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    send(mk(OP_NOP, 0, 0, 0));
    load(OP_LOAD_W, 2, 3);
    load(OP_LOAD_X, 1, 2);
    ns = n_sch;
    send(mk(OP_COMPUTE, 2, 1, 3));
    send(mk(OP_NOP, 0, 0, 0));         // must wait for the compute to finish
    checks++;
    if (n_sch != ns + 1 || last_sch.rows != 12'd2 || last_sch.cols != 8'd1 || last_sch.ksb != 8'd3) begin
      failures++; $display("FAIL compute start");
    end
    checks++;
    if (err) begin failures++; $display("FAIL err set by valid program"); end
    nm = n_map; ns = n_sch;
    send(mk(OP_LOAD_W, W_ROWS + 1, 0, 1));
    send(mk(OP_LOAD_X, 0, 1, 0));
    send(mk(OP_COMPUTE, 1, X_COLS + 1, 1));
    send(32'hF000_0000);
    repeat (4) @(posedge clk);
    checks++;
    if (n_map != nm || n_sch != ns) begin failures++; $display("FAIL invalid instruction started a unit"); end
    checks++;
    if (!err) begin failures++; $display("FAIL err not set"); end
    checks++;
    if (n_fire != 9) begin failures++; $display("FAIL instr_fire count %0d", n_fire); end
    checks++;
    if (n_comp_stall == 0) begin failures++; $display("FAIL stream never held off by a compute"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
