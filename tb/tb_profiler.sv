// tb_profiler: drives the nine event inputs with independent random patterns, counts the
// events itself, and compares every counter with its own count, before and after a clear.
module tb_profiler;
  import llm_acc_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [8:0] ev = '0;
  prof_t prof;

  profiler dut (
    .clk, .rst_n, .clear,
    .ev_busy(ev[0]), .ev_vpu(ev[1]), .ev_in_beat(ev[2]), .ev_out_beat(ev[3]),
    .ev_out_stall(ev[4]), .ev_hold(ev[5]), .ev_w_write(ev[6]), .ev_x_write(ev[7]),
    .ev_instr(ev[8]), .prof
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cnt [9];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    logic [31:0] got [9];
    got = '{prof.busy_cycles, prof.vpu_cycles, prof.in_beats, prof.out_beats, prof.out_stall_cycles,
            prof.hold_cycles, prof.w_tile_writes, prof.x_tile_writes, prof.instrs};
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (got[i] != 32'(cnt[i])) begin failures++; $display("FAIL counter %0d: %0d want %0d", i, got[i], cnt[i]); end
    end
  endtask

  task automatic run(int n);
    for (int c = 0; c < n; c++) begin
      #1;
      for (int i = 0; i < 9; i++) ev[i] = ($urandom_range(0, i + 1) == 0);
      @(posedge clk);
      for (int i = 0; i < 9; i++) cnt[i] += int'(ev[i]);
    end
    #1 ev = '0;
    @(posedge clk);
    #1 compare();
  endtask

  initial begin
    for (int i = 0; i < 9; i++) cnt[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    #1 compare();
    run(500);
    run(77);
    clear = 1;
    @(posedge clk);
    #1 clear = 0;
    for (int i = 0; i < 9; i++) cnt[i] = 0;
    compare();
    run(300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
