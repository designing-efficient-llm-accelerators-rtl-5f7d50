// profiler: hardware capture points for performance analysis. Each field of prof_t is a 32-bit
// counter of one event: cycles with an instruction in progress, cycles the vector PU took a
// tile (its utilisation is vpu_cycles / busy_cycles), stream words in and out, cycles an
// output word waited on the consumer, cycles the scheduler held a finished sum, and tile words
// written into each buffer (their fill), plus decoded instructions. clear zeroes all counters
// in the next cycle; counters wrap at 2^32. The paper describes a profiler whose capture
// points record clock cycle counts and the dynamic utilisation of processing elements and
// buffers; the choice of events and the counter width are this design's.
module profiler
  import llm_acc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  ev_busy,
  input  logic  ev_vpu,
  input  logic  ev_in_beat,
  input  logic  ev_out_beat,
  input  logic  ev_out_stall,
  input  logic  ev_hold,
  input  logic  ev_w_write,
  input  logic  ev_x_write,
  input  logic  ev_instr,
  output prof_t prof
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prof <= '0;
    end else if (clear) begin
      prof <= '0;
    end else begin
      prof.busy_cycles      <= prof.busy_cycles      + 32'(ev_busy);
      prof.vpu_cycles       <= prof.vpu_cycles       + 32'(ev_vpu);
      prof.in_beats         <= prof.in_beats         + 32'(ev_in_beat);
      prof.out_beats        <= prof.out_beats        + 32'(ev_out_beat);
      prof.out_stall_cycles <= prof.out_stall_cycles + 32'(ev_out_stall);
      prof.hold_cycles      <= prof.hold_cycles      + 32'(ev_hold);
      prof.w_tile_writes    <= prof.w_tile_writes    + 32'(ev_w_write);
      prof.x_tile_writes    <= prof.x_tile_writes    + 32'(ev_x_write);
      prof.instrs           <= prof.instrs           + 32'(ev_instr);
    end
  end
endmodule
