// instr_decoder: reads 32-bit instruction words (instr_t) from the input AXI-Stream, checks
// them against the buffer sizes and starts the unit that carries them out:
//   OP_LOAD_W  rows, ksb       -> data mapper; the stream is routed to it for rows*ksb SBs
//   OP_LOAD_X  cols, ksb       -> data mapper; cols*ksb SBs follow
//   OP_COMPUTE rows, cols, ksb -> scheduler; rows*cols outputs leave on the output stream
//   OP_NOP                     -> ignored
// Instructions run one at a time: the decoder takes the next word only when the previous
// instruction's unit has signalled done. An instruction with an unknown opcode, a zero count or
// a count beyond W_ROWS, X_COLS or K_MAX is dropped and sets the sticky err output (cleared by
// reset only). A header word is taken in the cycle it is offered while idle; the unit's start
// pulse comes in the same cycle. tlast on the input stream carries no meaning here.
// The paper says the decoder loads and decodes instructions from the stream and passes them to
// the rest of the accelerator; the instruction set and encoding are this design's own.
module instr_decoder
  import llm_acc_pkg::*;
#(
  parameter int unsigned W_ROWS = 16,
  parameter int unsigned X_COLS = 4,
  parameter int unsigned K_MAX  = 22
) (
  input  logic              clk,
  input  logic              rst_n,
  // input stream
  input  logic [AXIS_W-1:0] s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  // data mapper
  output logic              map_start,
  output instr_t            map_instr,
  output logic              map_tvalid,
  input  logic              map_tready,
  input  logic              map_done,
  // scheduler
  output logic              sch_start,
  output instr_t            sch_instr,
  input  logic              sch_done,
  // status
  output logic              busy,
  output logic              err,
  output logic              instr_fire   // one pulse per instruction accepted
);
  typedef enum logic [1:0] {D_IDLE, D_LOAD, D_COMP} dstate_e;
  dstate_e state;
  instr_t  ins;
  logic    ok;

  assign ins = instr_t'(s_tdata);

  always_comb begin
    unique case (ins.op)
      OP_NOP:     ok = 1'b1;
      OP_LOAD_W:  ok = ins.rows != 0 && 32'(ins.rows) <= W_ROWS && ins.ksb != 0 && 32'(ins.ksb) <= K_MAX;
      OP_LOAD_X:  ok = ins.cols != 0 && 32'(ins.cols) <= X_COLS && ins.ksb != 0 && 32'(ins.ksb) <= K_MAX;
      OP_COMPUTE: ok = ins.rows != 0 && 32'(ins.rows) <= W_ROWS && ins.cols != 0 &&
                       32'(ins.cols) <= X_COLS && ins.ksb != 0 && 32'(ins.ksb) <= K_MAX;
      default:    ok = 1'b0;
    endcase
  end

  wire hdr = (state == D_IDLE) && s_tvalid;

  assign s_tready   = (state == D_IDLE) ? 1'b1 : (state == D_LOAD) ? map_tready : 1'b0;
  assign map_tvalid = (state == D_LOAD) && s_tvalid;
  assign map_start  = hdr && ok && (ins.op == OP_LOAD_W || ins.op == OP_LOAD_X);
  assign sch_start  = hdr && ok && (ins.op == OP_COMPUTE);
  assign map_instr  = ins;
  assign sch_instr  = ins;
  assign busy       = (state != D_IDLE);
  assign instr_fire = hdr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE;
      err   <= 1'b0;
    end else begin
      unique case (state)
        D_IDLE: if (hdr) begin
          if (!ok) err <= 1'b1;
          else if (map_start) state <= D_LOAD;
          else if (sch_start) state <= D_COMP;
        end
        D_LOAD: if (map_done) state <= D_IDLE;
        D_COMP: if (sch_done) state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule
