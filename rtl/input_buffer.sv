// input_buffer: on-chip store of the Q8_K input super-blocks of one input tile.
//
// The buffer holds up to X_COLS input columns of up to K_MAX super-blocks each. Every SB is kept
// as 16 tile words (x_tile_t: 16 signed 8-bit inputs) in a tile memory,
// and its 16-bit super-scaling factor in a separate SSF memory, so that one read returns one
// whole tile and the vector PU can take a tile every cycle. Addresses:
//   tile word : ((col * K_MAX) + sb) * 16 + tile
//   SSF word  :  (col * K_MAX) + sb
// Both memories are written by the data mapper and read by the SB loader, with a one-cycle
// read latency. The split into a tile memory and an SSF memory, the sizes and the address map
// are this design's choices; the paper only names the block.
module input_buffer
  import llm_acc_pkg::*;
#(
  parameter int unsigned X_COLS = 4,
  parameter int unsigned K_MAX  = 22,
  localparam int unsigned TDEPTH = X_COLS * K_MAX * N_TILES,
  localparam int unsigned SDEPTH = X_COLS * K_MAX,
  localparam int unsigned TAW    = $clog2(TDEPTH),
  localparam int unsigned SAW    = $clog2(SDEPTH)
) (
  input  logic           clk,
  // write side (data mapper)
  input  logic           t_we,
  input  logic [TAW-1:0] t_waddr,
  input  x_tile_t        t_wdata,
  input  logic           s_we,
  input  logic [SAW-1:0] s_waddr,
  input  fp16_t          s_wdata,
  // read side (SB loader)
  input  logic           re,
  input  logic [TAW-1:0] t_raddr,
  input  logic [SAW-1:0] s_raddr,
  output x_tile_t        t_rdata,
  output fp16_t          s_rdata
);
  sdp_ram #(.WIDTH($bits(x_tile_t)), .DEPTH(TDEPTH)) u_tiles (
    .clk, .we(t_we), .waddr(t_waddr), .wdata(t_wdata),
    .re, .raddr(t_raddr), .rdata(t_rdata)
  );

  sdp_ram #(.WIDTH(16), .DEPTH(SDEPTH)) u_ssf (
    .clk, .we(s_we), .waddr(s_waddr), .wdata(s_wdata),
    .re, .raddr(s_raddr), .rdata(s_rdata)
  );
endmodule
