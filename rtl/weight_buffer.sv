// weight_buffer: on-chip store of the Q3_K weight super-blocks of one weight tile.
//
// The buffer holds up to W_ROWS weight rows of up to K_MAX super-blocks each. Every SB is kept
// as 16 tile words (w_tile_t: one 6-bit scale and 16 decoded 3-bit weights) in a tile memory,
// and its 16-bit super-scaling factor in a separate SSF memory, so that one read returns one
// whole tile and the vector PU can take a tile every cycle. Addresses:
//   tile word : ((row * K_MAX) + sb) * 16 + tile
//   SSF word  :  (row * K_MAX) + sb
// Both memories are written by the data mapper and read by the SB loader, with a one-cycle
// read latency. The split into a tile memory and an SSF memory, the sizes and the address map
// are this design's choices; the paper only names the block.
module weight_buffer
  import llm_acc_pkg::*;
#(
  parameter int unsigned W_ROWS = 16,
  parameter int unsigned K_MAX  = 22,
  localparam int unsigned TDEPTH = W_ROWS * K_MAX * N_TILES,
  localparam int unsigned SDEPTH = W_ROWS * K_MAX,
  localparam int unsigned TAW    = $clog2(TDEPTH),
  localparam int unsigned SAW    = $clog2(SDEPTH)
) (
  input  logic           clk,
  // write side (data mapper)
  input  logic           t_we,
  input  logic [TAW-1:0] t_waddr,
  input  w_tile_t        t_wdata,
  input  logic           s_we,
  input  logic [SAW-1:0] s_waddr,
  input  fp16_t          s_wdata,
  // read side (SB loader)
  input  logic           re,
  input  logic [TAW-1:0] t_raddr,
  input  logic [SAW-1:0] s_raddr,
  output w_tile_t        t_rdata,
  output fp16_t          s_rdata
);
  sdp_ram #(.WIDTH($bits(w_tile_t)), .DEPTH(TDEPTH)) u_tiles (
    .clk, .we(t_we), .waddr(t_waddr), .wdata(t_wdata),
    .re, .raddr(t_raddr), .rdata(t_rdata)
  );

  sdp_ram #(.WIDTH(16), .DEPTH(SDEPTH)) u_ssf (
    .clk, .we(s_we), .waddr(s_waddr), .wdata(s_wdata),
    .re, .raddr(s_raddr), .rdata(s_rdata)
  );
endmodule
