// sdp_ram: simple dual-port memory, one write port and one read port, used for the weight and
// input buffers. A write takes effect at the clock edge where we is high; a read returns the
// word at raddr one cycle after re is high (synchronous read, as a block RAM does) and holds it
// while re is low. Reading and writing the same address in one cycle returns the old word.
// The memory is an array, so synthesis maps it to block RAM; its contents are not reset.
module sdp_ram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
