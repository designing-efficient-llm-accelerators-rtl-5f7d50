// llm_acc_pkg: types, constants and arithmetic shared by the Q3_K x Q8_K MatMul accelerator.
//
// Super-block (SB) geometry follows the GGML formats: an SB holds 256 values split into 16
// tiles of 16. A Q3_K weight SB carries 16 6-bit tile scales, 256 3-bit weights and one 16-bit
// super-scaling factor (SSF); a Q8_K input SB carries 256 8-bit inputs and one 16-bit SSF.
// The byte layout on the stream, the instruction word and the floating-point helpers are this
// design's own choices (see the README):
//   * the weight SB is sent as the 110-byte GGML block_q3_K (hmask[32], qs[64], scales[12],
//     d as fp16), padded to 28 little-endian 32-bit words;
//   * the input SB is sent as 256 int8 values and a 16-bit fp16 SSF, padded to 65 words;
//   * the SSFs are IEEE half precision; products and sums are IEEE single precision with
//     truncation (round toward zero), subnormal single-precision values flushed to zero and no
//     NaN handling.
package llm_acc_pkg;

  localparam int unsigned SB_N      = 256;          // values per super-block
  localparam int unsigned N_TILES   = 16;           // tiles per super-block
  localparam int unsigned TILE_N    = 16;           // values per tile
  localparam int unsigned AXIS_W    = 32;           // stream data width
  localparam int unsigned Q3K_BYTES = 110;          // GGML block_q3_K size
  localparam int unsigned Q3K_WORDS = 28;           // padded to whole 32-bit words
  localparam int unsigned Q8K_WORDS = 65;           // 64 words of int8 + 1 word SSF

  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_LOAD_W  = 4'd1,   // followed by rows*ksb weight SBs
    OP_LOAD_X  = 4'd2,   // followed by cols*ksb input SBs
    OP_COMPUTE = 4'd3    // rows x cols outputs, ksb SBs each
  } opcode_e;

  // One 32-bit instruction word.
  typedef struct packed {
    opcode_e     op;
    logic [11:0] rows;   // weight rows (LOAD_W, COMPUTE)
    logic [7:0]  cols;   // input columns (LOAD_X, COMPUTE)
    logic [7:0]  ksb;    // super-blocks per row / column
  } instr_t;

  // One weight tile as stored in the weight buffer: raw 6-bit scale (bias 32) and 16 weights,
  // each already combined from its low 2 bits and its high-mask bit into a 3-bit two's
  // complement value in [-4, 3]. Lane 0 sits in the low bits.
  typedef struct packed {
    logic [5:0]              scale;
    logic [TILE_N-1:0][2:0]  q;
  } w_tile_t;

  // One input tile: 16 signed 8-bit inputs, lane 0 in the low byte.
  typedef logic [TILE_N-1:0][7:0] x_tile_t;

  // Profiler capture points, all 32-bit event counters.
  typedef struct packed {
    logic [31:0] busy_cycles;      // cycles with an instruction in progress
    logic [31:0] vpu_cycles;       // cycles a tile entered the vector PU
    logic [31:0] in_beats;         // words taken from the input stream
    logic [31:0] out_beats;        // words sent on the output stream
    logic [31:0] out_stall_cycles; // output word waiting for the consumer
    logic [31:0] hold_cycles;      // scheduler holding a finished sum (output slot full)
    logic [31:0] w_tile_writes;    // weight buffer tile words written
    logic [31:0] x_tile_writes;    // input buffer tile words written
    logic [31:0] instrs;           // instructions decoded
  } prof_t;

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  // ---------------------------------------------------------------------------------------
  // Floating-point helpers
  // ---------------------------------------------------------------------------------------

  // Exact conversion of a half-precision value to single precision (subnormals normalised).
  function automatic fp32_t fp16_to_fp32(fp16_t h);
    logic       s;
    logic [4:0] e;
    logic [9:0] f;
    int         p;
    logic [23:0] m;
    s = h[15]; e = h[14:10]; f = h[9:0];
    if (e == 5'd0) begin
      if (f == 10'd0) return {s, 31'd0};
      p = 0;
      for (int i = 0; i < 10; i++) if (f[i]) p = i;
      m = 24'(f) << (23 - p);
      return {s, 8'(p + 103), m[22:0]};
    end
    if (e == 5'h1f) return {s, 8'hff, f, 13'd0};
    return {s, 8'(32'(e) + 112), f, 13'd0};
  endfunction

  // Single-precision multiply, truncated.
  function automatic fp32_t fp32_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [22:0] m;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = p[46:24];
      e = e + 1;
    end else begin
      m = p[45:23];
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, 8'(e), m};
  endfunction

  // Signed integer to single precision, truncated (exact below 2^24 in magnitude).
  function automatic fp32_t int_to_fp32(logic signed [31:0] x);
    logic        s;
    logic [31:0] m;
    logic [31:0] n;
    int          p;
    if (x == 0) return 32'd0;
    s = x[31];
    m = s ? 32'(-x) : 32'(x);
    p = 0;
    for (int i = 0; i < 32; i++) if (m[i]) p = i;
    if (p >= 23) n = m >> (p - 23);
    else         n = m << (23 - p);
    return {s, 8'(127 + p), n[22:0]};
  endfunction

  // Single-precision add, three guard bits, truncated.
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [27:0] mx, my, sum;
    int          d, p, e;
    logic [27:0] n;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    my = (d > 27) ? 28'd0 : (my >> d);
    sum = (x[31] == y[31]) ? (mx + my) : (mx - my);
    if (sum == 28'd0) return 32'd0;
    p = 0;
    for (int i = 0; i < 28; i++) if (sum[i]) p = i;
    e = int'(x[30:23]) + p - 26;
    if (e <= 0)   return {x[31], 31'd0};
    if (e >= 255) return {x[31], 8'hff, 23'd0};
    if (p >= 23) n = sum >> (p - 23);
    else         n = sum << (23 - p);
    return {x[31], 8'(e), n[22:0]};
  endfunction

endpackage
