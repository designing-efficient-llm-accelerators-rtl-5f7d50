// tb_q3k_pkg: reference model shared by the testbenches. It builds random GGML super-blocks
// in their stream byte layout and computes dot products with real arithmetic, decoding the
// Q3_K block the way GGML's reference C code does (nested loops with a moving bit mask and
// the kmask-based scale unpacking), which is written independently of the RTL's closed-form
// decode.
package tb_q3k_pkg;

  typedef logic [111:0][7:0] q3k_raw_t;   // 110 bytes + 2 bytes of padding, byte 0 lowest
  typedef logic [259:0][7:0] q8k_raw_t;   // 256 int8 + fp16 SSF + 2 bytes of padding

  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e > 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else       for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) m = real'(h[9:0]) * pow2(-24);
    else        m = (1.0 + real'(h[9:0]) / 1024.0) * pow2(e - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic real fp32_to_real(logic [31:0] f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(e - 127);
    return f[31] ? -m : m;
  endfunction

  // A random normal fp16 number with magnitude in [2^-10, 2^6).
  function automatic logic [15:0] rand_fp16();
    logic [4:0] e;
    e = 5'(5 + $urandom_range(0, 15));
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  function automatic q3k_raw_t rand_q3k(logic [15:0] d);
    q3k_raw_t r;
    for (int i = 0; i < 108; i++) r[i] = 8'($urandom);
    r[108] = d[7:0];
    r[109] = d[15:8];
    r[110] = 8'h00;
    r[111] = 8'h00;
    return r;
  endfunction

  function automatic q8k_raw_t rand_q8k(logic [15:0] d);
    q8k_raw_t r;
    for (int i = 0; i < 256; i++) r[i] = 8'($urandom);
    r[256] = d[7:0];
    r[257] = d[15:8];
    r[258] = 8'h00;
    r[259] = 8'h00;
    return r;
  endfunction

  function automatic logic [15:0] q3k_d(q3k_raw_t r);
    return {r[109], r[108]};
  endfunction

  function automatic logic [15:0] q8k_d(q8k_raw_t r);
    return {r[257], r[256]};
  endfunction

  // GGML-style decode of a Q3_K block: weights in [-4, 3] and tile scales minus 32.
  function automatic void q3k_decode(input q3k_raw_t r, output int w[256], output int sc[16]);
    logic [31:0] aux0, aux1, aux2, aux3, tmp;
    logic [31:0] kmask1, kmask2;
    logic [127:0] all;
    int   qoff, idx, is, shift;
    logic [7:0] m;
    kmask1 = 32'h03030303;
    kmask2 = 32'h0f0f0f0f;
    aux0 = {r[99], r[98], r[97], r[96]};
    aux1 = {r[103], r[102], r[101], r[100]};
    tmp  = {r[107], r[106], r[105], r[104]};
    aux2 = ((aux0 >> 4) & kmask2) | (((tmp >> 4) & kmask1) << 4);
    aux3 = ((aux1 >> 4) & kmask2) | (((tmp >> 6) & kmask1) << 4);
    aux0 = (aux0 & kmask2) | (((tmp >> 0) & kmask1) << 4);
    aux1 = (aux1 & kmask2) | (((tmp >> 2) & kmask1) << 4);
    all  = {aux3, aux2, aux1, aux0};
    for (int j = 0; j < 16; j++) sc[j] = int'(all[8*j +: 8]) - 32;
    qoff = 32;
    idx  = 0;
    is   = 0;
    m    = 8'd1;
    for (int n = 0; n < 256; n += 128) begin
      shift = 0;
      for (int j = 0; j < 4; j++) begin
        for (int h = 0; h < 2; h++) begin
          for (int l = 0; l < 16; l++) begin
            w[idx] = int'((r[qoff + l + 16*h] >> shift) & 8'd3) - (((r[l + 16*h] & m) != 0) ? 0 : 4);
            idx++;
          end
          is++;
        end
        shift += 2;
        m = m << 1;
      end
      qoff += 32;
    end
  endfunction

  function automatic int q8k_val(q8k_raw_t r, int i);
    return int'($signed(r[i]));
  endfunction

  // Integer part of the SB dot product: sum_t sc_t * sum_l w * x.
  function automatic int sb_dot_int(q3k_raw_t wr, q8k_raw_t xr);
    int w[256];
    int sc[16];
    int s, ts;
    q3k_decode(wr, w, sc);
    s = 0;
    for (int t = 0; t < 16; t++) begin
      ts = 0;
      for (int l = 0; l < 16; l++) ts += w[16*t + l] * q8k_val(xr, 16*t + l);
      s += sc[t] * ts;
    end
    return s;
  endfunction

  function automatic real sb_dot_real(q3k_raw_t wr, q8k_raw_t xr);
    return real'(sb_dot_int(wr, xr)) * fp16_to_real(q3k_d(wr)) * fp16_to_real(q8k_d(xr));
  endfunction

  function automatic real fabs(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // Tolerance check for truncated single-precision results.
  function automatic bit close(real got, real want, real mag);
    return fabs(got - want) <= 1.0e-5 * mag + 1.0e-30;
  endfunction

endpackage
