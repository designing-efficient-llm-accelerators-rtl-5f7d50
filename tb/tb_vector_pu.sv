// tb_vector_pu: feeds random Q3_K / Q8_K super-block pairs, tile by tile and back to back,
// into the vector PU and compares each result with a real-valued reference of GGML's
// Q3_K x Q8_K dot product. Also covers the extreme integer sum (-2^22), a zero SSF and a
// subnormal SSF, and checks the timing: one result per 16 input cycles, three cycles after
// the SB's last tile.
module tb_vector_pu;
  import llm_acc_pkg::*;
  import tb_q3k_pkg::*;

  localparam int NSB = 40;

  logic    clk = 0, rst_n = 0;
  logic    in_valid = 0, in_first = 0, in_last = 0;
  w_tile_t w_tile;
  x_tile_t x_tile;
  fp16_t   w_ssf, x_ssf;
  logic    out_valid;
  fp32_t   out_result;

  int checks = 0, failures = 0;

  vector_pu dut (.*);

  always #5 clk = ~clk;

  q3k_raw_t wr [NSB];
  q8k_raw_t xr [NSB];
  int       last_cycle [NSB];
  int       cycle = 0;
  int       nres = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) if (rst_n && out_valid) begin
    real want, got, mag;
    want = sb_dot_real(wr[nres], xr[nres]);
    got  = fp32_to_real(out_result);
    mag  = fabs(want);
    checks++;
    if (!close(got, want, mag)) begin
      failures++;
      $display("FAIL sb %0d: got %g want %g", nres, got, want);
    end
    checks++;
    if (cycle - last_cycle[nres] != 3) begin
      failures++;
      $display("FAIL sb %0d latency %0d", nres, cycle - last_cycle[nres]);
    end
    if (nres > 0) begin
      checks++;
      if (last_cycle[nres] - last_cycle[nres-1] != 16) begin
        failures++;
        $display("FAIL sb %0d spacing", nres);
      end
    end
    nres++;
  end

  initial begin
    int w[256];
    int sc[16];
    for (int s = 0; s < NSB; s++) begin
      wr[s] = rand_q3k(rand_fp16());
      xr[s] = rand_q8k(rand_fp16());
    end
    // SB 1: extreme sum: all weights -4 (hmask 0, qs 0), all scales 0 (-32), all inputs -128
    for (int i = 0; i < 108; i++) wr[1][i] = 8'h00;
    for (int i = 0; i < 256; i++) xr[1][i] = 8'h80;
    // SB 2: zero SSF; SB 3: subnormal SSF
    wr[2][109:108] = 16'h0000;
    wr[3][109:108] = 16'h0123;
    xr[3][257:256] = 16'h3c00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int s = 0; s < NSB; s++) begin
      q3k_decode(wr[s], w, sc);
      for (int t = 0; t < 16; t++) begin
        #1;
        in_valid = 1;
        in_first = (t == 0);
        in_last  = (t == 15);
        for (int l = 0; l < 16; l++) begin
          w_tile.q[l] = 3'(w[16*t + l]);
          x_tile[l]   = xr[s][16*t + l];
        end
        w_tile.scale = 6'(sc[t] + 32);
        w_ssf = q3k_d(wr[s]);
        x_ssf = q8k_d(xr[s]);
        @(posedge clk);
        if (t == 15) last_cycle[s] = cycle;
      end
    end
    #1 in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nres != NSB) begin
      failures++;
      $display("FAIL got %0d results", nres);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
