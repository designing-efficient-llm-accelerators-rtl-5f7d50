// tb_weight_buffer: writes random tile and SSF words at random addresses of a small weight
// buffer, keeps a shadow copy, and reads every written address back, checking the data and the
// one-cycle read latency (the read data change only on the edge after the read).
module tb_weight_buffer;
  import llm_acc_pkg::*;

  localparam int unsigned W_ROWS = 3, K_MAX = 5;
  localparam int unsigned TD = W_ROWS * K_MAX * 16, SD = W_ROWS * K_MAX;
  localparam int unsigned TAW = $clog2(TD), SAW = $clog2(SD);

  logic clk = 0;
  logic t_we = 0, s_we = 0, re = 0;
  logic [TAW-1:0] t_waddr = '0, t_raddr = '0;
  logic [SAW-1:0] s_waddr = '0, s_raddr = '0;
  w_tile_t t_wdata = '0, t_rdata;
  fp16_t   s_wdata = '0, s_rdata;

  weight_buffer #(.W_ROWS(W_ROWS), .K_MAX(K_MAX)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  w_tile_t tshadow [TD];
  fp16_t   sshadow [SD];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int a = 0; a < int'(TD); a++) begin
      #1;
      t_we = 1; t_waddr = TAW'(a); t_wdata = w_tile_t'({$urandom, $urandom});
      tshadow[a] = t_wdata;
      s_we = (a < int'(SD));
      s_waddr = SAW'(a % SD); s_wdata = 16'($urandom);
      if (a < int'(SD)) sshadow[a] = s_wdata;
      @(posedge clk);
    end
    #1 t_we = 0; s_we = 0;
    for (int a = 0; a < int'(TD); a++) begin
      w_tile_t prev_rd;
      #1;
      re = 1; t_raddr = TAW'(a); s_raddr = SAW'(a % SD);
      prev_rd = t_rdata;
      #3;
      checks++;
      if (a > 0 && t_rdata != prev_rd) begin
        failures++; $display("FAIL read data changed prev_rd the clock edge");
      end
      @(posedge clk);
      #1;
      checks++;
      if (t_rdata != tshadow[a]) begin
        failures++; $display("FAIL tile %0d", a);
      end
      if (a < int'(SD)) begin
        checks++;
        if (s_rdata != sshadow[a]) begin
          failures++; $display("FAIL ssf %0d", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
