// tb_vmm_engine: a 16-output tile accumulated over three 16-wide input tiles.
// Biases are written into the accumulators, then for each input tile random x and w are
// written and the engine run. The last tile is partial (5 inputs; clr leaves the rest zero).
// The outputs must equal sat16((bias << 8 + sum x*w) >>> 8) computed here; each run must take
// VT = 16 MAC cycles, seen by the loop as 18 edges from driving 'start' to observing 'done'.
module tb_vmm_engine;
  import xai_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clr = 0, acc_clr = 0, bias_we = 0, xb_we = 0, wb_we = 0, start = 0, busy, done;
  logic [7:0] bias_idx = '0, xb_idx = '0, wb_row = '0, wb_col = '0;
  data_t bias_data = '0, xb_data = '0, wb_data = '0;
  data_t tile_q [16];

  vmm_engine u_dut (.clk, .rst_n, .clr, .acc_clr, .bias_we, .bias_idx, .bias_data, .xb_we,
    .xb_idx, .xb_data, .wb_we, .wb_row, .wb_col, .wb_data, .start, .busy, .done, .tile_q);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int acc [16];
    data_t x [16];
    data_t w [16][16];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); acc_clr <= 1;
    @(posedge clk); acc_clr <= 0;
    for (int o = 0; o < 16; o++) begin
      data_t b;
      b = data_t'($urandom_range(0, 512) - 256);
      acc[o] = int'(b) <<< 8;
      bias_we <= 1; bias_idx <= 8'(o); bias_data <= b;
      @(posedge clk);
    end
    bias_we <= 0;
    for (int t = 0; t < 3; t++) begin
      int n, t0, t1;
      n = (t == 2) ? 5 : 16;
      @(posedge clk); clr <= 1;
      @(posedge clk); clr <= 0;
      for (int i = 0; i < 16; i++) begin
        x[i] = (i < n) ? data_t'($urandom_range(0, 2048) - 1024) : data_t'(0);
        for (int o = 0; o < 16; o++) w[o][i] = (i < n) ? data_t'($urandom_range(0, 512) - 256) : data_t'(0);
      end
      for (int i = 0; i < n; i++) begin
        xb_we <= 1; xb_idx <= 8'(i); xb_data <= x[i];
        @(posedge clk);
      end
      xb_we <= 0;
      for (int o = 0; o < 16; o++)
        for (int i = 0; i < n; i++) begin
          wb_we <= 1; wb_row <= 8'(o); wb_col <= 8'(i); wb_data <= w[o][i];
          @(posedge clk);
        end
      wb_we <= 0;
      for (int o = 0; o < 16; o++)
        for (int i = 0; i < 16; i++) acc[o] += int'(x[i]) * int'(w[o][i]);
      start <= 1; t0 = $time / 10;
      @(posedge clk); start <= 0;
      while (!done) @(posedge clk);
      t1 = $time / 10;
      check(t1 - t0 == 18, $sformatf("run took %0d cycles", t1 - t0));
    end
    #1;
    for (int o = 0; o < 16; o++)
      check(tile_q[o] == sat16(acc[o] >>> 8), $sformatf("out %0d: %0d expected %0d", o,
            tile_q[o], sat16(acc[o] >>> 8)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
