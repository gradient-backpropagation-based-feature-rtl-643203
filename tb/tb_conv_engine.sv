// tb_conv_engine: two input channels accumulated into one 4x4 output tile.
// The accumulators are set to a bias, then for each of two channels a random 6x6 input tile
// and 3x3 kernel are written and the engine run; the requantised tile must equal
// sat16((bias << 8 + sum of in * w) >>> 8) computed here, and each run must take K*K = 9 MAC
// cycles: the testbench's loop sees 'done' 11 clock edges after it drives 'start' (one edge
// to sample start, nine MAC edges, one to observe done).
module tb_conv_engine;
  import xai_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clr = 0, acc_init = 0, ib_we = 0, wb_we = 0, start = 0, busy, done;
  data_t init_val = '0, ib_data = '0, wb_data = '0;
  logic [7:0] ib_row = '0, ib_col = '0, wb_idx = '0;
  data_t tile_q [16];

  conv_engine u_dut (.clk, .rst_n, .clr, .acc_init, .init_val, .ib_we, .ib_row, .ib_col,
    .ib_data, .wb_we, .wb_idx, .wb_data, .start, .busy, .done, .tile_q);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int acc [4][4];
    data_t in [6][6];
    data_t w [9];
    data_t b;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 4; trial++) begin
      b = data_t'($urandom_range(0, 512) - 256);
      @(posedge clk); acc_init <= 1; init_val <= b;
      @(posedge clk); acc_init <= 0;
      foreach (acc[i, j]) acc[i][j] = int'(b) <<< 8;
      for (int ch = 0; ch < 2; ch++) begin
        int t0, t1;
        @(posedge clk); clr <= 1;
        @(posedge clk); clr <= 0;
        for (int r = 0; r < 6; r++)
          for (int c = 0; c < 6; c++) begin
            // leave an edge row at zero, as the loader does for padding
            in[r][c] = (trial == 1 && r == 0) ? data_t'(0) : data_t'($urandom_range(0, 2048) - 1024);
            if (!(trial == 1 && r == 0)) begin
              ib_we <= 1; ib_row <= 8'(r); ib_col <= 8'(c); ib_data <= in[r][c];
              @(posedge clk);
            end
          end
        ib_we <= 0;
        for (int k = 0; k < 9; k++) begin
          w[k] = data_t'($urandom_range(0, 512) - 256);
          wb_we <= 1; wb_idx <= 8'(k); wb_data <= w[k];
          @(posedge clk);
        end
        wb_we <= 0;
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            for (int k = 0; k < 9; k++)
              acc[i][j] += int'(in[i + k/3][j + k%3]) * int'(w[k]);
        start <= 1; t0 = $time / 10;
        @(posedge clk); start <= 0;
        while (!done) @(posedge clk);
        t1 = $time / 10;
        check(t1 - t0 == 11, $sformatf("run took %0d cycles", t1 - t0));
      end
      #1;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          check(tile_q[i*4 + j] == sat16(acc[i][j] >>> 8),
                $sformatf("trial %0d out[%0d][%0d] %0d expected %0d", trial, i, j,
                          tile_q[i*4+j], sat16(acc[i][j] >>> 8)));
    end
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
