// tb_maxpool_unit: the paper's max-pooling example and random windows.
// The 4x4 map of the pooling figure (9 2 1 1 / 3 0 4 5 / 3 6 2 1 / 7 2 5 3) must pool to
// 9 5 / 7 5 with the printed index mask 0 3 / 2 2. Then 500 random windows are compared
// with a reference maximum (first position on ties).
module tb_maxpool_unit;
  import xai_pkg::*;
  int checks = 0, failures = 0;
  data_t x [4];
  data_t y;
  logic [1:0] idx;
  maxpool_unit u_dut (.x, .y, .idx);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int m [4][4] = '{'{9, 2, 1, 1}, '{3, 0, 4, 5}, '{3, 6, 2, 1}, '{7, 2, 5, 3}};
  int ey [4] = '{9, 5, 7, 5};
  int ei [4] = '{0, 3, 2, 2};

  initial begin
    data_t b;
    int bi;
    for (int w = 0; w < 4; w++) begin
      for (int i = 0; i < 4; i++) x[i] = data_t'(m[(w/2)*2 + i/2][(w%2)*2 + i%2]);
      #1;
      check(y == data_t'(ey[w]), $sformatf("window %0d max %0d", w, y));
      check(idx == 2'(ei[w]), $sformatf("window %0d index %0d", w, idx));
    end
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < 4; i++) x[i] = data_t'($urandom_range(0, 15) - 8);
      b = x[0]; bi = 0;
      for (int i = 1; i < 4; i++) if (x[i] > b) begin b = x[i]; bi = i; end
      #1;
      check(y == b && idx == 2'(bi), "random window");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
