// tb_unpool_unit: the paper's unpooling example and every index.
// Gradients 4 6 / 1 3 with the index mask 0 3 / 2 2 of the pooling figure must give the
// printed 4x4 map (4 at (0,0), 6 at (1,3), 1 at (3,0), 3 at (3,2), zeros elsewhere). Then
// random gradients with random indices.
module tb_unpool_unit;
  import xai_pkg::*;
  int checks = 0, failures = 0;
  data_t g;
  logic [1:0] idx;
  data_t y [4];
  unpool_unit u_dut (.g, .idx, .y);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int gs [4] = '{4, 6, 1, 3};
  int ix [4] = '{0, 3, 2, 2};
  int exp_m [4][4] = '{'{4, 0, 0, 0}, '{0, 0, 0, 6}, '{0, 0, 0, 0}, '{1, 0, 3, 0}};
  int got [4][4];

  initial begin
    for (int w = 0; w < 4; w++) begin
      g = data_t'(gs[w]); idx = 2'(ix[w]); #1;
      for (int i = 0; i < 4; i++) got[(w/2)*2 + i/2][(w%2)*2 + i%2] = int'(y[i]);
    end
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++)
        check(got[r][c] == exp_m[r][c], $sformatf("(%0d,%0d) = %0d", r, c, got[r][c]));
    for (int n = 0; n < 200; n++) begin
      g = data_t'($urandom); idx = 2'($urandom); #1;
      for (int i = 0; i < 4; i++) check(y[i] == ((2'(i) == idx) ? g : data_t'(0)), "random");
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
