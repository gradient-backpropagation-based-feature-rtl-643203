// tb_pool_index_mem: the 12288-entry 2-bit pool index memory at its default depth.
// Random indices are written to all entries, then read back with the one-cycle read
// latency, first every seventh entry in order and then at random addresses.
module tb_pool_index_mem;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [1:0] wdata = '0, rdata;
  logic [13:0] addr = '0;
  logic [1:0] model [12288];
  pool_index_mem u_dut (.clk, .we, .addr, .wdata, .rdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int a;
    for (a = 0; a < 12288; a++) begin
      model[a] = 2'($urandom);
      @(negedge clk); we <= 1; addr <= 14'(a); wdata <= model[a];
    end
    @(negedge clk); we <= 0;
    for (a = 0; a < 12288; a += 7) begin
      @(negedge clk); addr <= 14'(a);
      @(posedge clk); #1;
      check(rdata == model[a], $sformatf("entry %0d", a));
    end
    for (int n = 0; n < 500; n++) begin
      a = $urandom_range(0, 12287);
      @(negedge clk); addr <= 14'(a);
      @(posedge clk); #1;
      check(rdata == model[a], $sformatf("entry %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
