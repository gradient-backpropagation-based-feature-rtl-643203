// tb_relu_mask_mem: the 128-bit ReLU mask memory at its default depth.
// Bits read zero after reset; random bits are written to all addresses, then read back with
// the one-cycle read latency; finally some bits are flipped and re-read.
module tb_relu_mask_mem;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, wdata = 0, rdata;
  logic [6:0] addr = '0;
  logic model [128];
  relu_mask_mem u_dut (.clk, .rst_n, .we, .addr, .wdata, .rdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic rd_check(input int a);
    @(negedge clk); addr <= 7'(a); we <= 0;
    @(posedge clk); #1;
    check(rdata == model[a], $sformatf("bit %0d", a));
  endtask

  initial begin
    int a;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (a = 0; a < 128; a += 17) begin model[a] = 1'b0; rd_check(a); end
    for (a = 0; a < 128; a++) begin
      model[a] = 1'($urandom);
      @(negedge clk); we <= 1; addr <= 7'(a); wdata <= model[a];
    end
    @(negedge clk); we <= 0;
    for (a = 0; a < 128; a++) rd_check(a);
    for (int n = 0; n < 40; n++) begin
      a = $urandom_range(0, 127);
      model[a] = ~model[a];
      @(negedge clk); we <= 1; addr <= 7'(a); wdata <= model[a];
      @(negedge clk); we <= 0;
      rd_check(a);
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
