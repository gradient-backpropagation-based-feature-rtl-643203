// tb_axi_rd_master: burst reads from a stalling DRAM model.
// Three commands (one crossing the 4 KB boundary at word 2048, one single word, one of 256
// words crossing word 4096) are issued; every returned word and its index are checked
// against the memory pattern, 'done' must pulse once per command, and the number of AXI
// bursts must be 5 (the two boundary crossings each split one command in two).
module tb_axi_rd_master;
  import xai_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 1'b0, cmd_ready, out_valid, done;
  addr_t cmd_addr = '0;
  logic [8:0] cmd_len = '0, out_idx;
  data_t out_data;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr;
  logic [7:0] arlen;
  logic [2:0] arsize;
  logic [1:0] arburst;
  logic [15:0] rdata;

  axi_rd_master u_dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .out_valid,
    .out_idx, .out_data, .done, .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr),
    .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_rvalid(rvalid),
    .m_rready(rready), .m_rdata(rdata), .m_rlast(rlast));
  axi_mem_model #(.DEPTH(8192), .STALL(1'b1)) u_mem (.clk, .rst_n, .arvalid, .arready, .araddr,
    .arlen, .rvalid, .rready, .rdata, .rlast, .awvalid(1'b0), .awready(), .awaddr('0),
    .wvalid(1'b0), .wready(), .wdata('0), .bvalid(), .bready(1'b1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int expect_idx, n_done;
  addr_t base;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      check(out_idx == 9'(expect_idx), $sformatf("index %0d expected %0d", out_idx, expect_idx));
      check(out_data == data_t'((int'(base) + expect_idx) * 7 + 3), "data");
      expect_idx++;
    end
    if (done) n_done++;
  end

  task automatic rd(input int a, input int n);
    base = addr_t'(a); expect_idx = 0;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1'b1; cmd_addr <= addr_t'(a); cmd_len <= 9'(n);
    @(posedge clk);
    cmd_valid <= 1'b0;
    while (!done) @(posedge clk);
    check(expect_idx == n, $sformatf("got %0d words of %0d", expect_idx, n));
  endtask

  initial begin
    for (int i = 0; i < 8192; i++) u_mem.mem[i] = 16'(i * 7 + 3);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    rd(2040, 20);
    rd(100, 1);
    rd(4000, 256);
    repeat (2) @(posedge clk);
    check(n_done == 3, "done count");
    check(u_mem.n_bursts == 5, $sformatf("%0d bursts, expected 5", u_mem.n_bursts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
