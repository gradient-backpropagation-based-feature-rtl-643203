// tb_axi_wr_master: single-beat writes into a DRAM model whose AW and W channels stall at
// random. 60 random words are written to random addresses, one request at a time through the
// ready/valid handshake; afterwards every address holds its last written value and the model
// saw exactly 60 writes.
module tb_axi_wr_master;
  import xai_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid = 1'b0, req_ready;
  addr_t req_addr = '0;
  data_t req_data = '0;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, wstrb;
  logic [15:0] wdata;

  axi_wr_master u_dut (.clk, .rst_n, .req_valid, .req_ready, .req_addr, .req_data,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_wvalid(wvalid), .m_wready(wready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_bvalid(bvalid), .m_bready(bready));
  axi_mem_model #(.DEPTH(1024), .STALL(1'b1)) u_mem (.clk, .rst_n, .arvalid(1'b0), .arready(),
    .araddr('0), .arlen('0), .rvalid(), .rready(1'b1), .rdata(), .rlast(), .awvalid, .awready,
    .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  logic [15:0] exp_m [1024];
  initial begin
    for (int i = 0; i < 1024; i++) begin u_mem.mem[i] = 16'hDEAD; exp_m[i] = 16'hDEAD; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 60; n++) begin
      int a;
      logic [15:0] d;
      a = $urandom_range(0, 1023);
      d = 16'($urandom);
      exp_m[a] = d;
      req_valid <= 1'b1; req_addr <= addr_t'(a); req_data <= data_t'(d);
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      req_valid <= 1'b0;
      @(posedge clk);
    end
    while (!req_ready) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int i = 0; i < 1024; i++) check(u_mem.mem[i] == exp_m[i], $sformatf("word %0d", i));
    check(u_mem.n_writes == 60, $sformatf("%0d writes", u_mem.n_writes));
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
