// tb_tile_loader: the four access patterns of the loader against a stalling DRAM model.
// 1) a clipped convolution input block (5 rows of 5 words, stride 8, placed at (1,1));
// 2) a 9-word kernel written mirrored (flip, the 180-degree rotation of the backward pass);
// 3) a 3 x 4 block of FC weight rows written transposed;
// 4) a one-hot vector of 1.0 at position 2, which must not touch DRAM.
// Every buffer write is captured and compared with the position and value expected from
// the memory contents; the number of writes and of AXI bursts is checked too.
module tb_tile_loader;
  import xai_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, done;
  ld_cmd_t cmd = '0;
  logic rd_cmd_valid, rd_cmd_ready, rd_valid, rd_done;
  addr_t rd_addr;
  logic [8:0] rd_len, rd_idx;
  data_t rd_data;
  logic bw_valid;
  ld_target_e bw_target;
  logic [7:0] bw_row, bw_col;
  data_t bw_data;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr;
  logic [7:0] arlen;
  logic [2:0] arsize;
  logic [1:0] arburst;
  logic [15:0] rdata;

  tile_loader u_dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .rd_cmd_valid,
    .rd_cmd_ready, .rd_addr, .rd_len, .rd_valid, .rd_idx, .rd_data, .rd_done, .bw_valid,
    .bw_target, .bw_row, .bw_col, .bw_data);
  axi_rd_master u_rd (.clk, .rst_n, .cmd_valid(rd_cmd_valid), .cmd_ready(rd_cmd_ready),
    .cmd_addr(rd_addr), .cmd_len(rd_len), .out_valid(rd_valid), .out_idx(rd_idx),
    .out_data(rd_data), .done(rd_done), .m_arvalid(arvalid), .m_arready(arready),
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rlast(rlast));
  axi_mem_model #(.DEPTH(1024), .STALL(1'b1)) u_mem (.clk, .rst_n, .arvalid, .arready, .araddr,
    .arlen, .rvalid, .rready, .rdata, .rlast, .awvalid(1'b0), .awready(), .awaddr('0),
    .wvalid(1'b0), .wready(), .wdata('0), .bvalid(), .bready(1'b1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  data_t buf_m [int];
  int nwr;
  always @(posedge clk) if (rst_n && bw_valid) begin
    buf_m[{int'(bw_target), 8'(bw_row), 8'(bw_col)}] = bw_data;
    nwr++;
  end
  function automatic data_t got(input ld_target_e t, input int r, input int c);
    int k = {int'(t), 8'(r), 8'(c)};
    return buf_m.exists(k) ? buf_m[k] : data_t'(16'h7EEE);
  endfunction

  task automatic issue(input ld_cmd_t c);
    buf_m.delete(); nwr = 0;
    @(negedge clk); cmd_valid = 1; cmd = c;
    @(posedge clk); #1;
    while (!cmd_ready) begin @(posedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
  endtask

  initial begin
    ld_cmd_t c;
    int b0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 16'(i * 3 + 1);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // 1) clipped conv input
    c = '0; c.target = T_CIN; c.base = 100; c.stride = 8; c.nrows = 5; c.len = 5;
    c.row0 = 1; c.col0 = 1;
    issue(c);
    check(nwr == 25, $sformatf("conv input writes %0d", nwr));
    for (int r = 0; r < 5; r++)
      for (int k = 0; k < 5; k++)
        check(got(T_CIN, 1 + r, 1 + k) == data_t'((100 + 8*r + k) * 3 + 1), "conv input word");
    // 2) flipped kernel
    c = '0; c.target = T_CW; c.base = 300; c.nrows = 1; c.len = 9; c.flip = 1;
    issue(c);
    check(nwr == 9, "kernel writes");
    for (int k = 0; k < 9; k++)
      check(got(T_CW, 0, 8 - k) == data_t'((300 + k) * 3 + 1), $sformatf("flipped word %0d", k));
    // 3) transposed FC block
    c = '0; c.target = T_VW; c.base = 500; c.stride = 20; c.nrows = 3; c.len = 4; c.transpose = 1;
    issue(c);
    check(nwr == 12, "transpose writes");
    for (int r = 0; r < 3; r++)
      for (int k = 0; k < 4; k++)
        check(got(T_VW, k, r) == data_t'((500 + 20*r + k) * 3 + 1), "transposed word");
    // 4) one-hot
    b0 = u_mem.n_bursts;
    c = '0; c.target = T_XIN; c.nrows = 1; c.len = 4; c.onehot = 1; c.hot = 2;
    issue(c);
    check(nwr == 4, "one-hot writes");
    for (int k = 0; k < 4; k++)
      check(got(T_XIN, 0, k) == ((k == 2) ? data_t'(256) : data_t'(0)), "one-hot word");
    check(u_mem.n_bursts == b0, "one-hot read DRAM");
    check(b0 == 5 + 1 + 3, $sformatf("%0d bursts before one-hot", b0));
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
