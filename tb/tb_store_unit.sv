// tb_store_unit: output stores with the non-linear layers, through the AXI write master into
// a stalling DRAM model, with the two mask memories attached (Guided Backpropagation).
// A) forward, 2D tile of 4x4 random values with ReLU and 2x2 max-pool: the four pooled values
//    must land at grid (1..2, 2..3) of an 8-wide map, with the window indices in the pool
//    index memory and the ReLU bits in the mask memory;
// B) backward, a 2x2 gradient tile at the same grid position with backward ReLU and
//    unpooling: each gradient, gated by the stored bit and its sign, must land at the stored
//    window position of a 16-wide map, zeros at the three others (windows 1 and 2 have
//    positive maxima at positions 1 and 2, so a swapped index bit is seen);
// C) forward, 1D run of 5 + 3 values with class tracking: values stored in order and the
//    index of the largest reported.
// The number of DRAM writes of each store is checked as well.
module tb_store_unit;
  import xai_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  phase_e phase = PH_FP;
  logic cmd_valid = 0, cmd_ready, done;
  st_cmd_t cmd = '0;
  data_t tile [16];
  logic rm_we, rm_wdata, rm_rdata, pm_we;
  logic [15:0] rm_addr, pm_addr, best_idx;
  logic [1:0] pm_wdata, pm_rdata;
  logic wr_valid, wr_ready;
  addr_t wr_addr;
  data_t wr_data, best_val;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, wstrb;
  logic [15:0] wdata;

  store_unit #(.TN(16), .METHOD(GUIDED)) u_dut (.clk, .rst_n, .phase, .cmd_valid, .cmd_ready,
    .cmd, .done, .tile, .rm_we, .rm_addr, .rm_wdata, .rm_rdata, .pm_we, .pm_addr, .pm_wdata,
    .pm_rdata, .wr_valid, .wr_ready, .wr_addr, .wr_data, .best_idx, .best_val);
  relu_mask_mem #(.DEPTH(128)) u_rm (.clk, .rst_n, .we(rm_we), .addr(rm_addr[6:0]),
    .wdata(rm_wdata), .rdata(rm_rdata));
  pool_index_mem #(.DEPTH(64)) u_pm (.clk, .we(pm_we), .addr(pm_addr[5:0]), .wdata(pm_wdata),
    .rdata(pm_rdata));
  axi_wr_master u_wr (.clk, .rst_n, .req_valid(wr_valid), .req_ready(wr_ready),
    .req_addr(wr_addr), .req_data(wr_data), .m_awvalid(awvalid), .m_awready(awready),
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast),
    .m_bvalid(bvalid), .m_bready(bready));
  axi_mem_model #(.DEPTH(1024), .STALL(1'b1)) u_mem (.clk, .rst_n, .arvalid(1'b0), .arready(),
    .araddr('0), .arlen('0), .rvalid(), .rready(1'b1), .rdata(), .rlast(), .awvalid, .awready,
    .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic issue(input st_cmd_t c);
    @(negedge clk); cmd_valid = 1; cmd = c;
    @(posedge clk); #1;
    while (!cmd_ready) begin @(posedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
    while (!done) @(posedge clk);
    while (!wr_ready) @(posedge clk);
    repeat (4) @(posedge clk);
  endtask

  data_t pv [4];
  int    pi [4];
  logic  pm [4];

  initial begin
    st_cmd_t c;
    int w0, g, a;
    data_t v, gm;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 16'h5555;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // ---- A: FP 2D, ReLU + pool ----
    for (int i = 0; i < 16; i++) tile[i] = data_t'($urandom_range(0, 200) - 120);
    tile[0] = -5; tile[1] = -7; tile[4] = -1; tile[5] = -9;   // one window all negative
    tile[3] = 110; tile[12] = 105;   // windows 1 and 2: positive maxima at positions 1 and 2
    for (int w = 0; w < 4; w++) begin
      int wr, wc;
      wr = w / 2; wc = w % 2;
      pv[w] = tile[(2*wr)*4 + 2*wc]; pi[w] = 0;
      for (int i = 1; i < 4; i++)
        if (tile[(2*wr + i/2)*4 + 2*wc + i%2] > pv[w]) begin
          pv[w] = tile[(2*wr + i/2)*4 + 2*wc + i%2]; pi[w] = i;
        end
      pm[w] = (pv[w] > 0);
      if (pv[w] < 0) pv[w] = 0;
    end
    c = '0; c.mode_2d = 1; c.pool = 1; c.relu_fp = 1; c.rows = 4; c.cols = 4; c.dst_base = 100;
    c.pr0 = 1; c.pc0 = 2; c.grid_w = 8; c.grid_h = 4; c.relu_idx = 10; c.pool_idx = 20;
    phase = PH_FP;
    w0 = u_mem.n_writes;
    issue(c);
    check(u_mem.n_writes - w0 == 4, "A: write count");
    for (int w = 0; w < 4; w++) begin
      int f;
      f = (1 + w/2) * 8 + 2 + w%2;
      check(data_t'(u_mem.mem[100 + f]) == pv[w], $sformatf("A: pooled value %0d", w));
      check(u_pm.mem[20 + f] == 2'(pi[w]), $sformatf("A: pool index %0d", w));
      check(u_rm.mem[10 + f] == pm[w], $sformatf("A: relu bit %0d", w));
    end
    // ---- B: BP 2D, backward ReLU + unpool ----
    for (int i = 0; i < 4; i++) tile[i] = data_t'($urandom_range(0, 200) - 100);
    tile[1] = 33; tile[2] = 44; tile[3] = 77;
    c = '0; c.mode_2d = 1; c.unpool = 1; c.relu_bp = 1; c.rows = 2; c.cols = 2;
    c.dst_base = 400; c.pr0 = 1; c.pc0 = 2; c.grid_w = 8; c.grid_h = 4;
    c.relu_idx = 10; c.pool_idx = 20;
    phase = PH_BP;
    w0 = u_mem.n_writes;
    issue(c);
    check(u_mem.n_writes - w0 == 16, "B: write count");
    for (int w = 0; w < 4; w++) begin
      int pr, pc;
      pr = 1 + w/2; pc = 2 + w%2;
      gm = (pm[w] && tile[w] > 0) ? tile[w] : data_t'(0);
      for (int i = 0; i < 4; i++) begin
        a = 400 + (2*pr + i/2) * 16 + 2*pc + i%2;
        check(data_t'(u_mem.mem[a]) == ((i == pi[w]) ? gm : data_t'(0)),
              $sformatf("B: window %0d pos %0d = %0d", w, i, $signed(u_mem.mem[a])));
      end
    end
    // ---- C: FP 1D with class tracking ----
    phase = PH_FP;
    for (int i = 0; i < 16; i++) tile[i] = data_t'($urandom_range(0, 100) - 50);
    tile[3] = 90;
    c = '0; c.rows = 1; c.cols = 5; c.first = 1; c.argmax = 1; c.dst_base = 600;
    c.grid_w = 8; c.grid_h = 1;
    issue(c);
    for (int i = 0; i < 5; i++) check(data_t'(u_mem.mem[600 + i]) == tile[i], "C: first run");
    for (int i = 0; i < 3; i++) tile[i] = data_t'(i * 40);   // 80 at index 5 + 2 = 7 < 90
    tile[1] = 95;                                            // 95 at index 6 wins
    c.cols = 3; c.first = 0;
    issue(c);
    for (int i = 0; i < 3; i++) check(data_t'(u_mem.mem[605 + i]) == tile[i], "C: second run");
    check(best_idx == 16'd6, $sformatf("C: best index %0d", best_idx));
    check(best_val == 95, "C: best value");
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
