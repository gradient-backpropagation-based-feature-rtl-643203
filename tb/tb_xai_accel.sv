// tb_xai_accel: end-to-end test of the accelerator on a small six-layer CNN.
//
// Four accelerators run the same network on the same random image and weights: one per
// attribution method (Saliency, DeconvNet, Guided Backpropagation) with the backward pass,
// and one Guided instance with inference only. Each has its own DRAM model with random
// AXI stalls. The network has the default table's structure at small sizes (conv 2->4 8x8,
// conv 4->4 8x8 + ReLU + pool, conv 4->4 4x4, conv 4->4 4x4 + pool, FC 16->12 + ReLU,
// FC 12->6), tiles of 4x4 and VT = 4, and is placed at DRAM word 2045 so that bursts cross a
// 4 KB boundary. After each run the whole DRAM image (activations, gradients, relevance map)
// and the predicted class are compared with xai_ref_pkg. Mechanisms (halo clipping, flipped
// and transposed loads, one-hot start, ReLU/pool/unpool stores, gradients cut by the
// backward ReLU, burst splitting, AXI stalls, inference-only mode) are counted and each must
// occur.
module tb_xai_accel;
  import xai_pkg::*;
  import xai_ref_pkg::*;

  localparam int OFS   = 2045;
  localparam int DEPTH = 8192;
  localparam int FRAC  = 8;

  function automatic net_t tiny_net();
    net_t n;
    n[0] = mk(L_CONV, 1'b0, 1'b0,  2,  4, 8, 8);
    n[1] = mk(L_CONV, 1'b1, 1'b1,  4,  4, 8, 8);
    n[2] = mk(L_CONV, 1'b0, 1'b0,  4,  4, 4, 4);
    n[3] = mk(L_CONV, 1'b0, 1'b1,  4,  4, 4, 4);
    n[4] = mk(L_FC,   1'b1, 1'b0, 16, 12, 1, 1);
    n[5] = mk(L_FC,   1'b0, 1'b0, 12,  6, 1, 1);
    n = place(n, NET_LAYERS);
    for (int i = 0; i < NET_LAYERS; i++) begin
      n[i].in_addr += OFS; n[i].out_addr += OFS; n[i].g_addr += OFS;
      n[i].w_addr  += OFS; n[i].b_addr   += OFS;
    end
    return n;
  endfunction

  localparam net_t  NET = tiny_net();
  localparam addr_t REL = rel_addr_of(NET, NET_LAYERS);
  localparam method_e MS [4] = '{SALIENCY, DECONVNET, GUIDED, GUIDED};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [3:0] start, done, busy;
  logic [3:0] bp_en = 4'b0111;
  logic [15:0] pred [4];
  int checks = 0, failures = 0;
  int reli = 0;

  for (genvar g = 0; g < 4; g++) begin : blk
    logic        arvalid, arready, rvalid, rready, rlast;
    logic [31:0] araddr, awaddr;
    logic [7:0]  arlen, awlen;
    logic [2:0]  arsize, awsize;
    logic [1:0]  arburst, awburst, wstrb;
    logic [15:0] rdata, wdata;
    logic        awvalid, awready, wvalid, wready, wlast, bvalid, bready;

    xai_accel #(.NET(NET), .REL_ADDR(REL), .NOH(4), .NOW(4), .VT(4), .FRAC(FRAC),
                .METHOD(MS[g])) u_dut (
      .clk, .rst_n, .start(start[g]), .bp_en(bp_en[g]), .busy(busy[g]), .done(done[g]),
      .pred_class(pred[g]),
      .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
      .m_arsize(arsize), .m_arburst(arburst), .m_rvalid(rvalid), .m_rready(rready),
      .m_rdata(rdata), .m_rlast(rlast),
      .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
      .m_awsize(awsize), .m_awburst(awburst), .m_wvalid(wvalid), .m_wready(wready),
      .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_bvalid(bvalid), .m_bready(bready));

    axi_mem_model #(.DEPTH(DEPTH), .STALL(1'b1)) u_mem (
      .clk, .rst_n, .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
      .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready);
  end

  // ---- mechanism counters (on the Guided instance with BP, and the inference one) ----
  int n_clip, n_flip, n_trans, n_hot, n_pool, n_unpool, n_relu_fp, n_relu_bp, n_cut,
      n_split, n_inference, n_conv_tiles, n_vmm_tiles;
  always @(posedge clk) if (rst_n) begin
    if (blk[2].u_dut.ld_valid && blk[2].u_dut.ld_ready) begin
      ld_cmd_t c;
      c = blk[2].u_dut.ld_cmd;
      if (c.target == T_CIN && (c.row0 != 0 || c.col0 != 0 || c.nrows < 6 || c.len < 6)) n_clip++;
      if (c.flip) n_flip++;
      if (c.transpose) n_trans++;
      if (c.onehot) n_hot++;
    end
    if (blk[2].u_dut.st_valid && blk[2].u_dut.st_ready) begin
      st_cmd_t s;
      s = blk[2].u_dut.st_cmd;
      if (s.pool) n_pool++;
      if (s.unpool) n_unpool++;
      if (s.relu_fp) n_relu_fp++;
      if (s.relu_bp) n_relu_bp++;
    end
    if (blk[2].u_dut.u_store.state == 2 && blk[2].u_dut.phase == PH_BP &&
        blk[2].u_dut.u_store.c.relu_bp && blk[2].u_dut.u_store.elem != 0 &&
        blk[2].u_dut.u_store.relu_y == 0) n_cut++;
    if (blk[2].u_dut.m_rvalid && blk[2].u_dut.m_rready && blk[2].u_dut.m_rlast &&
        blk[2].u_dut.u_rd.remain != 0) n_split++;
    if (blk[2].u_dut.u_conv.done) n_conv_tiles++;
    if (blk[2].u_dut.u_vmm.done) n_vmm_tiles++;
    if (done[3]) n_inference++;
  end

  logic [15:0] r0 [], r1 [], r2 [], r3 [];
  function automatic logic [15:0] refw(input int g, input int a);
    return (g == 0) ? r0[a] : (g == 1) ? r1[a] : (g == 2) ? r2[a] : r3[a];
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [15:0] init [] = new[DEPTH];
    int ref_pred [4];
    int wend;
    reli = REL;
    foreach (init[i]) init[i] = 16'($urandom_range(0, 65535));
    // image in [0, 1), weights and biases in [-0.25, 0.25]
    for (int i = 0; i < 2*8*8; i++) init[OFS + i] = 16'($urandom_range(0, 255));
    for (int l = 0; l < NET_LAYERS; l++) begin
      wend = int'(NET[l].out_addr);
      for (int a = int'(NET[l].w_addr); a < wend; a++) init[a] = 16'($urandom_range(0, 128) - 64);
    end
    r0 = new[DEPTH](init); r1 = new[DEPTH](init); r2 = new[DEPTH](init); r3 = new[DEPTH](init);
    run(r0, NET, REL, MS[0], FRAC, bp_en[0], ref_pred[0]);
    run(r1, NET, REL, MS[1], FRAC, bp_en[1], ref_pred[1]);
    run(r2, NET, REL, MS[2], FRAC, bp_en[2], ref_pred[2]);
    run(r3, NET, REL, MS[3], FRAC, bp_en[3], ref_pred[3]);
    for (int a = 0; a < DEPTH; a++) begin
      blk[0].u_mem.mem[a] = init[a]; blk[1].u_mem.mem[a] = init[a];
      blk[2].u_mem.mem[a] = init[a]; blk[3].u_mem.mem[a] = init[a];
    end
    start = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 4'hF;
    @(posedge clk);
    start = '0;
    begin
      bit [3:0] fin = '0;
      while (fin != 4'hF) begin
        @(posedge clk);
        fin |= done;
      end
    end
    repeat (5) @(posedge clk);
    for (int g = 0; g < 4; g++) begin
      int bad;
      bad = 0;
      check(int'(pred[g]) == ref_pred[g], $sformatf("inst %0d predicted class %0d, expected %0d",
                                                     g, pred[g], ref_pred[g]));
      for (int a = 0; a < DEPTH; a++) begin
        logic [15:0] got;
        got = (g == 0) ? blk[0].u_mem.mem[a] : (g == 1) ? blk[1].u_mem.mem[a] :
              (g == 2) ? blk[2].u_mem.mem[a] : blk[3].u_mem.mem[a];
        if (got !== refw(g, a)) begin
          bad++;
          if (bad < 4) $display("inst %0d addr %0d got %0d expected %0d", g, a,
                                $signed(got), $signed(refw(g, a)));
        end
      end
      check(bad == 0, $sformatf("inst %0d: %0d DRAM words differ", g, bad));
      // the relevance map is not all zero for the BP instances
      if (bp_en[g]) begin
        int nz;
        nz = 0;
        for (int f = 0; f < 2*8*8; f++) if (refw(g, reli + f) != 0) nz++;
        check(nz > 0, $sformatf("inst %0d: relevance map is zero", g));
      end
    end
    // methods give different maps
    begin
      int d01 = 0, d12 = 0;
      for (int f = 0; f < 2*8*8; f++) begin
        if (r0[reli + f] != r1[reli + f]) d01++;
        if (r1[reli + f] != r2[reli + f]) d12++;
      end
      $display("relevance words differing: saliency/deconvnet %0d, deconvnet/guided %0d", d01, d12);
    end
    $display("mechanisms: clip=%0d flip=%0d transpose=%0d onehot=%0d pool=%0d unpool=%0d relu_fp=%0d relu_bp=%0d cut=%0d split=%0d stalls=%0d inference=%0d conv_runs=%0d vmm_runs=%0d",
             n_clip, n_flip, n_trans, n_hot, n_pool, n_unpool, n_relu_fp, n_relu_bp, n_cut,
             n_split, blk[2].u_mem.n_stalls, n_inference, n_conv_tiles, n_vmm_tiles);
    check(n_clip > 0, "no halo clipping");
    check(n_flip > 0, "no flipped kernel load");
    check(n_trans > 0, "no transposed weight load");
    check(n_hot > 0, "no one-hot start");
    check(n_pool > 0, "no pooled store");
    check(n_unpool > 0, "no unpooled store");
    check(n_relu_fp > 0, "no ReLU store");
    check(n_relu_bp > 0, "no backward ReLU store");
    check(n_cut > 0, "backward ReLU never zeroed a gradient");
    check(n_split > 0, "no burst split at 4 KB");
    check(blk[2].u_mem.n_stalls > 0, "no AXI stall");
    check(n_inference == 1, "inference-only run did not finish once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
