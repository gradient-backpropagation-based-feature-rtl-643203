// tb_xai_full: one complete attribution run of the CIFAR-10 network at default parameters.
//
// The accelerator is instantiated with all defaults (the 6-layer CIFAR-10 CNN, 4x4
// convolution tile, VT = 16, Guided Backpropagation) on a random 3x32x32 image and random
// weights in a 1 M-word DRAM model. After the forward and backward passes the whole DRAM
// image and the predicted class are compared with the golden model (xai_ref_pkg). The number
// of convolution and VMM block runs is checked against the count the tiling implies, and
// the cycle counts of the two passes are printed.
module tb_xai_full;
  import xai_pkg::*;
  import xai_ref_pkg::*;

  localparam int DEPTH = 1 << 20;
  localparam int FRAC  = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, done, busy;
  logic [15:0] pred;
  int checks = 0, failures = 0;

  logic        arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr, awaddr;
  logic [7:0]  arlen, awlen;
  logic [2:0]  arsize, awsize;
  logic [1:0]  arburst, awburst, wstrb;
  logic [15:0] rdata, wdata;
  logic        awvalid, awready, wvalid, wready, wlast, bvalid, bready;

  xai_accel u_dut (
    .clk, .rst_n, .start, .bp_en(1'b1), .busy, .done, .pred_class(pred),
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_arsize(arsize), .m_arburst(arburst), .m_rvalid(rvalid), .m_rready(rready),
    .m_rdata(rdata), .m_rlast(rlast),
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_wvalid(wvalid), .m_wready(wready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_bvalid(bvalid), .m_bready(bready));

  axi_mem_model #(.DEPTH(DEPTH), .STALL(1'b0)) u_mem (
    .clk, .rst_n, .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready);

  longint cyc = 0, fp_cycles = 0, bp_cycles = 0;
  int n_conv = 0, n_vmm = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (busy && u_dut.phase == PH_FP) fp_cycles <= fp_cycles + 1;
    if (busy && u_dut.phase == PH_BP) bp_cycles <= bp_cycles + 1;
    if (u_dut.u_conv.done) n_conv++;
    if (u_dut.u_vmm.done)  n_vmm++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [15:0] init [], r [];
  initial begin
    int ref_pred, bad, exp_conv, exp_vmm, reli;
    net_t n;
    n = DEFAULT_NET;
    reli = DEFAULT_REL;
    init = new[DEPTH];
    foreach (init[i]) init[i] = '0;
    for (int i = 0; i < 3*32*32; i++) init[i] = 16'($urandom_range(0, 255));
    for (int l = 0; l < NET_LAYERS; l++)
      for (int a = int'(n[l].w_addr); a < int'(n[l].out_addr); a++)
        init[a] = 16'($urandom_range(0, 96) - 48);
    check(reli + 3*32*32 <= DEPTH, "DRAM model too small");
    r = new[DEPTH](init);
    run(r, n, DEFAULT_REL, GUIDED, FRAC, 1'b1, ref_pred);
    for (int a = 0; a < DEPTH; a++) u_mem.mem[a] = init[a];
    exp_conv = 0; exp_vmm = 0;
    for (int l = 0; l < NET_LAYERS; l++)
      if (n[l].kind == L_CONV)
        exp_conv += 2 * int'(n[l].cout) * int'(n[l].cin) * (int'(n[l].h) / 4) * (int'(n[l].w) / 4);
      else
        exp_vmm += ((int'(n[l].cout) + 15) / 16) * ((int'(n[l].cin) + 15) / 16)
                 + ((int'(n[l].cin) + 15) / 16) * ((int'(n[l].cout) + 15) / 16);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    check(int'(pred) == ref_pred, $sformatf("predicted %0d expected %0d", pred, ref_pred));
    bad = 0;
    for (int a = 0; a < DEPTH; a++)
      if (u_mem.mem[a] !== r[a]) begin
        bad++;
        if (bad < 5) $display("addr %0d got %0d expected %0d", a, $signed(u_mem.mem[a]), $signed(r[a]));
      end
    check(bad == 0, $sformatf("%0d DRAM words differ", bad));
    begin
      int nz = 0;
      for (int f = 0; f < 3*32*32; f++) if (r[reli + f] != 0) nz++;
      $display("non-zero relevance values: %0d of %0d", nz, 3*32*32);
      check(nz > 0, "relevance map is all zero");
    end
    check(n_conv == exp_conv, $sformatf("conv runs %0d expected %0d", n_conv, exp_conv));
    check(n_vmm == exp_vmm, $sformatf("vmm runs %0d expected %0d", n_vmm, exp_vmm));
    $display("class %0d; FP %0d cycles, BP %0d cycles (%0.2f / %0.2f ms at 100 MHz); conv runs %0d, vmm runs %0d",
             pred, fp_cycles, bp_cycles, real'(fp_cycles) / 1.0e5, real'(bp_cycles) / 1.0e5,
             n_conv, n_vmm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
