// tb_xai_boards: the full CIFAR-10 attribution run on the two larger hardware configurations.
//
// Two accelerators run the same random image and weights side by side, each with its own
// DRAM model: a 4x8 convolution tile with VT = 16 (48 multipliers, the Ultra96-V2 sizing)
// and an 8x8 tile with VT = 32 (96 multipliers, the ZCU104 sizing). Because every output
// value is the full sum of its products before it is rounded, the result does not depend on
// the tiling: both DRAM images and predicted classes must equal the golden model's. The
// number of convolution and VMM block runs is checked against the count each tiling implies,
// and the forward and backward cycle counts are printed for comparison with the 4x4 default.
module tb_xai_boards;
  import xai_pkg::*;
  import xai_ref_pkg::*;

  localparam int DEPTH = 1 << 20;
  localparam int FRAC  = 8;
  localparam int CFG_NOH [2] = '{4, 8};
  localparam int CFG_NOW [2] = '{8, 8};
  localparam int CFG_VT  [2] = '{16, 32};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0;
  int checks = 0, failures = 0;
  logic [1:0] done_v;
  logic [15:0] pred [2];
  longint fp_cycles [2], bp_cycles [2];
  int n_conv [2], n_vmm [2];

  for (genvar g = 0; g < 2; g++) begin : cfg
    logic        arvalid, arready, rvalid, rready, rlast, busy;
    logic [31:0] araddr, awaddr;
    logic [7:0]  arlen, awlen;
    logic [2:0]  arsize, awsize;
    logic [1:0]  arburst, awburst, wstrb;
    logic [15:0] rdata, wdata;
    logic        awvalid, awready, wvalid, wready, wlast, bvalid, bready;

    xai_accel #(.NOH(CFG_NOH[g]), .NOW(CFG_NOW[g]), .VT(CFG_VT[g])) u_dut (
      .clk, .rst_n, .start, .bp_en(1'b1), .busy, .done(done_v[g]), .pred_class(pred[g]),
      .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
      .m_arsize(arsize), .m_arburst(arburst), .m_rvalid(rvalid), .m_rready(rready),
      .m_rdata(rdata), .m_rlast(rlast),
      .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
      .m_awsize(awsize), .m_awburst(awburst), .m_wvalid(wvalid), .m_wready(wready),
      .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_bvalid(bvalid), .m_bready(bready));

    axi_mem_model #(.DEPTH(DEPTH), .STALL(1'b0)) u_mem (
      .clk, .rst_n, .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
      .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .bvalid, .bready);

    always @(posedge clk) if (rst_n) begin
      if (busy && u_dut.phase == PH_FP) fp_cycles[g] <= fp_cycles[g] + 1;
      if (busy && u_dut.phase == PH_BP) bp_cycles[g] <= bp_cycles[g] + 1;
      if (u_dut.u_conv.done) n_conv[g] <= n_conv[g] + 1;
      if (u_dut.u_vmm.done)  n_vmm[g]  <= n_vmm[g] + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] memw(input int g, input int a);
    return (g == 0) ? cfg[0].u_mem.mem[a] : cfg[1].u_mem.mem[a];
  endfunction

  logic [15:0] init [], r [];
  initial begin
    int ref_pred, bad, exp_conv, exp_vmm, vt, ci, co;
    net_t n;
    n = DEFAULT_NET;
    for (int g = 0; g < 2; g++) begin
      fp_cycles[g] = 0; bp_cycles[g] = 0; n_conv[g] = 0; n_vmm[g] = 0;
    end
    init = new[DEPTH];
    foreach (init[i]) init[i] = '0;
    for (int i = 0; i < 3*32*32; i++) init[i] = 16'($urandom_range(0, 255));
    for (int l = 0; l < NET_LAYERS; l++)
      for (int a = int'(n[l].w_addr); a < int'(n[l].out_addr); a++)
        init[a] = 16'($urandom_range(0, 96) - 48);
    r = new[DEPTH](init);
    run(r, n, DEFAULT_REL, GUIDED, FRAC, 1'b1, ref_pred);
    for (int a = 0; a < DEPTH; a++) begin
      cfg[0].u_mem.mem[a] = init[a];
      cfg[1].u_mem.mem[a] = init[a];
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    begin
      logic [1:0] fin;
      fin = '0;
      while (fin != 2'b11) begin
        @(posedge clk);
        fin |= done_v;
      end
    end
    repeat (3) @(posedge clk);
    for (int g = 0; g < 2; g++) begin
      check(int'(pred[g]) == ref_pred, $sformatf("cfg %0d predicted %0d expected %0d", g, pred[g], ref_pred));
      bad = 0;
      for (int a = 0; a < DEPTH; a++)
        if (memw(g, a) !== r[a]) begin
          bad++;
          if (bad < 5) $display("cfg %0d addr %0d got %0d expected %0d", g, a,
                                $signed(memw(g, a)), $signed(r[a]));
        end
      check(bad == 0, $sformatf("cfg %0d: %0d DRAM words differ", g, bad));
      exp_conv = 0; exp_vmm = 0; vt = CFG_VT[g];
      for (int l = 0; l < NET_LAYERS; l++) begin
        ci = int'(n[l].cin); co = int'(n[l].cout);
        if (n[l].kind == L_CONV)
          exp_conv += 2 * co * ci * (int'(n[l].h) / CFG_NOH[g]) * (int'(n[l].w) / CFG_NOW[g]);
        else
          exp_vmm += 2 * ((co + vt - 1) / vt) * ((ci + vt - 1) / vt);
      end
      check(n_conv[g] == exp_conv, $sformatf("cfg %0d conv runs %0d expected %0d", g, n_conv[g], exp_conv));
      check(n_vmm[g] == exp_vmm, $sformatf("cfg %0d vmm runs %0d expected %0d", g, n_vmm[g], exp_vmm));
      $display("cfg %0d (%0dx%0d, VT %0d): FP %0d cycles, BP %0d cycles (%0.2f / %0.2f ms at 100 MHz)",
               g, CFG_NOH[g], CFG_NOW[g], CFG_VT[g], fp_cycles[g], bp_cycles[g],
               real'(fp_cycles[g]) / 1.0e5, real'(bp_cycles[g]) / 1.0e5);
    end
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
