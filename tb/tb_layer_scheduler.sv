// tb_layer_scheduler: the control sequence for a small six-layer network, with the loader,
// compute blocks and store unit replaced by responders that finish each request after a few
// cycles. Two runs: inference only, then forward + backward. Checked: the number of
// convolution and VMM runs and of stores the tiling implies; the layer order (0..5 forward,
// 5..0 backward); kernels loaded flipped exactly in the backward pass and FC weights
// transposed exactly in the backward pass; the backward pass starting with a one-hot load
// at the predicted class (in each of the 3 output tiles x 2 input tiles of the last layer,
// class 3 lies in the first input tile); the address of the first forward kernel load; one 'done' per run.
module tb_layer_scheduler;
  import xai_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic net_t tiny_net();
    net_t n;
    n[0] = mk(L_CONV, 1'b0, 1'b0,  2,  4, 8, 8);
    n[1] = mk(L_CONV, 1'b1, 1'b1,  4,  4, 8, 8);
    n[2] = mk(L_CONV, 1'b0, 1'b0,  4,  4, 4, 4);
    n[3] = mk(L_CONV, 1'b0, 1'b1,  4,  4, 4, 4);
    n[4] = mk(L_FC,   1'b1, 1'b0, 16, 12, 1, 1);
    n[5] = mk(L_FC,   1'b0, 1'b0, 12,  6, 1, 1);
    return place(n, NET_LAYERS);
  endfunction
  localparam net_t NET = tiny_net();

  logic start = 0, bp_en = 0, busy, done;
  phase_e phase;
  logic [7:0] layer;
  logic ld_valid, ld_done, conv_clr, conv_acc_init, conv_start, conv_done;
  logic vmm_clr, vmm_acc_clr, vmm_start, vmm_done, st_valid, st_done, st_from_vmm;
  ld_cmd_t ld_cmd;
  st_cmd_t st_cmd;

  layer_scheduler #(.NET(NET), .REL_ADDR(addr_t'(4000)), .NOH(4), .NOW(4), .VT(4)) u_dut (
    .clk, .rst_n, .start, .bp_en, .busy, .done, .phase, .layer,
    .ld_valid, .ld_ready(1'b1), .ld_cmd, .ld_done, .conv_clr, .conv_acc_init, .conv_start,
    .conv_done, .vmm_clr, .vmm_acc_clr, .vmm_start, .vmm_done, .st_valid, .st_ready(1'b1),
    .st_cmd, .st_done, .st_from_vmm, .best_idx(16'd3));

  // responders: finish each request 3 cycles after it is issued
  logic [2:0] ld_d = '0, cv_d = '0, vm_d = '0, st_d = '0;
  always_ff @(posedge clk) begin
    ld_d <= {ld_d[1:0], ld_valid};
    cv_d <= {cv_d[1:0], conv_start};
    vm_d <= {vm_d[1:0], vmm_start};
    st_d <= {st_d[1:0], st_valid};
  end
  assign ld_done   = ld_d[2];
  assign conv_done = cv_d[2];
  assign vmm_done  = vm_d[2];
  assign st_done   = st_d[2];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int n_conv, n_vmm, n_st, n_done, n_hot, bad_flip, bad_trans, bad_order, last_layer;
  phase_e last_phase;
  addr_t first_w;
  logic seen_w;
  always @(posedge clk) if (rst_n) begin
    if (conv_start || vmm_start) begin
      if (conv_start) n_conv++; else n_vmm++;
      if (phase == last_phase && ((phase == PH_FP && int'(layer) < last_layer) ||
                                  (phase == PH_BP && int'(layer) > last_layer))) bad_order++;
      if (phase != last_phase && int'(layer) != NET_LAYERS - 1) bad_order++;
      last_layer = int'(layer); last_phase = phase;
    end
    if (ld_valid) begin
      if (ld_cmd.target == T_CW && ld_cmd.flip != (phase == PH_BP)) bad_flip++;
      if (ld_cmd.target == T_VW && ld_cmd.transpose != (phase == PH_BP)) bad_trans++;
      if (ld_cmd.target == T_CW && !seen_w) begin first_w = ld_cmd.base; seen_w = 1; end
      if (ld_cmd.onehot) begin
        n_hot++;
        check(phase == PH_BP && int'(layer) == NET_LAYERS - 1, "one-hot outside the last BP layer");
        check(ld_cmd.hot == ((n_hot % 2 == 1) ? 16'd3 : 16'hFFFF), $sformatf("hot position %0d", ld_cmd.hot));
      end
    end
    if (st_valid) n_st++;
    if (done) n_done++;
  end

  task automatic run(input bit bp);
    n_conv = 0; n_vmm = 0; n_st = 0; n_done = 0; n_hot = 0; bad_flip = 0; bad_trans = 0;
    bad_order = 0; last_layer = 0; last_phase = PH_FP; seen_w = 0;
    bp_en = bp;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(1'b0);
    check(n_conv == 128, $sformatf("FP conv runs %0d", n_conv));
    check(n_vmm == 18, $sformatf("FP vmm runs %0d", n_vmm));
    check(n_st == 45, $sformatf("FP stores %0d", n_st));
    check(n_hot == 0 && n_done == 1 && bad_order == 0, "FP-only run");
    check(first_w == NET[0].w_addr, "first kernel address");
    run(1'b1);
    check(n_conv == 256, $sformatf("conv runs %0d", n_conv));
    check(n_vmm == 36, $sformatf("vmm runs %0d", n_vmm));
    check(n_st == 84, $sformatf("stores %0d", n_st));
    check(n_hot == 6, $sformatf("one-hot loads %0d", n_hot));
    check(bad_flip == 0, "kernel flip does not follow the phase");
    check(bad_trans == 0, "FC transpose does not follow the phase");
    check(bad_order == 0, "layer order");
    check(n_done == 1, "done count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
