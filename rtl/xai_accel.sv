// xai_accel: gradient-backpropagation feature-attribution accelerator (top level).
//
// The accelerator runs a CNN twice over for one input image held in DRAM: a forward pass
// that computes the class scores and keeps only small masks on chip (1 bit per ReLU output,
// 2 bits per max-pool output), then a backward pass from the winning class back to the image,
// whose result is a relevance value per input pixel (the attribution heatmap). The backward
// pass reuses the forward-pass hardware: the same convolution block (NOH x NOW MACs) and VMM
// block (VT MACs), the same buffers, only loaded with other DRAM access patterns (flipped and
// transposed kernels, transposed FC weights). The ReLU rule of the backward pass is chosen by
// METHOD at design time: Saliency Map, DeconvNet (no ReLU mask memory is built) or Guided
// Backpropagation.
// Blocks: layer_scheduler (control), tile_loader + axi_rd_master (DRAM -> buffers),
// conv_engine, vmm_engine, store_unit + axi_wr_master (buffers -> DRAM, with ReLU, max-pool,
// unpool), relu_mask_mem, pool_index_mem.
// Interface: a 16-bit AXI4 master (read and write channels) to DRAM, whose layout is given by
// the layer table NET (see xai_pkg); 'start' (pulse) begins a run, 'bp_en' adds the backward
// pass (without it the run is plain inference), 'done' pulses at the end, 'pred_class' is the
// index of the largest output, valid from the end of the forward pass. The relevance map is
// written at REL_ADDR, channel-major like the image.
// Defaults: NOH = NOW = 4 and VT = 16 are the paper's configuration for its smallest board
// (Pynq-Z2, 4 x 4 + 16 = 32 DSP slices); 16-bit data follows the paper; FRAC = 8 fraction
// bits and the Guided Backpropagation default are this design's choice.
module xai_accel
  import xai_pkg::*;
#(
  parameter net_t    NET        = DEFAULT_NET,
  parameter addr_t   REL_ADDR   = DEFAULT_REL,
  parameter int      NOH        = 4,
  parameter int      NOW        = 4,
  parameter int      VT         = 16,
  parameter int      FRAC       = 8,
  parameter method_e METHOD     = GUIDED,
  parameter int      RELU_DEPTH = 128,
  parameter int      POOL_DEPTH = 12288
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        bp_en,
  output logic        busy,
  output logic        done,
  output logic [15:0] pred_class,
  // AXI4 read channels
  output logic        m_arvalid,
  input  logic        m_arready,
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  input  logic        m_rvalid,
  output logic        m_rready,
  input  logic [15:0] m_rdata,
  input  logic        m_rlast,
  // AXI4 write channels
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_wvalid,
  input  logic        m_wready,
  output logic [15:0] m_wdata,
  output logic [1:0]  m_wstrb,
  output logic        m_wlast,
  input  logic        m_bvalid,
  output logic        m_bready
);
  localparam int TN = (NOH * NOW > VT) ? NOH * NOW : VT;

  phase_e  phase;
  logic [7:0] layer;
  // scheduler <-> loader / engines / store
  logic    ld_valid, ld_ready, ld_done;
  ld_cmd_t ld_cmd;
  logic    conv_clr, conv_acc_init, conv_start, conv_done, conv_busy;
  logic    vmm_clr, vmm_acc_clr, vmm_start, vmm_done, vmm_busy;
  logic    st_valid, st_ready, st_done, st_from_vmm;
  st_cmd_t st_cmd;
  logic [15:0] best_idx;
  data_t   best_val;
  // loader <-> read master
  logic       rd_cmd_valid, rd_cmd_ready, rd_valid, rd_done;
  addr_t      rd_addr;
  logic [8:0] rd_len, rd_idx;
  data_t      rd_data;
  // buffer writes
  logic       bw_valid;
  ld_target_e bw_target;
  logic [7:0] bw_row, bw_col;
  data_t      bw_data;
  // store <-> write master, masks
  logic  wr_valid, wr_ready;
  addr_t wr_addr;
  data_t wr_data;
  logic  rm_we, rm_wdata, rm_rdata;
  logic [15:0] rm_addr, pm_addr;
  logic  pm_we;
  logic [1:0] pm_wdata, pm_rdata;
  data_t conv_q [NOH*NOW];
  data_t vmm_q  [VT];
  data_t st_tile [TN];

  layer_scheduler #(.NET(NET), .REL_ADDR(REL_ADDR), .NOH(NOH), .NOW(NOW), .VT(VT)) u_sched (
    .clk, .rst_n, .start, .bp_en, .busy, .done, .phase, .layer,
    .ld_valid, .ld_ready, .ld_cmd, .ld_done,
    .conv_clr, .conv_acc_init, .conv_start, .conv_done,
    .vmm_clr, .vmm_acc_clr, .vmm_start, .vmm_done,
    .st_valid, .st_ready, .st_cmd, .st_done, .st_from_vmm, .best_idx);

  tile_loader #(.FRAC(FRAC)) u_loader (
    .clk, .rst_n, .cmd_valid(ld_valid), .cmd_ready(ld_ready), .cmd(ld_cmd), .done(ld_done),
    .rd_cmd_valid, .rd_cmd_ready, .rd_addr, .rd_len, .rd_valid, .rd_idx, .rd_data, .rd_done,
    .bw_valid, .bw_target, .bw_row, .bw_col, .bw_data);

  axi_rd_master u_rd (
    .clk, .rst_n, .cmd_valid(rd_cmd_valid), .cmd_ready(rd_cmd_ready), .cmd_addr(rd_addr),
    .cmd_len(rd_len), .out_valid(rd_valid), .out_idx(rd_idx), .out_data(rd_data),
    .done(rd_done), .m_arvalid, .m_arready, .m_araddr, .m_arlen, .m_arsize, .m_arburst,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast);

  conv_engine #(.NOH(NOH), .NOW(NOW), .K(3), .FRAC(FRAC)) u_conv (
    .clk, .rst_n, .clr(conv_clr),
    .acc_init(conv_acc_init || (bw_valid && bw_target == T_CBIAS)),
    .init_val((bw_valid && bw_target == T_CBIAS) ? bw_data : data_t'(0)),
    .ib_we(bw_valid && bw_target == T_CIN), .ib_row(bw_row), .ib_col(bw_col), .ib_data(bw_data),
    .wb_we(bw_valid && bw_target == T_CW), .wb_idx(bw_col), .wb_data(bw_data),
    .start(conv_start), .busy(conv_busy), .done(conv_done), .tile_q(conv_q));

  vmm_engine #(.VT(VT), .FRAC(FRAC)) u_vmm (
    .clk, .rst_n, .clr(vmm_clr), .acc_clr(vmm_acc_clr),
    .bias_we(bw_valid && bw_target == T_VBIAS), .bias_idx(bw_col), .bias_data(bw_data),
    .xb_we(bw_valid && bw_target == T_XIN), .xb_idx(bw_col), .xb_data(bw_data),
    .wb_we(bw_valid && bw_target == T_VW), .wb_row(bw_row), .wb_col(bw_col), .wb_data(bw_data),
    .start(vmm_start), .busy(vmm_busy), .done(vmm_done), .tile_q(vmm_q));

  always_comb
    for (int i = 0; i < TN; i++) begin
      if (st_from_vmm) st_tile[i] = (i < VT) ? vmm_q[i % VT] : data_t'(0);
      else             st_tile[i] = (i < NOH * NOW) ? conv_q[i % (NOH * NOW)] : data_t'(0);
    end

  store_unit #(.TN(TN), .METHOD(METHOD)) u_store (
    .clk, .rst_n, .phase, .cmd_valid(st_valid), .cmd_ready(st_ready), .cmd(st_cmd),
    .done(st_done), .tile(st_tile),
    .rm_we, .rm_addr, .rm_wdata, .rm_rdata, .pm_we, .pm_addr, .pm_wdata, .pm_rdata,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .best_idx, .best_val);

  axi_wr_master u_wr (
    .clk, .rst_n, .req_valid(wr_valid), .req_ready(wr_ready), .req_addr(wr_addr),
    .req_data(wr_data), .m_awvalid, .m_awready, .m_awaddr, .m_awlen, .m_awsize, .m_awburst,
    .m_wvalid, .m_wready, .m_wdata, .m_wstrb, .m_wlast, .m_bvalid, .m_bready);

  // The ReLU mask memory exists only for the methods that read it (paper, Table II).
  if (METHOD != DECONVNET) begin : g_relu_mask
    relu_mask_mem #(.DEPTH(RELU_DEPTH)) u_rmask (
      .clk, .rst_n, .we(rm_we), .addr(rm_addr[$clog2(RELU_DEPTH)-1:0]), .wdata(rm_wdata),
      .rdata(rm_rdata));
  end else begin : g_no_relu_mask
    assign rm_rdata = 1'b1;
  end

  pool_index_mem #(.DEPTH(POOL_DEPTH)) u_pmask (
    .clk, .we(pm_we), .addr(pm_addr[$clog2(POOL_DEPTH)-1:0]), .wdata(pm_wdata),
    .rdata(pm_rdata));

  assign pred_class = best_idx;

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(conv_busy && vmm_busy));
endmodule
