// layer_scheduler: runs a network layer by layer, first forward, then backward.
//
// The network is a design-time table of layer descriptors (NET). After 'start' the scheduler
// walks the layers in order (FP), then, if 'bp_en', in reverse order (BP), and for each layer
// walks its tiles, issuing tile-loader commands, compute-block starts and output stores one
// after another (no overlap):
//   convolution: for each output channel co, each NOH x NOW output tile, the accumulators are
//     set (FP: the bias, BP: zero); then for each input channel ci the input tile with its
//     one-pixel halo (clipped to the map, zero padding elsewhere) and the 3x3 kernel are
//     loaded and the engine run; then the tile is stored. In BP the channel counts swap, the
//     input is the gradient map and the kernel of (co, ci) is the forward kernel of (ci, co)
//     rotated by 180 degrees, the paper's flipped-transpose convolution.
//   fully connected: for each VT-wide output tile (FP: biases loaded), for each VT-wide input
//     tile, x and a VT x VT weight block are loaded and the VMM block run; then stored. In BP
//     the weight block is read from the same rows of W and written transposed.
// Stores apply the layer's ReLU and pooling in FP; in BP the store of layer l produces the
// gradient w.r.t. the output of layer l-1, applying that layer's backward ReLU and unpooling.
// The class with the largest network output (tracked by the store unit) is where the
// backward pass starts: the first BP input is a one-hot vector of 1.0 at that class.
// The layer order, the reuse of the compute blocks, the access patterns and the argmax start
// follow the paper; the loop order, the sequential (non-overlapped) schedule and the
// descriptor table are this design's choices. Spatial sizes must be multiples of NOH/NOW
// (and of 2*NOH, 2*NOW for pooled layers); the last layer must be fully connected.
module layer_scheduler
  import xai_pkg::*;
#(
  parameter net_t  NET      = DEFAULT_NET,
  parameter addr_t REL_ADDR = DEFAULT_REL,
  parameter int    NOH      = 4,
  parameter int    NOW      = 4,
  parameter int    VT       = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        bp_en,
  output logic        busy,
  output logic        done,
  output phase_e      phase,
  output logic [7:0]  layer,
  // tile loader
  output logic        ld_valid,
  input  logic        ld_ready,
  output ld_cmd_t     ld_cmd,
  input  logic        ld_done,
  // convolution block
  output logic        conv_clr,
  output logic        conv_acc_init,
  output logic        conv_start,
  input  logic        conv_done,
  // VMM block
  output logic        vmm_clr,
  output logic        vmm_acc_clr,
  output logic        vmm_start,
  input  logic        vmm_done,
  // store unit
  output logic        st_valid,
  input  logic        st_ready,
  output st_cmd_t     st_cmd,
  input  logic        st_done,
  output logic        st_from_vmm,
  input  logic [15:0] best_idx
);
  localparam int NL = NET_LAYERS;

  typedef enum logic [3:0] {
    S_IDLE, S_LAYER,
    S_C_TILE, S_C_CLR, S_C_LDI, S_C_LDW, S_C_MAC, S_C_ST,
    S_F_TILE, S_F_CLR, S_F_LDX, S_F_LDW, S_F_MAC, S_F_ST, S_NEXT
  } state_e;

  state_e state;
  logic   issued;
  int     li;
  int     co, ci, oh0, ow0;      // conv loops
  int     o0, i0;                // FC loops
  layer_t L, P;                  // current and previous layer
  int     cin_e, cout_e, H, W, hp, wp;
  logic   has_prev;

  always_comb begin
    L        = NET[li];
    has_prev = (li > 0);
    P        = has_prev ? NET[li - 1] : '0;
    H        = int'(L.h);
    W        = int'(L.w);
    cin_e    = (phase == PH_FP) ? int'(L.cin)  : int'(L.cout);
    cout_e   = (phase == PH_FP) ? int'(L.cout) : int'(L.cin);
    // pooled-resolution grid of the previous layer's output (BP store target)
    if (P.kind == L_FC) begin
      wp = int'(P.cout); hp = 1;
    end else if (P.pool) begin
      wp = int'(P.w) / 2; hp = int'(P.h) / 2;
    end else begin
      wp = int'(P.w); hp = int'(P.h);
    end
  end

  function automatic int imin(input int a, input int b); return (a < b) ? a : b; endfunction
  function automatic int imax(input int a, input int b); return (a > b) ? a : b; endfunction

  // ---- command generation ----
  always_comb begin
    int r_lo, r_hi, c_lo, c_hi, n;
    addr_t inb;
    r_lo = 0; r_hi = 0; c_lo = 0; c_hi = 0; n = 0; inb = '0;
    ld_cmd = '0;
    st_cmd = '0;
    case (state)
      S_C_TILE: begin   // FP bias of channel co
        ld_cmd.target = T_CBIAS;
        ld_cmd.base   = L.b_addr + addr_t'(co);
        ld_cmd.nrows  = 9'd1;
        ld_cmd.len    = 9'd1;
      end
      S_C_LDI: begin
        inb  = (phase == PH_FP) ? L.in_addr : L.g_addr;
        r_lo = imax(oh0 - 1, 0); r_hi = imin(oh0 + NOH, H - 1);
        c_lo = imax(ow0 - 1, 0); c_hi = imin(ow0 + NOW, W - 1);
        ld_cmd.target = T_CIN;
        ld_cmd.base   = inb + addr_t'(ci * H * W + r_lo * W + c_lo);
        ld_cmd.stride = addr_t'(W);
        ld_cmd.nrows  = 9'(r_hi - r_lo + 1);
        ld_cmd.len    = 9'(c_hi - c_lo + 1);
        ld_cmd.row0   = 8'(r_lo - (oh0 - 1));
        ld_cmd.col0   = 8'(c_lo - (ow0 - 1));
      end
      S_C_LDW: begin
        ld_cmd.target = T_CW;
        ld_cmd.base   = (phase == PH_FP) ? L.w_addr + addr_t'((co * int'(L.cin) + ci) * 9)
                                         : L.w_addr + addr_t'((ci * int'(L.cin) + co) * 9);
        ld_cmd.nrows  = 9'd1;
        ld_cmd.len    = 9'd9;
        ld_cmd.flip   = (phase == PH_BP);
      end
      S_F_TILE: begin   // FP biases of outputs o0 ..
        ld_cmd.target = T_VBIAS;
        ld_cmd.base   = L.b_addr + addr_t'(o0);
        ld_cmd.nrows  = 9'd1;
        ld_cmd.len    = 9'(imin(VT, cout_e - o0));
      end
      S_F_LDX: begin
        n = imin(VT, cin_e - i0);
        ld_cmd.target = T_XIN;
        ld_cmd.nrows  = 9'd1;
        ld_cmd.len    = 9'(n);
        if (phase == PH_BP && li == NL - 1) begin
          ld_cmd.onehot = 1'b1;
          ld_cmd.hot    = (int'(best_idx) >= i0 && int'(best_idx) < i0 + VT)
                          ? 16'(int'(best_idx) - i0) : 16'hFFFF;
        end else
          ld_cmd.base = ((phase == PH_FP) ? L.in_addr : L.g_addr) + addr_t'(i0);
      end
      S_F_LDW: begin
        ld_cmd.target = T_VW;
        if (phase == PH_FP) begin
          ld_cmd.base   = L.w_addr + addr_t'(o0 * int'(L.cin) + i0);
          ld_cmd.stride = addr_t'(L.cin);
          ld_cmd.nrows  = 9'(imin(VT, cout_e - o0));
          ld_cmd.len    = 9'(imin(VT, cin_e - i0));
        end else begin
          ld_cmd.base      = L.w_addr + addr_t'(i0 * int'(L.cin) + o0);
          ld_cmd.stride    = addr_t'(L.cin);
          ld_cmd.nrows     = 9'(imin(VT, cin_e - i0));
          ld_cmd.len       = 9'(imin(VT, cout_e - o0));
          ld_cmd.transpose = 1'b1;
        end
      end
      S_C_ST: begin
        st_cmd.mode_2d = 1'b1;
        st_cmd.rows    = 8'(NOH);
        st_cmd.cols    = 8'(NOW);
        if (phase == PH_FP) begin
          st_cmd.pool    = L.pool;
          st_cmd.relu_fp = L.relu;
          n = L.pool ? (H / 2) * (W / 2) : H * W;
          st_cmd.dst_base = L.out_addr + addr_t'(co * n);
          st_cmd.pr0      = L.pool ? 8'(oh0 / 2) : 8'(oh0);
          st_cmd.pc0      = L.pool ? 8'(ow0 / 2) : 8'(ow0);
          st_cmd.grid_w   = L.pool ? 16'(W / 2) : 16'(W);
          st_cmd.grid_h   = L.pool ? 16'(H / 2) : 16'(H);
          st_cmd.relu_idx = L.relu_base + 16'(co * n);
          st_cmd.pool_idx = L.pool_base + 16'(co * n);
        end else begin
          st_cmd.pr0    = 8'(oh0);
          st_cmd.pc0    = 8'(ow0);
          st_cmd.grid_w = 16'(W);
          st_cmd.grid_h = 16'(H);
          if (has_prev) begin
            st_cmd.unpool   = P.pool;
            st_cmd.relu_bp  = P.relu;
            st_cmd.dst_base = P.g_addr + addr_t'(co * int'(P.h) * int'(P.w));
            st_cmd.relu_idx = P.relu_base + 16'(co * H * W);
            st_cmd.pool_idx = P.pool_base + 16'(co * H * W);
          end else
            st_cmd.dst_base = REL_ADDR + addr_t'(co * H * W);
        end
      end
      S_F_ST: begin
        st_cmd.rows  = 8'd1;
        st_cmd.cols  = 8'(imin(VT, cout_e - o0));
        st_cmd.first = (o0 == 0);
        if (phase == PH_FP) begin
          st_cmd.relu_fp  = L.relu;
          st_cmd.argmax   = (li == NL - 1);
          st_cmd.dst_base = L.out_addr;
          st_cmd.grid_w   = 16'(L.cout);
          st_cmd.grid_h   = 16'd1;
          st_cmd.relu_idx = L.relu_base;
          st_cmd.pool_idx = L.pool_base;
        end else if (has_prev) begin
          st_cmd.unpool   = P.pool;
          st_cmd.relu_bp  = P.relu;
          st_cmd.dst_base = P.g_addr;
          st_cmd.grid_w   = 16'(wp);
          st_cmd.grid_h   = 16'(hp);
          st_cmd.relu_idx = P.relu_base;
          st_cmd.pool_idx = P.pool_base;
        end else begin
          st_cmd.dst_base = REL_ADDR;
          st_cmd.grid_w   = 16'(cout_e);
          st_cmd.grid_h   = 16'd1;
        end
      end
      default: ;
    endcase
  end

  assign ld_valid = !issued && (state == S_C_LDI || state == S_C_LDW || state == S_F_LDX ||
                                state == S_F_LDW ||
                                (phase == PH_FP && (state == S_C_TILE || state == S_F_TILE)));
  assign st_valid = !issued && (state == S_C_ST || state == S_F_ST);
  assign conv_start    = (state == S_C_MAC) && !issued;
  assign vmm_start     = (state == S_F_MAC) && !issued;
  assign conv_clr      = (state == S_C_CLR);
  assign vmm_clr       = (state == S_F_CLR);
  assign conv_acc_init = (state == S_C_TILE) && (phase == PH_BP);   // FP: bias via loader
  assign vmm_acc_clr   = (state == S_F_TILE) && !issued;
  assign st_from_vmm   = (L.kind == L_FC);
  assign busy          = (state != S_IDLE);
  assign layer         = 8'(li);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; issued <= 1'b0; li <= 0; phase <= PH_FP; done <= 1'b0;
      co <= 0; ci <= 0; oh0 <= 0; ow0 <= 0; o0 <= 0; i0 <= 0;
    end else begin
      done <= 1'b0;
      if ((ld_valid && ld_ready) || (st_valid && st_ready) || conv_start || vmm_start)
        issued <= 1'b1;
      case (state)
        S_IDLE: if (start) begin
          phase <= PH_FP; li <= 0; state <= S_LAYER;
        end
        S_LAYER: begin
          co <= 0; ci <= 0; oh0 <= 0; ow0 <= 0; o0 <= 0; i0 <= 0;
          state <= (L.kind == L_CONV) ? S_C_TILE : S_F_TILE;
        end
        // ---------------- convolution ----------------
        S_C_TILE: if (phase == PH_BP || (issued && ld_done)) begin
          issued <= 1'b0; ci <= 0; state <= S_C_CLR;
        end
        S_C_CLR: state <= S_C_LDI;
        S_C_LDI: if (issued && ld_done) begin issued <= 1'b0; state <= S_C_LDW; end
        S_C_LDW: if (issued && ld_done) begin issued <= 1'b0; state <= S_C_MAC; end
        S_C_MAC: if (issued && conv_done) begin
          issued <= 1'b0;
          if (ci + 1 < cin_e) begin ci <= ci + 1; state <= S_C_CLR; end
          else state <= S_C_ST;
        end
        S_C_ST: if (issued && st_done) begin
          issued <= 1'b0;
          state  <= S_C_TILE;
          if (ow0 + NOW < W) ow0 <= ow0 + NOW;
          else begin
            ow0 <= 0;
            if (oh0 + NOH < H) oh0 <= oh0 + NOH;
            else begin
              oh0 <= 0;
              if (co + 1 < cout_e) co <= co + 1;
              else state <= S_NEXT;
            end
          end
        end
        // ---------------- fully connected ----------------
        S_F_TILE: begin
          if (phase == PH_BP) begin
            issued <= 1'b0; i0 <= 0; state <= S_F_CLR;
          end else if (issued && ld_done) begin
            issued <= 1'b0; i0 <= 0; state <= S_F_CLR;
          end
        end
        S_F_CLR: state <= S_F_LDX;
        S_F_LDX: if (issued && ld_done) begin issued <= 1'b0; state <= S_F_LDW; end
        S_F_LDW: if (issued && ld_done) begin issued <= 1'b0; state <= S_F_MAC; end
        S_F_MAC: if (issued && vmm_done) begin
          issued <= 1'b0;
          if (i0 + VT < cin_e) begin i0 <= i0 + VT; state <= S_F_CLR; end
          else state <= S_F_ST;
        end
        S_F_ST: if (issued && st_done) begin
          issued <= 1'b0;
          if (o0 + VT < cout_e) begin o0 <= o0 + VT; state <= S_F_TILE; end
          else state <= S_NEXT;
        end
        // ---------------- next layer / phase ----------------
        S_NEXT: begin
          if (phase == PH_FP) begin
            if (li + 1 < NL) begin li <= li + 1; state <= S_LAYER; end
            else if (bp_en) begin phase <= PH_BP; state <= S_LAYER; end
            else begin state <= S_IDLE; done <= 1'b1; end
          end else begin
            if (li > 0) begin li <= li - 1; state <= S_LAYER; end
            else begin state <= S_IDLE; done <= 1'b1; end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_last_fc: assert property (@(posedge clk) NET[NL-1].kind == L_FC);
endmodule
