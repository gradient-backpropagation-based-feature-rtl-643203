// xai_pkg: types and constants shared by the feature-attribution accelerator.
//
// All feature maps, weights and gradients are 16-bit signed fixed point; products are
// accumulated in 32 bits and requantised by an arithmetic shift of FRAC bits with saturation.
// A network is described to the hardware as a fixed table of layer descriptors (one entry per
// convolution or fully connected layer, with flags for a ReLU and a 2x2 max-pool that follow
// it). DEFAULT_NET is the CIFAR-10 CNN of the accompanying description: conv 3->32, conv
// 32->32 + pool, conv 32->64, conv 64->64 + pool, FC 4096->128 + ReLU, FC 128->10.
// Only the layer shapes and the ReLU/pool placement come from that network; the DRAM layout
// (weights, then biases, activations, gradients, relevance map, all packed back to back in
// 16-bit words) and the mask-memory offsets are this design's own choice.
package xai_pkg;

  localparam int DW    = 16;   // data word (activations, weights, gradients)
  localparam int ACC_W = 32;   // MAC accumulator
  localparam int AW    = 32;   // DRAM word address

  typedef logic signed [DW-1:0]    data_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [AW-1:0]           addr_t;

  // Attribution method, fixed at design time.
  typedef enum logic [1:0] {SALIENCY = 2'd0, DECONVNET = 2'd1, GUIDED = 2'd2} method_e;
  typedef enum logic {PH_FP = 1'b0, PH_BP = 1'b1} phase_e;
  typedef enum logic {L_CONV = 1'b0, L_FC = 1'b1} kind_e;

  // One layer. cin/cout/h/w are the forward-pass shapes (h, w = input spatial size; the 3x3
  // convolutions use padding 1, so the output before pooling has the same size). FC layers use
  // h = w = 1 and cin = flattened input length (channel-major, as stored in DRAM).
  typedef struct packed {
    kind_e       kind;
    logic        relu;       // ReLU after this layer
    logic        pool;       // 2x2/2 max-pool after this layer (conv only)
    logic [12:0] cin;
    logic [12:0] cout;
    logic [7:0]  h;
    logic [7:0]  w;
    addr_t       in_addr;    // FP input activations
    addr_t       out_addr;   // FP output activations (after ReLU and pooling)
    addr_t       g_addr;     // BP gradient w.r.t. this layer's output (before pooling)
    addr_t       w_addr;     // weights [cout][cin][3][3] or [cout][cin]
    addr_t       b_addr;     // biases [cout]
    logic [15:0] relu_base;  // first entry in the ReLU mask memory
    logic [15:0] pool_base;  // first entry in the pool index memory
  } layer_t;

  // Tile loader targets.
  typedef enum logic [2:0] {T_CIN = 3'd0, T_CW = 3'd1, T_XIN = 3'd2, T_VW = 3'd3,
                            T_CBIAS = 3'd4, T_VBIAS = 3'd5} ld_target_e;

  // A block load: nrows bursts of len words, row r read from base + r*stride, written to
  // buffer position (row0 + r, col0 + c), or (col0 + c, row0 + r) if transpose, with the column
  // reversed if flip. onehot: no DRAM access, the words are (row0+c == hot) ? 1.0 : 0.
  typedef struct packed {
    ld_target_e  target;
    addr_t       base;
    addr_t       stride;
    logic [8:0]  nrows;
    logic [8:0]  len;
    logic [7:0]  row0;
    logic [7:0]  col0;
    logic        transpose;
    logic        flip;
    logic        onehot;
    logic [15:0] hot;
  } ld_cmd_t;

  // Store of one output tile. In 2D mode the tile has rows x cols elements at grid position
  // (pr0, pc0); in 1D mode it is a run of cols elements continuing a channel-major walk over a
  // grid_h x grid_w grid that began with 'first'. The grid is the pooled-resolution grid: the
  // FP pooled output, or in BP the map that is unpooled to 2*grid_h x 2*grid_w.
  typedef struct packed {
    logic        mode_2d;
    logic        pool;
    logic        unpool;
    logic        relu_fp;
    logic        relu_bp;
    logic        argmax;
    logic        first;
    logic [7:0]  rows;
    logic [7:0]  cols;
    addr_t       dst_base;
    logic [7:0]  pr0;
    logic [7:0]  pc0;
    logic [15:0] grid_w;
    logic [15:0] grid_h;
    logic [15:0] relu_idx;  // mask index of grid (0,0) of this channel (2D) or layer (1D)
    logic [15:0] pool_idx;
  } st_cmd_t;

  function automatic data_t sat16(input acc_t a);
    if (a > acc_t'(32767))       return data_t'(16'sh7FFF);
    else if (a < acc_t'(-32768)) return data_t'(16'sh8000);
    else                         return data_t'(a[DW-1:0]);
  endfunction

  // ---------------------------------------------------------------------------------------
  // Default network (CIFAR-10 CNN) and its DRAM layout.
  localparam int NET_LAYERS = 6;
  typedef layer_t [NET_LAYERS-1:0] net_t;

  function automatic layer_t mk(input kind_e k, input bit relu, input bit pool,
                                input int cin, input int cout, input int h, input int w);
    layer_t l;
    l = '0;
    l.kind = k; l.relu = relu; l.pool = pool;
    l.cin = 13'(cin); l.cout = 13'(cout); l.h = 8'(h); l.w = 8'(w);
    return l;
  endfunction

  // Fills in addresses and mask offsets for a layer table whose shapes are set.
  // Order in DRAM: image, then for each layer weights, biases, output activations,
  // gradient; then the relevance map (address returned by rel_addr_of).
  function automatic net_t place(input net_t n, input int nl);
    net_t r;
    int a, rb, pb, wsz, osz, gsz;
    r = n;
    a = int'(r[0].cin) * int'(r[0].h) * int'(r[0].w);   // image at address 0
    rb = 0; pb = 0;
    for (int i = 0; i < nl; i++) begin
      r[i].in_addr = (i == 0) ? addr_t'(0) : r[i-1].out_addr;
      wsz = int'(r[i].cout) * int'(r[i].cin) * ((r[i].kind == L_CONV) ? 9 : 1);
      gsz = int'(r[i].cout) * int'(r[i].h) * int'(r[i].w);
      osz = r[i].pool ? gsz / 4 : gsz;
      r[i].w_addr = addr_t'(a);  a += wsz;
      r[i].b_addr = addr_t'(a);  a += int'(r[i].cout);
      r[i].out_addr = addr_t'(a); a += osz;
      r[i].g_addr = addr_t'(a);  a += gsz;
      r[i].relu_base = 16'(rb);
      r[i].pool_base = 16'(pb);
      if (r[i].relu) rb += osz;
      if (r[i].pool) pb += osz;
    end
    return r;
  endfunction

  function automatic addr_t rel_addr_of(input net_t n, input int nl);
    return n[nl-1].g_addr + addr_t'(int'(n[nl-1].cout));
  endfunction

  function automatic net_t default_net();
    net_t n;
    n[0] = mk(L_CONV, 1'b0, 1'b0,    3,  32, 32, 32);
    n[1] = mk(L_CONV, 1'b0, 1'b1,   32,  32, 32, 32);
    n[2] = mk(L_CONV, 1'b0, 1'b0,   32,  64, 16, 16);
    n[3] = mk(L_CONV, 1'b0, 1'b1,   64,  64, 16, 16);
    n[4] = mk(L_FC,   1'b1, 1'b0, 4096, 128,  1,  1);
    n[5] = mk(L_FC,   1'b0, 1'b0,  128,  10,  1,  1);
    return place(n, NET_LAYERS);
  endfunction

  localparam net_t  DEFAULT_NET = default_net();
  localparam addr_t DEFAULT_REL = rel_addr_of(DEFAULT_NET, NET_LAYERS);

endpackage
