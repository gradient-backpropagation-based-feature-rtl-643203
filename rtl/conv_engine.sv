// conv_engine: the convolution block, an output-stationary NOH x NOW array of MACs.
//
// The engine holds one output tile of NOH x NOW pixels of a single output channel in 32-bit
// accumulators, one input-channel tile of (NOH+K-1) x (NOW+K-1) pixels (the halo included,
// zero where it falls outside the map) and one K x K kernel. A 'start' pulse runs K*K cycles;
// in cycle (kh, kw) the kernel weight w[kh][kw] is broadcast to all NOH*NOW MACs and
// MAC (i, j) adds in[i+kh][j+kw] * w[kh][kw] to its accumulator, so every output pixel of the
// tile advances in parallel (the paper's unrolling of the output height and width loops).
// The scheduler repeats load/start for every input channel and the sum stays in place.
// 'acc_init' sets all accumulators to init_val << FRAC (the bias in FP, 0 in BP). 'clr' zeroes
// the input tile and kernel buffers before a load. Results are read as requantised 16-bit
// values (arithmetic shift by FRAC, saturating) on 'tile_q', row-major.
// The same engine runs the backward pass: it is then given gradients and flipped, transposed
// kernels by the loader, as the paper describes. The broadcast-weight schedule, the register
// buffers and the K = 3 default (the 3x3 kernels implied by the parameter counts of the CNN)
// are this design's reading of the paper.
// Reset is synchronous (rst_n sampled on the clock) so the buffer arrays map to plain registers.
// Timing: 'busy' is high for K*K cycles after 'start'; 'done' pulses in the cycle after the
// last MAC, when tile_q already holds the new sums.
module conv_engine
  import xai_pkg::*;
#(
  parameter int NOH  = 4,
  parameter int NOW  = 4,
  parameter int K    = 3,
  parameter int FRAC = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  acc_init,
  input  data_t init_val,
  // input tile buffer write
  input  logic  ib_we,
  input  logic [7:0] ib_row,
  input  logic [7:0] ib_col,
  input  data_t ib_data,
  // kernel buffer write (row-major index kh*K+kw)
  input  logic  wb_we,
  input  logic [7:0] wb_idx,
  input  data_t wb_data,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output data_t tile_q [NOH*NOW]
);
  localparam int IH = NOH + K - 1;
  localparam int IW = NOW + K - 1;

  data_t ibuf [IH][IW];
  data_t wbuf [K*K];
  acc_t  acc  [NOH][NOW];
  logic [$clog2(K*K+1)-1:0] step;
  logic [$clog2(K+1)-1:0]   kh, kw;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < IH; r++) for (int c = 0; c < IW; c++) ibuf[r][c] <= '0;
      for (int i = 0; i < K*K; i++) wbuf[i] <= '0;
    end else if (clr) begin
      for (int r = 0; r < IH; r++) for (int c = 0; c < IW; c++) ibuf[r][c] <= '0;
      for (int i = 0; i < K*K; i++) wbuf[i] <= '0;
    end else begin
      if (ib_we && int'(ib_row) < IH && int'(ib_col) < IW) ibuf[ib_row][ib_col] <= ib_data;
      if (wb_we && int'(wb_idx) < K*K) wbuf[wb_idx] <= wb_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; step <= '0; kh <= '0; kw <= '0;
      for (int i = 0; i < NOH; i++) for (int j = 0; j < NOW; j++) acc[i][j] <= '0;
    end else begin
      done <= 1'b0;
      if (acc_init) begin
        for (int i = 0; i < NOH; i++)
          for (int j = 0; j < NOW; j++) acc[i][j] <= acc_t'(init_val) <<< FRAC;
      end else if (busy) begin
        for (int i = 0; i < NOH; i++)
          for (int j = 0; j < NOW; j++)
            acc[i][j] <= acc[i][j] + acc_t'(ibuf[i + int'(kh)][j + int'(kw)]) * acc_t'(wbuf[step]);
        if (int'(kw) == K - 1) begin
          kw <= '0; kh <= kh + 1'b1;
        end else kw <= kw + 1'b1;
        step <= step + 1'b1;
        if (int'(step) == K*K - 1) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end else if (start) begin
        busy <= 1'b1; step <= '0; kh <= '0; kw <= '0;
      end
    end
  end

  always_comb
    for (int i = 0; i < NOH; i++)
      for (int j = 0; j < NOW; j++)
        tile_q[i*NOW + j] = sat16(acc[i][j] >>> FRAC);

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);
endmodule
