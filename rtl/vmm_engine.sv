// vmm_engine: the vector-matrix product block used for fully connected layers.
//
// The engine holds an input tile x[VT], a weight tile w[VT][VT] (w[o][i], output o, input i)
// and VT output accumulators, one per MAC. A 'start' pulse runs VT cycles; in cycle i the
// input word x[i] is broadcast and every MAC o adds x[i] * w[o][i] (output stationary, the
// loop over outputs unrolled VT times, so the block uses VT multipliers). The scheduler loads
// the next input tile and starts again; the sums stay in place until the output tile is
// stored. In the backward pass the loader fills w transposed (w[o][i] = W[i][o]), so the same
// block computes the matrix-vector product of the gradient. 'acc_clr' zeroes the
// accumulators, 'bias_we' sets one of them to bias << FRAC, 'clr' zeroes x and w before a
// load (so a partial tile multiplies by zeros). Results are read requantised on 'tile_q'.
// VT = 16 is the buffer size the paper gives for the smallest board; the broadcast schedule
// is this design's choice.
// Reset is synchronous (rst_n sampled on the clock) so the buffer arrays map to plain registers.
// Timing: 'busy' is high for VT cycles after 'start', 'done' pulses the cycle after.
module vmm_engine
  import xai_pkg::*;
#(
  parameter int VT   = 16,
  parameter int FRAC = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  acc_clr,
  input  logic  bias_we,
  input  logic [7:0] bias_idx,
  input  data_t bias_data,
  input  logic  xb_we,
  input  logic [7:0] xb_idx,
  input  data_t xb_data,
  input  logic  wb_we,
  input  logic [7:0] wb_row,   // output index
  input  logic [7:0] wb_col,   // input index
  input  data_t wb_data,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output data_t tile_q [VT]
);
  data_t xbuf [VT];
  data_t wbuf [VT][VT];
  acc_t  acc  [VT];
  logic [$clog2(VT+1)-1:0] step;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < VT; i++) xbuf[i] <= '0;
      for (int o = 0; o < VT; o++) for (int i = 0; i < VT; i++) wbuf[o][i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < VT; i++) xbuf[i] <= '0;
      for (int o = 0; o < VT; o++) for (int i = 0; i < VT; i++) wbuf[o][i] <= '0;
    end else begin
      if (xb_we && int'(xb_idx) < VT) xbuf[xb_idx] <= xb_data;
      if (wb_we && int'(wb_row) < VT && int'(wb_col) < VT) wbuf[wb_row][wb_col] <= wb_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; step <= '0;
      for (int o = 0; o < VT; o++) acc[o] <= '0;
    end else begin
      done <= 1'b0;
      if (acc_clr) begin
        for (int o = 0; o < VT; o++) acc[o] <= '0;
      end else if (bias_we) begin
        if (int'(bias_idx) < VT) acc[bias_idx] <= acc_t'(bias_data) <<< FRAC;
      end else if (busy) begin
        for (int o = 0; o < VT; o++) acc[o] <= acc[o] + acc_t'(xbuf[step]) * acc_t'(wbuf[o][step]);
        step <= step + 1'b1;
        if (int'(step) == VT - 1) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end else if (start) begin
        busy <= 1'b1; step <= '0;
      end
    end
  end

  always_comb
    for (int o = 0; o < VT; o++) tile_q[o] = sat16(acc[o] >>> FRAC);

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);
endmodule
