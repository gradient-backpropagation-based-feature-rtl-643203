// store_unit: writes a finished output tile back to DRAM, applying the non-linear layers.
//
// The paper applies ReLU in place on the output buffer and absorbs max-pooling into the store
// of the layer it follows; this unit does both, and their backward counterparts:
//   FP: value = requantised accumulator; if 'pool', the 2x2 window maximum (maxpool_unit) and
//       its 2-bit index, written to the pool index memory; if 'relu_fp', ReLU (relu_unit) and,
//       for Saliency and Guided Backpropagation, the 1-bit mask written to the ReLU mask memory.
//       One DRAM word per value.
//   BP: value = gradient; if 'relu_bp', the method's backward ReLU using the stored mask bit;
//       if 'unpool', the gradient is routed (unpool_unit) to the stored window position and
//       the four words of the window are written (three of them zero).
// ReLU followed by max-pool keeps its mask at pooled resolution here: the mask bit of the
// window maximum is the only one the backward pass can use, since unpooling zeroes the rest.
// Addresses: in 2D mode the tile element (r, c) sits at grid position (pr0+r, pc0+c) of a
// grid_w wide channel grid starting at dst_base; in 1D mode (FC outputs) the elements
// continue a channel-major walk over a grid_h x grid_w grid, restarted by 'first'. An unpooled
// value at grid (pr, pc) goes to the 2*grid_w wide map at rows 2pr, 2pr+1 and columns 2pc,
// 2pc+1. With 'argmax' the unit also tracks the largest value written since 'first' and its
// position (best_idx), which selects the class the backward pass starts from.
// Reset is synchronous (rst_n sampled on the clock).
// Timing: per value, one cycle for the synchronous mask read, one to compute, then one AXI
// write per word (each waits for the write master). 'done' pulses after the last write.
module store_unit
  import xai_pkg::*;
#(
  parameter int      TN     = 16,      // tile elements the unit can see
  parameter method_e METHOD = GUIDED
) (
  input  logic        clk,
  input  logic        rst_n,
  input  phase_e      phase,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  st_cmd_t     cmd,
  output logic        done,
  input  data_t       tile [TN],
  // ReLU mask memory port
  output logic        rm_we,
  output logic [15:0] rm_addr,
  output logic        rm_wdata,
  input  logic        rm_rdata,
  // pool index memory port
  output logic        pm_we,
  output logic [15:0] pm_addr,
  output logic [1:0]  pm_wdata,
  input  logic [1:0]  pm_rdata,
  // to the AXI write master
  output logic        wr_valid,
  input  logic        wr_ready,
  output addr_t       wr_addr,
  output data_t       wr_data,
  // class selection
  output logic [15:0] best_idx,
  output data_t       best_val
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_CALC, S_WR} state_e;
  state_e  state;
  st_cmd_t c;
  logic [7:0]  ir, ic;             // item position in the (pooled) tile
  logic [7:0]  irows, icols;       // items per tile
  // 1D walk
  logic [15:0] run_f, run_ph, run_pw;
  addr_t       run_choff;
  // current item
  logic [15:0] prow, pcol, mflat;
  addr_t       choff;
  data_t       win [4];
  data_t       elem, pmax, fp_v, bp_v, relu_y;
  logic [1:0]  pidx;
  logic        relu_m;
  data_t       unp [4];
  data_t       wv [4];
  logic [2:0]  nwr, k;
  logic [1:0]  wpos;

  maxpool_unit u_pool (.x(win), .y(pmax), .idx(pidx));
  relu_unit #(.METHOD(METHOD)) u_relu (
    .phase(phase), .x(phase == PH_FP ? fp_v : elem), .mask_in(rm_rdata),
    .y(relu_y), .mask_out(relu_m));
  unpool_unit u_unpool (.g(bp_v), .idx(pm_rdata), .y(unp));

  assign irows = c.pool ? (c.rows >> 1) : c.rows;
  assign icols = c.pool ? (c.cols >> 1) : c.cols;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      win[i] = tile[(int'(ir) * 2 + i / 2) * int'(c.cols) + int'(ic) * 2 + i % 2];
    end
    elem = tile[int'(ir) * int'(c.cols) + int'(ic)];
    fp_v = c.pool ? pmax : elem;
    bp_v = c.relu_bp ? relu_y : elem;
    if (c.mode_2d) begin
      prow  = 16'(c.pr0) + 16'(ir);
      pcol  = 16'(c.pc0) + 16'(ic);
      mflat = prow * c.grid_w + pcol;
      choff = '0;
    end else begin
      prow  = run_ph;
      pcol  = run_pw;
      mflat = run_f;
      choff = run_choff;
    end
  end

  assign cmd_ready = (state == S_IDLE);
  assign rm_addr   = c.relu_idx + mflat;
  assign pm_addr   = c.pool_idx + mflat;
  assign rm_wdata  = relu_m;
  assign pm_wdata  = pidx;
  assign rm_we     = (state == S_CALC) && phase == PH_FP && c.relu_fp && METHOD != DECONVNET;
  assign pm_we     = (state == S_CALC) && phase == PH_FP && c.pool;

  assign wr_valid = (state == S_WR);
  assign wr_data  = wv[wpos];
  assign wpos     = 2'(k);
  always_comb begin
    if (nwr == 3'd4)
      wr_addr = c.dst_base + choff
              + addr_t'((32'(prow) * 2 + 32'(wpos[1])) * (32'(c.grid_w) * 2))
              + addr_t'(32'(pcol) * 2 + 32'(wpos[0]));
    else
      wr_addr = c.dst_base + choff + addr_t'(32'(prow) * 32'(c.grid_w) + 32'(pcol));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; ir <= '0; ic <= '0; done <= 1'b0;
      run_f <= '0; run_ph <= '0; run_pw <= '0; run_choff <= '0;
      for (int i = 0; i < 4; i++) wv[i] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; ir <= '0; ic <= '0; state <= S_RD;
          if (cmd.first) begin
            run_f <= '0; run_ph <= '0; run_pw <= '0; run_choff <= '0;
          end
        end
        S_RD: state <= S_CALC;   // mask memories present data for rm_addr / pm_addr
        S_CALC: begin
          k <= '0;
          if (phase == PH_FP) begin
            wv[0] <= c.relu_fp ? relu_y : fp_v;
            nwr <= 3'd1;
            if (c.argmax && ((c.first && run_f == 0 && c.mode_2d == 1'b0) ||
                             (c.relu_fp ? relu_y : fp_v) > best_val)) begin
              best_val <= c.relu_fp ? relu_y : fp_v;
              best_idx <= c.mode_2d ? mflat : run_f;
            end
          end else if (c.unpool) begin
            wv <= unp; nwr <= 3'd4;
          end else begin
            wv[0] <= bp_v; nwr <= 3'd1;
          end
          state <= S_WR;
        end
        S_WR: if (wr_ready) begin
          k <= k + 3'd1;
          if (k + 3'd1 == nwr) begin
            // advance the 1D walk
            if (!c.mode_2d) begin
              run_f <= run_f + 16'd1;
              if (run_pw + 16'd1 == c.grid_w) begin
                run_pw <= '0;
                if (run_ph + 16'd1 == c.grid_h) begin
                  run_ph <= '0;
                  run_choff <= run_choff + addr_t'(32'(c.grid_w) * 32'(c.grid_h) * (c.unpool ? 4 : 1));
                end else run_ph <= run_ph + 16'd1;
              end else run_pw <= run_pw + 16'd1;
            end
            // next item
            if (ic + 8'd1 == icols) begin
              ic <= '0;
              if (ir + 8'd1 == irows) begin
                state <= S_IDLE; done <= 1'b1;
              end else begin
                ir <= ir + 8'd1; state <= S_RD;
              end
            end else begin
              ic <= ic + 8'd1; state <= S_RD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_items: assert property (@(posedge clk) disable iff (!rst_n)
             cmd_valid && cmd_ready |-> cmd.rows != 0 && cmd.cols != 0);
endmodule
