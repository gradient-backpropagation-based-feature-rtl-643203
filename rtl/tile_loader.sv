// tile_loader: moves tiles from DRAM into the on-chip buffers of the compute blocks.
//
// A command (ld_cmd_t) describes a block of nrows x len words: row r is one AXI burst read
// from base + r*stride. Each returned word c of row r is written to buffer 'target' at
// (row0 + r, col0 + c); with 'transpose' the row and column are swapped, with 'flip' the
// column is mirrored (col0 + len-1-c). This is where the forward and backward passes differ:
// the paper reuses the compute blocks unchanged and changes only the DRAM access pattern.
//   FP convolution kernels: one 9-word burst, written in order.
//   BP convolution kernels: the kernel of the swapped (transposed) channel pair, written
//     mirrored, i.e. rotated by 180 degrees (flip).
//   FP FC weights: rows of W, written as they come.  BP FC weights: the same rows of W,
//     written transposed, so the VMM block computes W^T * gradient.
// Zero padding is achieved by the scheduler clipping the block to the map and the compute
// block clearing its buffers first. With 'onehot' set no DRAM read happens: len words
// (row0 + c == hot) ? 1.0 : 0 are written, the unit gradient that starts the backward pass at
// the predicted class. 'cmd_ready' is high in idle; 'done' pulses after the last write.
// Buffer writes ('bw_*') come one per returned beat, one cycle per word at most.
module tile_loader
  import xai_pkg::*;
#(
  parameter int FRAC = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  ld_cmd_t     cmd,
  output logic        done,
  // to the AXI read master
  output logic        rd_cmd_valid,
  input  logic        rd_cmd_ready,
  output addr_t       rd_addr,
  output logic [8:0]  rd_len,
  input  logic        rd_valid,
  input  logic [8:0]  rd_idx,
  input  data_t       rd_data,
  input  logic        rd_done,
  // buffer write
  output logic        bw_valid,
  output ld_target_e  bw_target,
  output logic [7:0]  bw_row,
  output logic [7:0]  bw_col,
  output data_t       bw_data
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DATA, S_HOT} state_e;
  state_e     state;
  ld_cmd_t    c;
  logic [8:0] r;        // current row
  logic [8:0] hc;       // one-hot column counter
  addr_t      row_addr;
  logic [7:0] rr, cc;   // buffer position of the current word before transpose

  assign cmd_ready    = (state == S_IDLE);
  assign rd_cmd_valid = (state == S_REQ);
  assign rd_addr      = row_addr;
  assign rd_len       = c.len;

  always_comb begin
    rr = c.row0 + r[7:0];
    if (state == S_HOT) begin
      cc = c.col0 + hc[7:0];
      bw_valid = 1'b1;
      bw_data  = ({8'd0, cc} == c.hot) ? data_t'(1 <<< FRAC) : '0;
    end else begin
      cc = c.flip ? (c.col0 + 8'(c.len - 9'd1 - rd_idx)) : (c.col0 + rd_idx[7:0]);
      bw_valid = (state == S_DATA) && rd_valid;
      bw_data  = rd_data;
    end
    bw_target = c.target;
    bw_row    = c.transpose ? cc : rr;
    bw_col    = c.transpose ? rr : cc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; r <= '0; hc <= '0; row_addr <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; r <= '0; hc <= '0; row_addr <= cmd.base;
          if (cmd.onehot)          state <= S_HOT;
          else if (cmd.nrows == 0) done  <= 1'b1;
          else                     state <= S_REQ;
        end
        S_REQ: if (rd_cmd_ready) state <= S_DATA;
        S_DATA: if (rd_done) begin
          row_addr <= row_addr + c.stride;
          r <= r + 9'd1;
          if (r + 9'd1 == c.nrows) begin
            state <= S_IDLE; done <= 1'b1;
          end else state <= S_REQ;
        end
        S_HOT: begin
          hc <= hc + 9'd1;
          if (hc + 9'd1 == c.len) begin
            state <= S_IDLE; done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
