// relu_mask_mem: on-chip memory of the 1-bit ReLU masks.
//
// One bit per ReLU output, written in the forward pass (1 = activation was positive) and read
// in the backward pass by Saliency Map and Guided Backpropagation. Single port, synchronous
// read: 'rdata' holds the bit at the address presented in the previous cycle. A write and a
// read in the same cycle use the same address port, with the write taking effect. The default
// depth, 128 bits, is the one ReLU of the CIFAR-10 network (after the 128-wide FC layer); with
// the two pool index masks it makes up the 24.7 Kb of on-chip mask state the paper reports.
// Contents reset to zero.
module relu_mask_mem #(
  parameter int DEPTH = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic                     wdata,
  output logic                     rdata
);
  logic [DEPTH-1:0] mem;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0; rdata <= 1'b0;
    end else begin
      if (we) mem[addr] <= wdata;
      rdata <= mem[addr];
    end
  end
endmodule
