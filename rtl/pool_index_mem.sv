// pool_index_mem: on-chip memory of the 2-bit max-pool indices.
//
// One 2-bit entry per pooled output, written in the forward pass with the position of the
// window maximum and read in the backward pass to route the gradient. Needed by all three
// attribution methods. Single port, synchronous read (data one cycle after the address), no
// reset of the array (every entry read in the backward pass was written in the forward pass
// before it). The default depth, 12288, holds the two pooling layers of the CIFAR-10 network
// (32x16x16 + 64x8x8), i.e. 24 Kb, which with the 128 ReLU bits is the 24.7 Kb the paper
// reports. Written as an array so that synthesis maps it to block RAM.
module pool_index_mem #(
  parameter int DEPTH = 12288
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [1:0]               wdata,
  output logic [1:0]               rdata
);
  logic [1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end
endmodule
