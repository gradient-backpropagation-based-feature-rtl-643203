// axi_mem_model: behavioural model of the DRAM behind the accelerator's AXI4 port.
//
// Not synthesizable design content: a 16-bit wide word array with an AXI4 slave front end.
// Reads: one burst at a time; each beat may be delayed by a random gap when STALL is set
// (to exercise back-pressure), RLAST marks the last beat. Writes: AW and W are accepted
// independently (each with a random delay when STALL is set), the word is written when both
// have arrived, then a B response is given. Byte addresses are divided by 2. Counts of
// bursts and beats are kept for the testbench.
module axi_mem_model #(
  parameter int DEPTH = 4096,
  parameter bit STALL = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        arvalid,
  output logic        arready,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  output logic        rvalid,
  input  logic        rready,
  output logic [15:0] rdata,
  output logic        rlast,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [15:0] wdata,
  output logic        bvalid,
  input  logic        bready
);
  logic [15:0] mem [DEPTH];
  int unsigned n_bursts, n_beats, n_writes, n_stalls;

  // read side
  logic        rd_act;
  logic [31:0] rd_addr;
  logic [8:0]  rd_left;
  logic        gap;
  assign arready = !rd_act;
  assign rvalid  = rd_act && !gap;
  assign rdata   = mem[rd_addr % DEPTH];
  assign rlast   = (rd_left == 9'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; rd_addr <= '0; rd_left <= '0; gap <= 1'b0;
      n_bursts <= 0; n_beats <= 0; n_stalls <= 0;
    end else begin
      if (!rd_act && arvalid) begin
        rd_act <= 1'b1; rd_addr <= araddr >> 1; rd_left <= 9'(arlen) + 9'd1;
        n_bursts <= n_bursts + 1;
        gap <= STALL && ($urandom_range(0, 3) == 0);
      end else if (rd_act) begin
        if (rvalid && rready) begin
          n_beats <= n_beats + 1;
          rd_addr <= rd_addr + 1;
          rd_left <= rd_left - 9'd1;
          if (rd_left == 9'd1) rd_act <= 1'b0;
        end
        gap <= STALL && ($urandom_range(0, 3) == 0);
        if (gap) n_stalls <= n_stalls + 1;
      end
    end
  end

  // write side
  logic        have_aw, have_w;
  logic [31:0] wa;
  logic [15:0] wd;
  logic        aw_ok, w_ok;
  assign awready = !have_aw && !bvalid && aw_ok;
  assign wready  = !have_w && !bvalid && w_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_aw <= 1'b0; have_w <= 1'b0; bvalid <= 1'b0; wa <= '0; wd <= '0;
      aw_ok <= 1'b1; w_ok <= 1'b1; n_writes <= 0;
    end else begin
      aw_ok <= !STALL || ($urandom_range(0, 2) != 0);
      w_ok  <= !STALL || ($urandom_range(0, 2) != 0);
      if (awvalid && awready) begin have_aw <= 1'b1; wa <= awaddr >> 1; end
      if (wvalid && wready)   begin have_w  <= 1'b1; wd <= wdata; end
      if (have_aw && have_w && !bvalid) begin
        mem[wa % DEPTH] <= wd;
        n_writes <= n_writes + 1;
        bvalid <= 1'b1; have_aw <= 1'b0; have_w <= 1'b0;
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
