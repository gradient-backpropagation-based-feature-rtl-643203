// axi_rd_master: AXI4 burst read engine that fetches tiles from DRAM.
//
// A command names a start word address and a length of 1..256 16-bit words. The engine turns
// it into one or more INCR bursts on a 16-bit AXI4 read channel (byte address = 2 * word
// address, ARSIZE = 1), splitting wherever a burst would cross a 4 KB boundary, as AXI4
// requires. Every returned beat is passed on as (word index within the command, data); RREADY
// is always high, so the consumer must take one word per cycle. 'done' pulses for one cycle
// after the last beat of the command. One burst is outstanding at a time.
// The use of AXI for DRAM tile traffic follows the paper; the data width, the single
// outstanding burst and the command format are this design's choice.
module axi_rd_master
  import xai_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // command
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  addr_t       cmd_addr,      // word address
  input  logic [8:0]  cmd_len,       // words, 1..256
  // returned data
  output logic        out_valid,
  output logic [8:0]  out_idx,
  output data_t       out_data,
  output logic        done,
  // AXI4 read address / data channels
  output logic        m_arvalid,
  input  logic        m_arready,
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  input  logic        m_rvalid,
  output logic        m_rready,
  input  logic [15:0] m_rdata,
  input  logic        m_rlast
);
  typedef enum logic [1:0] {S_IDLE, S_AR, S_R} state_e;
  state_e     state;
  addr_t      addr;        // next word to request
  logic [8:0] remain;      // words not yet requested
  logic [8:0] idx;         // next returned word index
  logic [8:0] blen;        // words in current burst
  logic [11:0] to_bound;   // words to the next 4 KB (2048-word) boundary

  assign to_bound = 12'd2048 - {1'b0, addr[10:0]};
  always_comb begin
    blen = remain;
    if ({3'b0, remain} > to_bound) blen = to_bound[8:0];
  end

  assign cmd_ready = (state == S_IDLE);
  assign m_arvalid = (state == S_AR);
  assign m_araddr  = {addr[30:0], 1'b0};
  assign m_arlen   = 8'(blen - 9'd1);
  assign m_arsize  = 3'd1;
  assign m_arburst = 2'b01;
  assign m_rready  = (state == S_R);

  assign out_valid = m_rvalid && m_rready;
  assign out_idx   = idx;
  assign out_data  = data_t'(m_rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; addr <= '0; remain <= '0; idx <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          addr <= cmd_addr; remain <= cmd_len; idx <= '0; state <= S_AR;
        end
        S_AR: if (m_arready) begin
          addr   <= addr + addr_t'(blen);
          remain <= remain - blen;
          state  <= S_R;
        end
        S_R: if (m_rvalid) begin
          idx <= idx + 9'd1;
          if (m_rlast) begin
            if (remain == '0) begin
              state <= S_IDLE; done <= 1'b1;
            end else state <= S_AR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: ARVALID, once raised, holds its address until accepted.
  property p_ar_stable;
    @(posedge clk) disable iff (!rst_n) m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr);
  endproperty
  a_ar_stable: assert property (p_ar_stable);
  // No burst crosses a 4 KB boundary.
  a_4k: assert property (@(posedge clk) disable iff (!rst_n)
          m_arvalid |-> ({1'b0, m_araddr[11:0]} + {4'b0, m_arlen, 1'b0} < 13'd4096));
endmodule
