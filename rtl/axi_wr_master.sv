// axi_wr_master: AXI4 write engine that stores output words to DRAM.
//
// Each request carries one 16-bit word and its word address. The engine raises AWVALID and
// WVALID together for a single-beat burst (AWLEN = 0, ARSIZE-style size 1, WLAST = 1), drops
// each as it is accepted, and waits for the write response before it accepts the next
// request ('req_ready' high in idle only). Output stores are a small share of the traffic of
// this accelerator, so single beats keep the store unit simple. Writing results back to DRAM
// over AXI follows the paper; the single-beat protocol is this design's choice.
module axi_wr_master
  import xai_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  addr_t       req_addr,
  input  data_t       req_data,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_wvalid,
  input  logic        m_wready,
  output logic [15:0] m_wdata,
  output logic [1:0]  m_wstrb,
  output logic        m_wlast,
  input  logic        m_bvalid,
  output logic        m_bready
);
  typedef enum logic [1:0] {S_IDLE, S_SEND, S_RESP} state_e;
  state_e state;
  logic   aw_done, w_done;
  logic [31:0] awaddr_q;
  logic [15:0] wdata_q;

  assign req_ready = (state == S_IDLE);
  assign m_awvalid = (state == S_SEND) && !aw_done;
  assign m_wvalid  = (state == S_SEND) && !w_done;
  assign m_awaddr  = awaddr_q;
  assign m_wdata   = wdata_q;
  assign m_awlen   = 8'd0;
  assign m_awsize  = 3'd1;
  assign m_awburst = 2'b01;
  assign m_wstrb   = 2'b11;
  assign m_wlast   = 1'b1;
  assign m_bready  = (state == S_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; aw_done <= 1'b0; w_done <= 1'b0; awaddr_q <= '0; wdata_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (req_valid) begin
          awaddr_q <= {req_addr[30:0], 1'b0};
          wdata_q  <= req_data;
          aw_done  <= 1'b0; w_done <= 1'b0;
          state    <= S_SEND;
        end
        S_SEND: begin
          if (m_awvalid && m_awready) aw_done <= 1'b1;
          if (m_wvalid && m_wready)   w_done  <= 1'b1;
          if ((aw_done || m_awready) && (w_done || m_wready)) state <= S_RESP;
        end
        S_RESP: if (m_bvalid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
                 m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr));
  a_w_stable:  assert property (@(posedge clk) disable iff (!rst_n)
                 m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));
endmodule
