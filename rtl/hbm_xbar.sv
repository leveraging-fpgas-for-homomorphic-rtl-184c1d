// hbm_xbar: interconnect between the MatMul core's memory clients and the
// off-chip memory controller port.
//
// NRD read clients and NWR write clients share one read request channel and one
// write channel. Each channel is granted round-robin among the clients that
// request it; a granted read carries the client number as its tag, and the
// memory returns that tag with the response, which is steered back to the
// client (responses carry no backpressure: each client only asks for what it
// can take). The figure of the accelerator shows only a shared interconnect in
// front of the memory controllers; the arbitration scheme is this design's own.
module hbm_xbar
  import omr_pkg::*;
#(
  parameter int PC  = PC_DEF,
  parameter int NRD = 7,
  parameter int NWR = 3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // clients
  input  logic [NRD-1:0]             c_rd_req_valid,
  output logic [NRD-1:0]             c_rd_req_ready,
  input  logic [ADDR_W-1:0]          c_rd_req_addr [NRD],
  output logic [NRD-1:0]             c_rd_rsp_valid,
  output logic [PC-1:0][W-1:0]       c_rd_rsp_data,
  input  logic [NWR-1:0]             c_wr_valid,
  output logic [NWR-1:0]             c_wr_ready,
  input  logic [ADDR_W-1:0]          c_wr_addr [NWR],
  input  logic [PC-1:0][W-1:0]       c_wr_data [NWR],
  // memory side
  output logic                       m_rd_req_valid,
  input  logic                       m_rd_req_ready,
  output logic [ADDR_W-1:0]          m_rd_req_addr,
  output logic [ID_W-1:0]            m_rd_req_id,
  input  logic                       m_rd_rsp_valid,
  input  logic [ID_W-1:0]            m_rd_rsp_id,
  input  logic [PC-1:0][W-1:0]       m_rd_rsp_data,
  output logic                       m_wr_valid,
  input  logic                       m_wr_ready,
  output logic [ADDR_W-1:0]          m_wr_addr,
  output logic [PC-1:0][W-1:0]       m_wr_data
);
  logic [$clog2(NRD)-1:0] rd_last, rd_sel;
  logic [$clog2(NWR)-1:0] wr_last, wr_sel;
  logic rd_any, wr_any;

  // round-robin: first requester after the last granted one
  always_comb begin
    rd_any = 1'b0; rd_sel = '0;
    for (int k = 1; k <= NRD; k++) begin
      int c;
      c = (int'(rd_last) + k) % NRD;
      if (!rd_any && c_rd_req_valid[c]) begin rd_any = 1'b1; rd_sel = c[$clog2(NRD)-1:0]; end
    end
    wr_any = 1'b0; wr_sel = '0;
    for (int k = 1; k <= NWR; k++) begin
      int c;
      c = (int'(wr_last) + k) % NWR;
      if (!wr_any && c_wr_valid[c]) begin wr_any = 1'b1; wr_sel = c[$clog2(NWR)-1:0]; end
    end
  end

  assign m_rd_req_valid = rd_any;
  assign m_rd_req_addr  = c_rd_req_addr[rd_sel];
  assign m_rd_req_id    = ID_W'(rd_sel);
  assign m_wr_valid     = wr_any;
  assign m_wr_addr      = c_wr_addr[wr_sel];
  assign m_wr_data      = c_wr_data[wr_sel];

  always_comb begin
    c_rd_req_ready = '0;
    c_wr_ready     = '0;
    c_rd_rsp_valid = '0;
    if (rd_any) c_rd_req_ready[rd_sel] = m_rd_req_ready;
    if (wr_any) c_wr_ready[wr_sel]     = m_wr_ready;
    for (int c = 0; c < NRD; c++)
      if (m_rd_rsp_valid && int'(m_rd_rsp_id) == c) c_rd_rsp_valid[c] = 1'b1;
  end
  assign c_rd_rsp_data = m_rd_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_last <= '0; wr_last <= '0;
    end else begin
      if (rd_any && m_rd_req_ready) rd_last <= rd_sel;
      if (wr_any && m_wr_ready)     wr_last <= wr_sel;
    end
  end

  initial assert (NRD < (1 << ID_W)) else $error("too many read clients for ID_W");
endmodule
