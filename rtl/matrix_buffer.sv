// matrix_buffer: plaintext store feeding one PCmul core.
//
// Holds two plaintext slots (double buffering) of N coefficients of PT_W bits,
// as N/PC words of PC coefficients. The PCmul core reads the current slot at
// rd_addr (combinational read). dma_start loads the other slot from N/PC
// consecutive off-chip words starting at dma_addr, keeping the low PT_W bits of
// each W-bit lane; dma_done pulses when it is full, and swap exchanges the
// slots. One dedicated matrix buffer per PCmul core follows the accelerator;
// because the g~*b~ plaintexts cannot all stay on chip at the default sizes,
// the two-slot refillable organisation is this design's choice.
module matrix_buffer
  import omr_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int PC = PC_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       swap,
  input  logic [$clog2(N/PC)-1:0]    rd_addr,
  output logic [PC-1:0][PT_W-1:0]    rd_data,
  input  logic                       dma_start,
  input  logic [ADDR_W-1:0]          dma_addr,
  output logic                       dma_busy,
  output logic                       dma_done,
  output logic                       rd_req_valid,
  input  logic                       rd_req_ready,
  output logic [ADDR_W-1:0]          rd_req_addr,
  input  logic                       rd_rsp_valid,
  input  logic [PC-1:0][W-1:0]       rd_rsp_data
);
  localparam int NW    = N / PC;
  localparam int AW    = $clog2(NW);
  localparam int CNT_W = AW + 1;

  logic [PC-1:0][PT_W-1:0] mem [2][NW];
  logic cur;

  logic                 m_we;
  logic [CNT_W-1:0]     m_waddr, m_raddr;
  logic [PC-1:0][W-1:0] m_wdata;
  logic                 unused_wr_valid;
  logic [ADDR_W-1:0]    unused_wr_addr;
  logic [PC-1:0][W-1:0] unused_wr_data;

  dma_engine #(.PC(PC), .CNT_W(CNT_W)) u_dma (
    .clk, .rst_n, .start(dma_start), .store(1'b0), .base(dma_addr),
    .count(CNT_W'(NW)), .busy(dma_busy), .done(dma_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid(unused_wr_valid), .wr_ready(1'b0), .wr_addr(unused_wr_addr), .wr_data(unused_wr_data),
    .mem_we(m_we), .mem_waddr(m_waddr), .mem_wdata(m_wdata),
    .mem_raddr(m_raddr), .mem_rdata('0)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur <= 1'b0;
    else if (swap) cur <= ~cur;
  end

  assign rd_data = mem[cur][rd_addr];

  always_ff @(posedge clk) begin
    if (m_we)
      for (int k = 0; k < PC; k++) mem[~cur][m_waddr[AW-1:0]][k] <= m_wdata[k][PT_W-1:0];
  end
endmodule
