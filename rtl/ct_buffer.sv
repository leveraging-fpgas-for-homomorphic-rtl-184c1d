// ct_buffer: double-buffered data-transfer buffer for one RNS limb of SUB
// ciphertexts (ct_b, ct_sum and ct_out buffers of the MatMul core).
//
// Each of the two banks holds, per sub-buffer, both polynomials of one limb:
// 2*N/PC words of PC residues (word w < N/PC is polynomial 0, the rest
// polynomial 1). The compute side reads all sub-buffers of the current bank at
// rd_addr (combinational read) and writes one sub-buffer at wr_addr. The DMA
// side moves one sub-buffer of the other (shadow) bank to or from off-chip
// memory: dma_start with dma_store = 0 loads 2*N/PC words from dma_addr, with
// dma_store = 1 stores them there; dma_done pulses at the end. A swap pulse
// exchanges the two banks, so a limb can be fetched or written back while the
// previous one is being computed on. Keeping one limb per buffer and double
// buffering follow the accelerator; sub-buffers (PI ciphertexts side by side,
// giving the PCmul cores PI*PC coefficients per cycle) are this design's
// reading of how the single ct_b buffer feeds PI cores.
module ct_buffer
  import omr_pkg::*;
#(
  parameter int N   = N_DEF,
  parameter int PC  = PC_DEF,
  parameter int SUB = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         swap,
  // compute side, current bank
  input  logic [$clog2(2*N/PC)-1:0]    rd_addr,
  output logic [SUB-1:0][PC-1:0][W-1:0] rd_data,
  input  logic                         wr_en,
  input  logic [$clog2(SUB+1)-1:0]     wr_sub,
  input  logic [$clog2(2*N/PC)-1:0]    wr_addr,
  input  logic [PC-1:0][W-1:0]         wr_data,
  // DMA side, shadow bank
  input  logic                         dma_start,
  input  logic                         dma_store,
  input  logic [$clog2(SUB+1)-1:0]     dma_sub,
  input  logic [ADDR_W-1:0]            dma_addr,
  output logic                         dma_busy,
  output logic                         dma_done,
  output logic                         rd_req_valid,
  input  logic                         rd_req_ready,
  output logic [ADDR_W-1:0]            rd_req_addr,
  input  logic                         rd_rsp_valid,
  input  logic [PC-1:0][W-1:0]         rd_rsp_data,
  output logic                         wr_valid,
  input  logic                         wr_ready,
  output logic [ADDR_W-1:0]            hbm_wr_addr,
  output logic [PC-1:0][W-1:0]         hbm_wr_data
);
  localparam int LW    = 2 * N / PC;          // words per limb
  localparam int AW    = $clog2(LW);
  localparam int CNT_W = AW + 1;

  logic [PC-1:0][W-1:0] mem [2][SUB][LW];
  logic                 cur;
  logic [$clog2(SUB+1)-1:0] dsub;

  logic                 m_we;
  logic [CNT_W-1:0]     m_waddr, m_raddr;
  logic [PC-1:0][W-1:0] m_wdata, m_rdata;

  dma_engine #(.PC(PC), .CNT_W(CNT_W)) u_dma (
    .clk, .rst_n, .start(dma_start), .store(dma_store), .base(dma_addr),
    .count(CNT_W'(LW)), .busy(dma_busy), .done(dma_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data),
    .mem_we(m_we), .mem_waddr(m_waddr), .mem_wdata(m_wdata),
    .mem_raddr(m_raddr), .mem_rdata(m_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= 1'b0; dsub <= '0;
    end else begin
      if (swap) cur <= ~cur;
      if (dma_start && !dma_busy) dsub <= dma_sub;
    end
  end

  always_comb begin
    for (int s = 0; s < SUB; s++) rd_data[s] = mem[cur][s][rd_addr];
    m_rdata = mem[~cur][dsub][m_raddr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[cur][wr_sub][wr_addr] <= wr_data;
    if (m_we)  mem[~cur][dsub][m_waddr[AW-1:0]] <= m_wdata;
  end

  initial assert (LW >= 2 && (LW & (LW - 1)) == 0) else $error("2*N/PC must be a power of two");
endmodule
