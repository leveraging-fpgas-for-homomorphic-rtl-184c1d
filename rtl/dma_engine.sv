// dma_engine: moves a block of consecutive words between off-chip memory and a
// local buffer memory.
//
// A start pulse with store = 0 reads `count` words from `base`, base+1, ... and
// writes them, in order, to local word addresses 0 .. count-1 (mem_we/mem_waddr/
// mem_wdata). With store = 1 it reads local words 0 .. count-1 through the
// combinational port mem_raddr/mem_rdata and writes them to base, base+1, ...
// Requests use valid/ready; read responses return in request order and are
// always accepted. `done` pulses for one cycle when the last response has
// arrived or the last write has been accepted. Used by the data-transfer,
// matrix and twiddle-factor buffers; the engine itself is this design's own.
module dma_engine
  import omr_pkg::*;
#(
  parameter int PC    = PC_DEF,
  parameter int CNT_W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 store,
  input  logic [ADDR_W-1:0]    base,
  input  logic [CNT_W-1:0]     count,
  output logic                 busy,
  output logic                 done,
  // off-chip read client
  output logic                 rd_req_valid,
  input  logic                 rd_req_ready,
  output logic [ADDR_W-1:0]    rd_req_addr,
  input  logic                 rd_rsp_valid,
  input  logic [PC-1:0][W-1:0] rd_rsp_data,
  // off-chip write client
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [PC-1:0][W-1:0] wr_data,
  // local memory
  output logic                 mem_we,
  output logic [CNT_W-1:0]     mem_waddr,
  output logic [PC-1:0][W-1:0] mem_wdata,
  output logic [CNT_W-1:0]     mem_raddr,
  input  logic [PC-1:0][W-1:0] mem_rdata
);
  logic             dir_store;
  logic [ADDR_W-1:0] base_r;
  logic [CNT_W-1:0] cnt_r, issued, received;

  assign rd_req_valid = busy && !dir_store && (issued < cnt_r);
  assign rd_req_addr  = base_r + ADDR_W'(issued);
  assign wr_valid     = busy && dir_store && (issued < cnt_r);
  assign wr_addr      = base_r + ADDR_W'(issued);
  assign mem_raddr    = issued;
  assign wr_data      = mem_rdata;
  assign mem_we       = busy && !dir_store && rd_rsp_valid;
  assign mem_waddr    = received;
  assign mem_wdata    = rd_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; dir_store <= 1'b0;
      base_r <= '0; cnt_r <= '0; issued <= '0; received <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; dir_store <= store; base_r <= base; cnt_r <= count;
          issued <= '0; received <= '0;
        end
      end else if (dir_store) begin
        if (wr_valid && wr_ready) begin
          issued <= issued + 1'b1;
          if (issued + 1'b1 == cnt_r) begin busy <= 1'b0; done <= 1'b1; end
        end
      end else begin
        if (rd_req_valid && rd_req_ready) issued <= issued + 1'b1;
        if (rd_rsp_valid) begin
          received <= received + 1'b1;
          if (received + 1'b1 == cnt_r) begin busy <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end
endmodule
