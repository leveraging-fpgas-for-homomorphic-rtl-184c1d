// hbm_model: behavioural model of the off-chip memory and its controllers, for
// simulation only. Word-addressed memory of DEPTH words of PC residues. Read
// requests are accepted when rd_req_ready is high (ready is withheld on a
// pseudo-random pattern when STALL = 1) and answered LAT cycles later, in
// order, with the request's tag. Writes are accepted under the same pattern.
// Testbenches fill and inspect `mem` directly.
module hbm_model
  import omr_pkg::*;
#(
  parameter int PC    = 4,
  parameter int DEPTH = 4096,
  parameter int LAT   = 4,
  parameter bit STALL = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 rd_req_valid,
  output logic                 rd_req_ready,
  input  logic [ADDR_W-1:0]    rd_req_addr,
  input  logic [ID_W-1:0]      rd_req_id,
  output logic                 rd_rsp_valid,
  output logic [ID_W-1:0]      rd_rsp_id,
  output logic [PC-1:0][W-1:0] rd_rsp_data,
  input  logic                 wr_valid,
  output logic                 wr_ready,
  input  logic [ADDR_W-1:0]    wr_addr,
  input  logic [PC-1:0][W-1:0] wr_data
);
  logic [PC-1:0][W-1:0] mem [DEPTH];
  logic [15:0] lfsr;
  logic [LAT-1:0] v;
  logic [ID_W-1:0] id [LAT];
  logic [PC-1:0][W-1:0] d [LAT];
  int reads, writes, stalls;

  assign rd_req_ready = !STALL || lfsr[0] || lfsr[3];
  assign wr_ready     = !STALL || lfsr[1] || lfsr[5];
  assign rd_rsp_valid = v[LAT-1];
  assign rd_rsp_id    = id[LAT-1];
  assign rd_rsp_data  = d[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr <= 16'hace1; v <= '0; reads <= 0; writes <= 0; stalls <= 0;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      v <= {v[LAT-2:0], rd_req_valid && rd_req_ready};
      if (rd_req_valid && rd_req_ready) reads <= reads + 1;
      if ((rd_req_valid && !rd_req_ready) || (wr_valid && !wr_ready)) stalls <= stalls + 1;
      if (wr_valid && wr_ready) begin
        writes <= writes + 1;
        assert (int'(wr_addr) < DEPTH) else $error("write outside memory model: %0d", wr_addr);
        mem[int'(wr_addr)] <= wr_data;
      end
    end
  end
  always_ff @(posedge clk) begin
    id[0] <= rd_req_id;
    d[0]  <= (int'(rd_req_addr) < DEPTH) ? mem[int'(rd_req_addr)] : '0;
    for (int k = 1; k < LAT; k++) begin id[k] <= id[k-1]; d[k] <= d[k-1]; end
  end
endmodule
