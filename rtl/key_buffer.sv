// key_buffer: prefetching FIFO for the rotation key of the Rot core.
//
// A rotation key is far larger than on-chip memory, so only a window of it is
// held here and refilled from off-chip memory while the key-switch MAC consumes
// it. start captures a base address and a word count; the buffer then reads
// base, base+1, ... in order, issuing a request only while the words already
// buffered plus those in flight are fewer than DEPTH, so a returning response
// always finds room. The consumer pops words with out_valid/out_ready in
// address order. Keeping a partial key in on-chip memory that is continuously
// refilled follows the accelerator; the FIFO with credit-based prefetch is this
// design's choice.
module key_buffer
  import omr_pkg::*;
#(
  parameter int PC    = PC_DEF,
  parameter int DEPTH = 64,
  parameter int CNT_W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ADDR_W-1:0]    base,
  input  logic [CNT_W-1:0]     count,
  output logic                 rd_req_valid,
  input  logic                 rd_req_ready,
  output logic [ADDR_W-1:0]    rd_req_addr,
  input  logic                 rd_rsp_valid,
  input  logic [PC-1:0][W-1:0] rd_rsp_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [PC-1:0][W-1:0] out_data
);
  localparam int PW = $clog2(DEPTH);

  logic [PC-1:0][W-1:0] fifo [DEPTH];
  logic [PW-1:0]        wp, rp;
  logic [PW:0]          occ;      // words stored
  logic [PW:0]          credit;   // words stored + requests in flight
  logic [ADDR_W-1:0]    base_r;
  logic [CNT_W-1:0]     cnt_r, issued;

  logic do_req, do_pop;
  assign rd_req_valid = (issued < cnt_r) && (credit < (PW+1)'(DEPTH));
  assign rd_req_addr  = base_r + ADDR_W'(issued);
  assign do_req       = rd_req_valid && rd_req_ready;
  assign out_valid    = (occ != '0);
  assign out_data     = fifo[rp];
  assign do_pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; occ <= '0; credit <= '0;
      base_r <= '0; cnt_r <= '0; issued <= '0;
    end else begin
      if (start) begin
        base_r <= base; cnt_r <= count; issued <= '0;
      end else if (do_req) begin
        issued <= issued + 1'b1;
      end
      if (rd_rsp_valid) wp <= wp + 1'b1;
      if (do_pop)       rp <= rp + 1'b1;
      occ    <= occ + (PW+1)'(rd_rsp_valid) - (PW+1)'(do_pop);
      credit <= credit + (PW+1)'(do_req && !start) - (PW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (rd_rsp_valid) fifo[wp] <= rd_rsp_data;
  end

  initial assert ((DEPTH & (DEPTH - 1)) == 0) else $error("DEPTH must be a power of two");
  overflow_chk: assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> occ < (PW+1)'(DEPTH));
endmodule
