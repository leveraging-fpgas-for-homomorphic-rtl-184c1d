// ct_buffer_tb: a two-sub-buffer data-transfer buffer (N = 16, PC = 4) loads two
// limbs from a stalling memory model into the shadow bank, swaps and checks the
// compute-side reads of both sub-buffers; then the compute side writes a limb,
// the banks swap and the DMA stores it, and the memory contents are checked.
// Finally it checks that a DMA load into the shadow bank leaves the current
// bank untouched (double buffering).
module ct_buffer_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int N = 16, PC = 4, SUB = 2, LW = 2 * N / PC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic swap, wr_en, dma_start, dma_store, dma_busy, dma_done;
  logic [$clog2(LW)-1:0] rd_addr, wr_addr;
  logic [SUB-1:0][PC-1:0][W-1:0] rd_data;
  logic [$clog2(SUB+1)-1:0] wr_sub, dma_sub;
  logic [PC-1:0][W-1:0] wr_data, rd_rsp_data, hbm_wr_data;
  logic [ADDR_W-1:0] dma_addr, rd_req_addr, hbm_wr_addr;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [ID_W-1:0] rsp_id;

  ct_buffer #(.N(N), .PC(PC), .SUB(SUB)) dut (.*);
  hbm_model #(.PC(PC), .DEPTH(256), .LAT(4)) mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_id('0),
    .rd_rsp_valid, .rd_rsp_id(rsp_id), .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic dma(bit st, int sub, int addr);
    dma_start = 1; dma_store = st; dma_sub = sub[$clog2(SUB+1)-1:0]; dma_addr = ADDR_W'(addr);
    @(posedge clk); #1;
    dma_start = 0;
    while (!dma_done) begin @(posedge clk); #1; end
  endtask
  task automatic do_swap();
    swap = 1; @(posedge clk); #1; swap = 0;
  endtask

  logic [PC-1:0][W-1:0] wdat [LW];

  initial begin
    swap = 0; wr_en = 0; dma_start = 0; dma_store = 0; rd_addr = '0; wr_addr = '0;
    wr_sub = '0; dma_sub = '0; dma_addr = '0; wr_data = '0;
    for (int i = 0; i < 256; i++) for (int k = 0; k < PC; k++) mem.mem[i][k] = W'({$urandom, $urandom});
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    dma(0, 0, 40);
    dma(0, 1, 100);
    do_swap();
    for (int w = 0; w < LW; w++) begin
      rd_addr = w[$clog2(LW)-1:0]; #1;
      checks += 2;
      if (rd_data[0] != mem.mem[40 + w]) failures++;
      if (rd_data[1] != mem.mem[100 + w]) failures++;
    end
    // load the other limb into the shadow bank: current bank must not change
    dma(0, 0, 200);
    for (int w = 0; w < LW; w++) begin
      rd_addr = w[$clog2(LW)-1:0]; #1;
      checks++;
      if (rd_data[0] != mem.mem[40 + w]) failures++;
    end
    // compute-side write, swap, store
    for (int w = 0; w < LW; w++) begin
      for (int k = 0; k < PC; k++) wdat[w][k] = W'({$urandom, $urandom});
      wr_en = 1; wr_sub = 1; wr_addr = w[$clog2(LW)-1:0]; wr_data = wdat[w];
      @(posedge clk); #1;
    end
    wr_en = 0;
    do_swap();
    dma(1, 1, 150);
    repeat (2) @(posedge clk);
    for (int w = 0; w < LW; w++) begin
      checks++;
      if (mem.mem[150 + w] != wdat[w]) failures++;
    end
    // the limb loaded before is now current
    for (int w = 0; w < LW; w++) begin
      rd_addr = w[$clog2(LW)-1:0]; #1;
      checks++;
      if (rd_data[0] != mem.mem[200 + w]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
