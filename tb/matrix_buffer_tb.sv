// matrix_buffer_tb: loads two plaintexts (N = 32, PC = 4) from a stalling memory
// model into the matrix buffer's two slots, swapping between them, and checks
// that the PCmul side reads the low 20 bits of each stored lane from the
// current slot, and that loading the shadow slot does not disturb it.
module matrix_buffer_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int N = 32, PC = 4, NW = N / PC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic swap, dma_start, dma_busy, dma_done, rd_req_valid, rd_req_ready, rd_rsp_valid, wr_ready;
  logic [$clog2(NW)-1:0] rd_addr;
  logic [PC-1:0][PT_W-1:0] rd_data;
  logic [ADDR_W-1:0] dma_addr, rd_req_addr;
  logic [PC-1:0][W-1:0] rd_rsp_data;
  logic [ID_W-1:0] rsp_id;

  matrix_buffer #(.N(N), .PC(PC)) dut (.*);
  hbm_model #(.PC(PC), .DEPTH(128), .LAT(4)) mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_id('0),
    .rd_rsp_valid, .rd_rsp_id(rsp_id), .rd_rsp_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load(int addr);
    dma_start = 1; dma_addr = ADDR_W'(addr);
    @(posedge clk); #1;
    dma_start = 0;
    while (!dma_done) begin @(posedge clk); #1; end
  endtask
  task automatic check_slot(int addr);
    for (int w = 0; w < NW; w++) begin
      rd_addr = w[$clog2(NW)-1:0]; #1;
      for (int k = 0; k < PC; k++) begin
        checks++;
        if (rd_data[k] != mem.mem[addr + w][k][PT_W-1:0]) failures++;
      end
    end
  endtask

  initial begin
    swap = 0; dma_start = 0; dma_addr = '0; rd_addr = '0;
    for (int i = 0; i < 128; i++) for (int k = 0; k < PC; k++) mem.mem[i][k] = W'({$urandom, $urandom});
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    load(8);
    swap = 1; @(posedge clk); #1; swap = 0;
    check_slot(8);
    load(64);
    check_slot(8);
    swap = 1; @(posedge clk); #1; swap = 0;
    check_slot(64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
