// key_buffer_tb: the key buffer (DEPTH = 8) prefetches 300 words from a memory
// model that withholds ready at random, while a consumer pops at random. Every
// popped word must equal the memory word at base + n in order; the buffer must
// fill up (be full at least once, exercising the credit limit) and deliver all
// words. A second run from another base checks restart.
module key_buffer_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int PC = 2, DEPTH = 8, CNT = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, rd_req_valid, rd_req_ready, rd_rsp_valid, out_valid, out_ready;
  logic [ADDR_W-1:0] base, rd_req_addr;
  logic [31:0] count;
  logic [PC-1:0][W-1:0] rd_rsp_data, out_data;
  logic [ID_W-1:0] rsp_id;
  logic wr_ready;

  key_buffer #(.PC(PC), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .start, .base, .count, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_rsp_valid, .rd_rsp_data, .out_valid, .out_ready, .out_data);
  hbm_model #(.PC(PC), .DEPTH(1024), .LAT(5)) mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_id('0),
    .rd_rsp_valid, .rd_rsp_id(rsp_id), .rd_rsp_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0));

  int full_seen = 0;
  always @(posedge clk) if (dut.occ == DEPTH) full_seen++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; out_ready = 0; base = '0; count = '0;
    for (int i = 0; i < 1024; i++)
      for (int k = 0; k < PC; k++) mem.mem[i][k] = {$urandom, $urandom} & 60'hfffffffffffffff;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int run = 0; run < 2; run++) begin
      automatic int got = 0, waited = 0;
      automatic int b0 = run ? 700 : 17;
      base = ADDR_W'(b0); count = CNT; start = 1;
      @(posedge clk); #1;
      start = 0;
      while (got < CNT) begin
        out_ready = (waited < 40) ? 1'b0 : ($urandom % 3 != 0);
        waited++;
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (out_data != mem.mem[b0 + got]) failures++;
          got++;
        end
        @(posedge clk); #1;
      end
      out_ready = 0;
      repeat (10) @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("extra word after %0d occ=%0d credit=%0d issued=%0d", CNT, dut.occ, dut.credit, dut.issued); end
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("buffer never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
