// hbm_xbar_tb: four read clients and three write clients issue random traffic
// at once through the interconnect to a memory model with random stalls.
// Each read client must get, in order, exactly the words it asked for (the
// memory is written only where nobody reads), every write must land, and
// each client must be granted while others compete.
module hbm_xbar_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int PC = 2, NRD = 4, NWR = 3, NREQ = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NRD-1:0] c_rd_req_valid, c_rd_req_ready, c_rd_rsp_valid;
  logic [ADDR_W-1:0] c_rd_req_addr [NRD];
  logic [PC-1:0][W-1:0] c_rd_rsp_data;
  logic [NWR-1:0] c_wr_valid, c_wr_ready;
  logic [ADDR_W-1:0] c_wr_addr [NWR];
  logic [PC-1:0][W-1:0] c_wr_data [NWR];
  logic m_rd_req_valid, m_rd_req_ready, m_rd_rsp_valid, m_wr_valid, m_wr_ready;
  logic [ADDR_W-1:0] m_rd_req_addr, m_wr_addr;
  logic [ID_W-1:0] m_rd_req_id, m_rd_rsp_id;
  logic [PC-1:0][W-1:0] m_rd_rsp_data, m_wr_data;

  hbm_xbar #(.PC(PC), .NRD(NRD), .NWR(NWR)) dut (.*);
  hbm_model #(.PC(PC), .DEPTH(2048), .LAT(3)) mem (
    .clk, .rst_n, .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready),
    .rd_req_addr(m_rd_req_addr), .rd_req_id(m_rd_req_id), .rd_rsp_valid(m_rd_rsp_valid),
    .rd_rsp_id(m_rd_rsp_id), .rd_rsp_data(m_rd_rsp_data), .wr_valid(m_wr_valid),
    .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  int issued [NRD], recvd [NRD], wissued [NWR];
  int raddr [NRD][NREQ];
  int contested [NRD];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // read responses
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NRD; c++) if (c_rd_rsp_valid[c]) begin
      checks++;
      if (c_rd_rsp_data != mem.mem[raddr[c][recvd[c]]]) failures++;
      recvd[c]++;
    end
    for (int c = 0; c < NRD; c++)
      if (c_rd_req_valid[c] && c_rd_req_ready[c] && $countones(c_rd_req_valid) > 1) contested[c]++;
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NRD; c++) begin
      if (c_rd_req_valid[c] && c_rd_req_ready[c]) issued[c]++;
    end
    for (int c = 0; c < NWR; c++) if (c_wr_valid[c] && c_wr_ready[c]) wissued[c]++;
    #1;
    for (int c = 0; c < NRD; c++) begin
      c_rd_req_valid[c] = (issued[c] < NREQ) && ($urandom % 4 != 0);
      c_rd_req_addr[c]  = ADDR_W'(raddr[c][issued[c] < NREQ ? issued[c] : 0]);
    end
    for (int c = 0; c < NWR; c++) begin
      c_wr_valid[c] = (wissued[c] < NREQ) && ($urandom % 3 != 0);
      c_wr_addr[c]  = ADDR_W'(1024 + c * 100 + wissued[c]);
      for (int k = 0; k < PC; k++) c_wr_data[c][k] = W'(c * 1000 + wissued[c] * 4 + k);
    end
  end

  initial begin
    c_rd_req_valid = '0; c_wr_valid = '0;
    for (int c = 0; c < NRD; c++) begin issued[c] = 0; recvd[c] = 0; contested[c] = 0; end
    for (int c = 0; c < NWR; c++) wissued[c] = 0;
    for (int c = 0; c < NRD; c++) for (int i = 0; i < NREQ; i++) raddr[c][i] = $urandom % 1024;
    for (int i = 0; i < 2048; i++) for (int k = 0; k < PC; k++) mem.mem[i][k] = W'({$urandom, $urandom});
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    for (int c = 0; c < NRD; c++) begin
      checks++;
      if (recvd[c] != NREQ) begin failures++; $display("client %0d got %0d", c, recvd[c]); end
      checks++;
      if (contested[c] == 0) begin failures++; $display("client %0d never won a contested grant", c); end
    end
    for (int c = 0; c < NWR; c++)
      for (int i = 0; i < NREQ; i++)
        for (int k = 0; k < PC; k++) begin
          checks++;
          if (mem.mem[1024 + c * 100 + i][k] != W'(c * 1000 + i * 4 + k)) failures++;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
