// pcmul_tb: streams back-to-back ciphertext words and 20-bit plaintext words
// (values up to t-1 = 786,432 and the 20-bit maximum) through a PCmul core with
// PC = 4 and checks every product, the MUL_LAT latency and one word per cycle.
module pcmul_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int PC = 4;
  localparam int NV = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [PC-1:0][W-1:0] ct, prod;
  logic [PC-1:0][PT_W-1:0] pt;
  logic [W-1:0] q;
  logic [MU_W-1:0] mu;
  pcmul #(.PC(PC)) dut (.clk, .rst_n, .in_valid, .ct, .pt, .q, .mu, .out_valid, .prod);

  u64 ec [NV][PC], ep [NV][PC], eq [NV];
  int nout = 0, cyc = 0, t_in = -1, t_out = -1;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      if (t_out < 0) t_out = cyc;
      for (int k = 0; k < PC; k++) begin
        checks++;
        if (u64'(prod[k]) != mulmod(ec[nout][k], ep[nout][k], eq[nout])) failures++;
      end
      nout++;
    end
    if (rst_n && in_valid && t_in < 0) t_in = cyc;
  end

  initial begin
    for (int i = 0; i < NV; i++) begin
      eq[i] = PRIMES[(i / 3) % 6];
      for (int k = 0; k < PC; k++) begin
        ec[i][k] = {$urandom, $urandom} % eq[i];
        ep[i][k] = (i % 9 == 0) ? 786432 : (i % 9 == 1) ? 20'hfffff : $urandom % 786433;
      end
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < NV; i++) begin
      in_valid = 1; q = W'(eq[i]); mu = barrett_mu(eq[i]);
      for (int k = 0; k < PC; k++) begin ct[k] = W'(ec[i][k]); pt[k] = PT_W'(ep[i][k]); end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("got %0d outputs", nout); end
    checks++;
    if (t_out - t_in != MUL_LAT) begin failures++; $display("latency %0d", t_out - t_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
