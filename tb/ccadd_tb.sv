// ccadd_tb: streams back-to-back random coefficient words (PC = 4 lanes, limb
// modulus changing per word) through a CCadd core and checks every sum and the
// one-cycle latency / one-word-per-cycle throughput.
module ccadd_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int PC = 4;
  localparam int NV = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [PC-1:0][W-1:0] a, b, sum;
  logic [W-1:0] q;
  ccadd #(.PC(PC)) dut (.clk, .rst_n, .in_valid, .a, .b, .q, .out_valid, .sum);

  u64 ea [NV][PC], eb [NV][PC], eq [NV];
  int nout = 0, first_out = -1, cyc = 0;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      if (first_out < 0) first_out = cyc;
      for (int k = 0; k < PC; k++) begin
        checks++;
        if (u64'(sum[k]) != addmod(ea[nout][k], eb[nout][k], eq[nout])) failures++;
      end
      nout++;
    end
  end

  initial begin
    for (int i = 0; i < NV; i++) begin
      eq[i] = PRIMES[i % 6];
      for (int k = 0; k < PC; k++) begin
        ea[i][k] = {$urandom, $urandom} % eq[i];
        eb[i][k] = (i % 7 == 0) ? eq[i] - 1 : {$urandom, $urandom} % eq[i];
      end
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < NV; i++) begin
      in_valid = 1; q = W'(eq[i]);
      for (int k = 0; k < PC; k++) begin a[k] = W'(ea[i][k]); b[k] = W'(eb[i][k]); end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("got %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
