// ccadd_tree_tb: feeds PI = 4 product words per cycle into the CCadd tree and
// checks the modular sum of all four, the log2(PI) = 2 cycle latency and that
// a new set is taken every cycle.
module ccadd_tree_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int PC = 2;
  localparam int PI = 4;
  localparam int NV = 150;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [PI-1:0][PC-1:0][W-1:0] in;
  logic [PC-1:0][W-1:0] sum;
  logic [W-1:0] q;
  ccadd_tree #(.PC(PC), .PI(PI)) dut (.clk, .rst_n, .in_valid, .in, .q, .out_valid, .sum);

  u64 ei [NV][PI][PC], eq [NV];
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
        automatic u64 s = 0;
        for (int i = 0; i < PI; i++) s = addmod(s, ei[nout][i][k], eq[nout]);
        checks++;
        if (u64'(sum[k]) != s) failures++;
      end
      nout++;
    end
    if (rst_n && in_valid && t_in < 0) t_in = cyc;
  end

  initial begin
    for (int v = 0; v < NV; v++) begin
      eq[v] = PRIMES[v % 6];
      for (int i = 0; i < PI; i++)
        for (int k = 0; k < PC; k++) ei[v][i][k] = (v % 5 == 0) ? eq[v] - 1 : {$urandom, $urandom} % eq[v];
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int v = 0; v < NV; v++) begin
      in_valid = 1; q = W'(eq[v]);
      for (int i = 0; i < PI; i++) for (int k = 0; k < PC; k++) in[i][k] = W'(ei[v][i][k]);
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("got %0d outputs", nout); end
    checks++;
    if (t_out - t_in != $clog2(PI)) begin failures++; $display("latency %0d", t_out - t_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
