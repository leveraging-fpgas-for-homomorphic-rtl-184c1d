// ntt_core_tb: for two moduli, loads a random limb (N = 64, PC = 4, PB = 4) and
// the forward twiddle table, runs the forward transform and compares it with
// direct evaluation of the polynomial at the odd powers of psi in bit-reversed
// order; then loads the inverse table, runs the inverse transform and checks the
// original limb comes back. Also checks the cycle count of each transform against
// log2(N) * (N/(2*PB) + MUL_LAT + 1) (+ N/PB + MUL_LAT + 1 for the inverse).
module ntt_core_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int N = 64, PC = 4, PB = 4;
  localparam int NW = N / PC, LOGN = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0] q, ninv;
  logic [MU_W-1:0] mu;
  logic start, inverse, busy, done, wr_en, tf_we;
  logic [$clog2(NW)-1:0] wr_addr, rd_addr, tf_waddr;
  logic [PC-1:0][W-1:0] wr_data, rd_data, tf_wdata;

  ntt_core #(.N(N), .PC(PC), .PB(PB)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_tf(vec_t t);
    for (int w = 0; w < NW; w++) begin
      tf_we = 1; tf_waddr = w[$clog2(NW)-1:0];
      for (int k = 0; k < PC; k++) tf_wdata[k] = W'(t[w * PC + k]);
      @(posedge clk); #1;
    end
    tf_we = 0;
  endtask
  task automatic load_data(vec_t a);
    for (int w = 0; w < NW; w++) begin
      wr_en = 1; wr_addr = w[$clog2(NW)-1:0];
      for (int k = 0; k < PC; k++) wr_data[k] = W'(a[w * PC + k]);
      @(posedge clk); #1;
    end
    wr_en = 0;
  endtask
  task automatic run(bit inv, output int cycles);
    inverse = inv; start = 1;
    @(posedge clk); #1;
    start = 0; cycles = 1;
    while (!done) begin @(posedge clk); #1; cycles++; end
  endtask
  task automatic compare(vec_t e, string what);
    int bad = 0;
    for (int w = 0; w < NW; w++) begin
      rd_addr = w[$clog2(NW)-1:0]; #1;
      for (int k = 0; k < PC; k++) begin
        checks++;
        if (u64'(rd_data[k]) != e[w * PC + k]) begin failures++; bad++; end
      end
    end
    if (bad) $display("%s: %0d mismatches", what, bad);
  endtask

  initial begin
    start = 0; wr_en = 0; tf_we = 0; inverse = 0; rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int m = 0; m < 2; m++) begin
      u64 qq, psi;
      vec_t a, e;
      int cyc, exp_f, exp_i;
      qq = PRIMES[m * 3];
      psi = find_psi(qq, N);
      q = W'(qq); mu = barrett_mu(qq); ninv = W'(invmod(N, qq));
      a = new[N];
      foreach (a[i]) a[i] = (i == 3) ? qq - 1 : {$urandom, $urandom} % qq;
      load_tf(tf_table(qq, psi, N, 0));
      load_data(a);
      run(0, cyc);
      exp_f = LOGN * (N / (2 * PB) + MUL_LAT + 1);
      checks++;
      if (cyc < exp_f || cyc > exp_f + 2) begin failures++; $display("fwd cycles %0d expected %0d", cyc, exp_f); end
      e = ntt_ref(a, qq, psi);
      compare(e, "forward");
      load_tf(tf_table(qq, psi, N, 1));
      run(1, cyc);
      exp_i = exp_f + N / PB + MUL_LAT + 1;
      checks++;
      if (cyc < exp_i || cyc > exp_i + 2) begin failures++; $display("inv cycles %0d expected %0d", cyc, exp_i); end
      compare(a, "inverse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
