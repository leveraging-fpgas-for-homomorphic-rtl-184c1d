// modmul_tb: drives the Barrett multiplier with a new random operand pair every
// cycle for six different 60-bit moduli (including the edge operands 0 and
// q-1) and checks each product against a 128-bit reference exactly MUL_LAT
// cycles later.
module modmul_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [W-1:0] a, b, q, r;
  logic [MU_W-1:0] mu;
  modmul dut (.clk, .a, .b, .q, .mu, .r);

  localparam int NV = 600;
  u64 ea [NV], eb [NV], eq [NV];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NV; i++) begin
      eq[i] = PRIMES[i % 6];
      ea[i] = {$urandom, $urandom} % eq[i];
      eb[i] = {$urandom, $urandom} % eq[i];
      if (i % 50 == 1) ea[i] = eq[i] - 1;
      if (i % 50 == 2) begin ea[i] = eq[i] - 1; eb[i] = eq[i] - 1; end
      if (i % 50 == 3) eb[i] = 0;
    end
    for (int i = 0; i < NV + MUL_LAT; i++) begin
      if (i < NV) begin
        a = W'(ea[i]); b = W'(eb[i]); q = W'(eq[i]); mu = barrett_mu(eq[i]);
      end
      @(posedge clk); #1;
      if (i >= MUL_LAT - 1 && i - (MUL_LAT - 1) < NV) begin
        automatic int k = i - (MUL_LAT - 1);
        checks++;
        if (u64'(r) != mulmod(ea[k], eb[k], eq[k])) begin
          failures++;
          if (failures < 5) $display("mismatch %0d: %h * %h mod %h = %h", k, ea[k], eb[k], eq[k], r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
