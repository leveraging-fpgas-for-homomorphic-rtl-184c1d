// galois_unit_tb: for N = 64 and several odd Galois elements (3, 3^k mod 2N and
// 2N-1) applies the unit to every coefficient of a random polynomial and
// compares the scattered result with the reference automorphism X -> X^g.
module galois_unit_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int N = 64;
  int checks = 0, failures = 0;

  logic [$clog2(N)-1:0] idx, out_idx;
  logic [$clog2(N):0] gal;
  logic [W-1:0] x, q, out_x;
  galois_unit #(.N(N)) dut (.idx, .gal, .x, .q, .out_idx, .out_x);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int gals [5] = '{3, 9, 27, 2 * N - 1, 5};
    u64 qq = PRIMES[1];
    vec_t a = new[N];
    vec_t r = new[N];
    vec_t e;
    foreach (a[i]) a[i] = (i % 11 == 0) ? 0 : {$urandom, $urandom} % qq;
    foreach (gals[gi]) begin
      foreach (r[i]) r[i] = 64'hdead;
      for (int i = 0; i < N; i++) begin
        idx = $clog2(N)'(i); gal = ($clog2(N)+1)'(gals[gi]); x = W'(a[i]); q = W'(qq);
        #1;
        r[out_idx] = u64'(out_x);
      end
      e = galois_ref(a, gals[gi], qq);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (r[i] != e[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
