// rot_tb: end-to-end test of the Rot core at N = 16, L = 2 ciphertext limbs,
// PC = 4, PB = 2. Random coefficient-form rotation keys are generated for the
// two ciphertext moduli and the special modulus; their NTT forms (computed by
// direct evaluation) and the twiddle tables are placed in a stalling memory
// model. Random ciphertexts are rotated with Galois elements 3 (one slot) and
// 3^4 mod 2N, with random backpressure on the output, and every output residue
// is compared with a reference that applies the automorphism and does key
// switching by schoolbook negacyclic products. Also checks that the twiddle
// table is reloaded, that the key prefetch hits its credit limit, and that the
// key multiply-accumulate of one limb runs while the NTT transforms the next.
module rot_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int N = 16, L = 2, PC = 4, PB = 2, KDEPTH = 8;
  localparam int NW = N / PC;
  localparam int KEY_BASE = 0, TF_BASE = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mod_cfg_t mods [L+1];
  logic start, busy, ks_active, done, in_valid, in_ready, out_valid, out_ready;
  logic [$clog2(N):0] gal;
  logic [ADDR_W-1:0] key_base, tf_base;
  logic [PC-1:0][W-1:0] in_data, out_data;
  logic key_req_valid, key_req_ready, key_rsp_valid, tf_req_valid, tf_req_ready, tf_rsp_valid;
  logic [ADDR_W-1:0] key_req_addr, tf_req_addr;
  logic [PC-1:0][W-1:0] key_rsp_data, tf_rsp_data;

  rot #(.N(N), .L(L), .PC(PC), .PB(PB), .KDEPTH(KDEPTH)) dut (.*);

  // two memory models share one array image: keys and twiddles
  logic [ID_W-1:0] id0, id1;
  logic wr0, wr1;
  hbm_model #(.PC(PC), .DEPTH(128), .LAT(5)) kmem (
    .clk, .rst_n, .rd_req_valid(key_req_valid), .rd_req_ready(key_req_ready),
    .rd_req_addr(key_req_addr), .rd_req_id('0), .rd_rsp_valid(key_rsp_valid), .rd_rsp_id(id0),
    .rd_rsp_data(key_rsp_data), .wr_valid(1'b0), .wr_ready(wr0), .wr_addr('0), .wr_data('0));
  hbm_model #(.PC(PC), .DEPTH(128), .LAT(3)) tmem (
    .clk, .rst_n, .rd_req_valid(tf_req_valid), .rd_req_ready(tf_req_ready),
    .rd_req_addr(tf_req_addr), .rd_req_id('0), .rd_rsp_valid(tf_rsp_valid), .rd_rsp_id(id1),
    .rd_rsp_data(tf_rsp_data), .wr_valid(1'b0), .wr_ready(wr1), .wr_addr('0), .wr_data('0));

  int tf_loads = 0, key_full = 0, overlap = 0;
  always @(posedge clk) begin
    if (dut.tf_dma_done) tf_loads++;
    if (dut.u_key.credit == KDEPTH) key_full++;
    if (dut.mac_issue && dut.ntt_busy) overlap++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  vec_t qs;
  u64 p;
  vec_t key;

  initial begin
    int gals [2];
    start = 0; in_valid = 0; out_ready = 0; gal = '0; in_data = '0;
    key_base = KEY_BASE; tf_base = TF_BASE;
    gals[0] = 3; gals[1] = int'(powmod(3, 4, 2 * N));
    qs = new[L];
    for (int i = 0; i < L; i++) qs[i] = PRIMES[i];
    p = PRIMES[L];
    for (int i = 0; i < L; i++) mods[i] = make_cfg(qs[i], p, N);
    mods[L] = make_cfg(p, p, N);
    // keys (coefficient form) and their images in memory
    key = new[(L + 1) * L * 2 * N];
    for (int tt = 0; tt <= L; tt++) begin
      u64 qt, psi;
      vec_t t0, t1;
      qt = (tt == 0) ? p : qs[tt - 1];
      psi = find_psi(qt, N);
      for (int j = 0; j < L; j++)
        for (int o = 0; o < 2; o++) begin
          vec_t kn;
          int kb;
          kb = ((tt * L + j) * 2 + o) * N;
          for (int x = 0; x < N; x++) key[kb + x] = {$urandom, $urandom} % qt;
          kn = ntt_ref(slice(key, kb, N), qt, psi);
          for (int w = 0; w < NW; w++)
            for (int k = 0; k < PC; k++)
              kmem.mem[KEY_BASE + ((tt * L + j) * NW + w) * 2 + o][k] = W'(kn[w * PC + k]);
        end
      t0 = tf_table(qt, psi, N, 0);
      t1 = tf_table(qt, psi, N, 1);
      for (int w = 0; w < NW; w++)
        for (int k = 0; k < PC; k++) begin
          tmem.mem[TF_BASE + (tt * 2) * NW + w][k]     = W'(t0[w * PC + k]);
          tmem.mem[TF_BASE + (tt * 2 + 1) * NW + w][k] = W'(t1[w * PC + k]);
        end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    for (int r = 0; r < 2; r++) begin
      vec_t ct, exp_ct;
      int nout;
      ct = new[2 * L * N];
      for (int o = 0; o < 2; o++)
        for (int l = 0; l < L; l++)
          for (int x = 0; x < N; x++) ct[(o * L + l) * N + x] = {$urandom, $urandom} % qs[l];
      exp_ct = rot_ref(ct, key, qs, p, gals[r], N);
      gal = ($clog2(N)+1)'(gals[r]); start = 1;
      @(posedge clk); #1;
      start = 0;
      for (int l = 0; l < L; l++)
        for (int o = 0; o < 2; o++)
          for (int w = 0; w < NW; w++) begin
            in_valid = 1;
            for (int k = 0; k < PC; k++) in_data[k] = W'(ct[(o * L + l) * N + w * PC + k]);
            #1;
            while (!in_ready) begin @(posedge clk); #1; end
            @(posedge clk); #1;
          end
      in_valid = 0;
      nout = 0;
      while (nout < L * 2 * NW) begin
        out_ready = ($urandom % 4 != 0);
        #1;
        if (out_valid && out_ready) begin
          int l, o, w;
          l = nout / (2 * NW); o = (nout / NW) % 2; w = nout % NW;
          for (int k = 0; k < PC; k++) begin
            checks++;
            if (u64'(out_data[k]) != exp_ct[(o * L + l) * N + w * PC + k]) begin
              failures++;
              if (failures < 6) $display("rot %0d limb %0d poly %0d coef %0d: got %h exp %h",
                                         r, l, o, w * PC + k, out_data[k], exp_ct[(o * L + l) * N + w * PC + k]);
            end
          end
          nout++;
        end
        @(posedge clk); #1;
      end
      out_ready = 0;
      repeat (3) @(posedge clk); #1;
      checks++;
      if (busy) begin failures++; $display("still busy after the last word"); end
    end
    checks++;
    if (tf_loads < 2 * (L + 1)) begin failures++; $display("twiddle reloads: %0d", tf_loads); end
    checks++;
    if (key_full == 0) begin failures++; $display("key buffer never reached its credit limit"); end
    // limb pipelining: the key MAC of limb j runs while the NTT transforms limb
    // j+1, for every target modulus and each of the two rotations
    checks++;
    if (overlap < 2 * (L + 1) * (L - 1)) begin failures++; $display("MAC/NTT overlap cycles: %0d", overlap); end
    $display("rot: twiddle reloads %0d, cycles with key buffer at limit %0d, MAC during NTT %0d",
             tf_loads, key_full, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
