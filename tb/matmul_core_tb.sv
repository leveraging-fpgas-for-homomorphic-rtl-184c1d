// matmul_core_tb: end-to-end MatMul on the whole core with a small geometry
// (N = 256, L = 4 limbs, PC = 8, PI = 2, PB = 4, b~ = 4 baby steps, g~ = 3 giant
// steps, i.e. 12 plaintext diagonals). Input ciphertext, plaintexts, two
// rotation keys (Galois elements 3 and 3^b~) and twiddle tables are placed in a
// stalling memory model; the result in the ct_out region, and every baby-step
// ciphertext ct_1..ct_(b~-1) in the ct_b region, are compared with a reference that
// runs the MatMul algorithm on the reference Rot, PCmul and CCadd models.
// It counts how often each mechanism of the design occurred and fails if one
// never did: baby-step and giant-step rotations, key switching overlapping the
// PCmul stream, Rot's limb pipelining (key MAC beside the NTT), the ct_sum bypass into ct_out on the first giant step, the
// CCadd of Rot's output with ct_sum, accumulation into ct_sum, bank swaps of
// every double buffer, interconnect contention, memory stalls and key-buffer
// back-pressure.
module matmul_core_tb;
  import omr_pkg::*;
  import omr_ref_pkg::*;
  localparam int N = 256, L = 4, PC = 8, PI = 2, PB = 4, GT = 3, BT = 4, KDEPTH = 16;
  localparam int NW = N / PC, LW = 2 * NW;
  // memory map: ct_b region, ct_sum, ct_out, plaintexts, two keys, twiddles
  localparam int CTB = 0, CTSUM = CTB + BT * L * LW, CTOUT = CTSUM + L * LW, MAT = CTOUT + L * LW;
  localparam int KEY1 = MAT + GT * BT * NW, KEYB = KEY1 + (L + 1) * L * 2 * NW;
  localparam int TF = KEYB + (L + 1) * L * 2 * NW, DEPTH = TF + (L + 1) * 2 * NW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  mod_cfg_t mods [L+1];
  logic [$clog2(N):0] gal1, galB;
  logic m_rd_req_valid, m_rd_req_ready, m_rd_rsp_valid, m_wr_valid, m_wr_ready;
  logic [ADDR_W-1:0] m_rd_req_addr, m_wr_addr;
  logic [ID_W-1:0] m_rd_req_id, m_rd_rsp_id;
  logic [PC-1:0][W-1:0] m_rd_rsp_data, m_wr_data;

  matmul_core #(.N(N), .L(L), .PC(PC), .PI(PI), .PB(PB), .GT(GT), .BT(BT), .KDEPTH(KDEPTH)) dut (
    .clk, .rst_n, .start, .busy, .done, .mods, .gal1, .galB,
    .ctb_base(ADDR_W'(CTB)), .ctsum_base(ADDR_W'(CTSUM)), .ctout_base(ADDR_W'(CTOUT)),
    .mat_base(ADDR_W'(MAT)), .key1_base(ADDR_W'(KEY1)), .keyB_base(ADDR_W'(KEYB)),
    .tf_base(ADDR_W'(TF)),
    .m_rd_req_valid, .m_rd_req_ready, .m_rd_req_addr, .m_rd_req_id,
    .m_rd_rsp_valid, .m_rd_rsp_id, .m_rd_rsp_data,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data);

  hbm_model #(.PC(PC), .DEPTH(DEPTH), .LAT(6)) mem (
    .clk, .rst_n, .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready),
    .rd_req_addr(m_rd_req_addr), .rd_req_id(m_rd_req_id), .rd_rsp_valid(m_rd_rsp_valid),
    .rd_rsp_id(m_rd_rsp_id), .rd_rsp_data(m_rd_rsp_data), .wr_valid(m_wr_valid),
    .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  // mechanism counters
  int n_rot_start = 0, n_overlap = 0, n_bypass = 0, n_comb = 0, n_accum = 0;
  int n_limbpipe = 0, n_swap_ctb = 0, n_swap_sum = 0, n_swap_out = 0, n_swap_mat = 0, n_contend = 0, n_keyfull = 0;
  int cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (busy) cycles++;
    if (dut.rot_start) n_rot_start++;
    if (dut.u_rot.ks_active && dut.mac_issue) n_overlap++;
    if (dut.out_we && !dut.cb_valid) n_bypass++;
    if (dut.cb_valid) n_comb++;
    if (dut.u_rot.mac_issue && dut.u_rot.ntt_busy) n_limbpipe++;
    if (dut.acc_valid && dut.bg != 0) n_accum++;
    if (dut.ctb_swap) n_swap_ctb++;
    if (dut.sum_swap) n_swap_sum++;
    if (dut.out_swap) n_swap_out++;
    if (dut.mat_swap[0]) n_swap_mat++;
    if ($countones(dut.c_rd_req_valid) > 1) n_contend++;
    if (dut.u_rot.u_key.credit == KDEPTH) n_keyfull++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic count_mech(string name, int n, int min_n);
    checks++;
    $display("  %-34s %0d", name, n);
    if (n < min_n) begin failures++; $display("  ^ expected at least %0d", min_n); end
  endtask

  vec_t qs, key1, keyB, ct_in, ctb_exp, out_exp, mats;
  u64 p;

  // key in coefficient form -> NTT form in memory
  task automatic put_key(int base, output vec_t key);
    key = new[(L + 1) * L * 2 * N];
    for (int tt = 0; tt <= L; tt++) begin
      u64 qt, psi;
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
              mem.mem[base + ((tt * L + j) * NW + w) * 2 + o][k] = W'(kn[w * PC + k]);
        end
    end
  endtask

  function automatic vec_t pcmul_ref(vec_t ct, int j);
    vec_t r = new[2 * L * N];
    for (int o = 0; o < 2; o++)
      for (int l = 0; l < L; l++)
        for (int x = 0; x < N; x++)
          r[(o * L + l) * N + x] = mulmod(ct[(o * L + l) * N + x], mats[j * N + x], qs[l]);
    return r;
  endfunction
  function automatic vec_t ccadd_ref(vec_t a, vec_t b);
    vec_t r = new[2 * L * N];
    for (int o = 0; o < 2; o++)
      for (int l = 0; l < L; l++)
        for (int x = 0; x < N; x++)
          r[(o * L + l) * N + x] = addmod(a[(o * L + l) * N + x], b[(o * L + l) * N + x], qs[l]);
    return r;
  endfunction

  // ciphertext c of a region: (o, l, x) at base + (c*L + l)*LW + o*NW + x/PC, lane x%PC
  task automatic check_ct(int base, int c, vec_t e, string what);
    int bad = 0;
    for (int o = 0; o < 2; o++)
      for (int l = 0; l < L; l++)
        for (int x = 0; x < N; x++) begin
          checks++;
          if (u64'(mem.mem[base + (c * L + l) * LW + o * NW + x / PC][x % PC]) != e[(o * L + l) * N + x]) begin
            failures++; bad++;
          end
        end
    if (bad) $display("%s: %0d mismatches", what, bad);
  endtask

  initial begin
    vec_t cts [BT];
    int g1, gB;
    start = 0;
    g1 = 3; gB = int'(powmod(3, BT, 2 * N));
    gal1 = ($clog2(N)+1)'(g1); galB = ($clog2(N)+1)'(gB);
    qs = new[L];
    for (int i = 0; i < L; i++) qs[i] = PRIMES[i];
    p = PRIMES[L];
    for (int i = 0; i < L; i++) mods[i] = make_cfg(qs[i], p, N);
    mods[L] = make_cfg(p, p, N);
    for (int a = 0; a < DEPTH; a++) mem.mem[a] = '0;
    put_key(KEY1, key1);
    put_key(KEYB, keyB);
    for (int tt = 0; tt <= L; tt++) begin
      u64 qt, psi;
      vec_t t0, t1;
      qt = (tt == 0) ? p : qs[tt - 1];
      psi = find_psi(qt, N);
      t0 = tf_table(qt, psi, N, 0);
      t1 = tf_table(qt, psi, N, 1);
      for (int w = 0; w < NW; w++)
        for (int k = 0; k < PC; k++) begin
          mem.mem[TF + (tt * 2) * NW + w][k]     = W'(t0[w * PC + k]);
          mem.mem[TF + (tt * 2 + 1) * NW + w][k] = W'(t1[w * PC + k]);
        end
    end
    // plaintext diagonals: 20-bit values below t = 786,433
    mats = new[GT * BT * N];
    for (int j = 0; j < GT * BT; j++)
      for (int x = 0; x < N; x++) begin
        mats[j * N + x] = (x == 0 && j == 1) ? 786432 : $urandom % 786433;
        mem.mem[MAT + j * NW + x / PC][x % PC] = W'(mats[j * N + x]);
      end
    // input ciphertext = ct_0 in the ctb region
    ct_in = new[2 * L * N];
    for (int o = 0; o < 2; o++)
      for (int l = 0; l < L; l++)
        for (int x = 0; x < N; x++) begin
          ct_in[(o * L + l) * N + x] = {$urandom, $urandom} % qs[l];
          mem.mem[CTB + l * LW + o * NW + x / PC][x % PC] = W'(ct_in[(o * L + l) * N + x]);
        end
    // reference MatMul
    cts[0] = ct_in;
    for (int b = 1; b < BT; b++) cts[b] = rot_ref(cts[b - 1], key1, qs, p, g1, N);
    for (int g = GT - 1; g >= 0; g--) begin
      vec_t sum;
      sum = pcmul_ref(cts[0], g * BT);
      for (int b = 1; b < BT; b++) sum = ccadd_ref(sum, pcmul_ref(cts[b], g * BT + b));
      if (g == GT - 1) out_exp = sum;
      else out_exp = ccadd_ref(rot_ref(out_exp, keyB, qs, p, gB, N), sum);
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    start = 1;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
    repeat (2) @(posedge clk);

    for (int b = 1; b < BT; b++) check_ct(CTB, b, cts[b], $sformatf("ct_%0d", b));
    check_ct(CTOUT, 0, out_exp, "ct_out");

    $display("MatMul finished in %0d cycles; mechanisms:", cycles);
    count_mech("Rot starts (baby + giant steps)", n_rot_start, BT - 1 + GT - 1);
    count_mech("key switch overlapping PCmul", n_overlap, 1);
    count_mech("Rot key MAC beside the NTT (limbs)", n_limbpipe, 1);
    count_mech("ct_sum bypass words into ct_out", n_bypass, L * LW);
    count_mech("Rot + ct_sum CCadd words", n_comb, (GT - 1) * L * LW);
    count_mech("ct_sum accumulations", n_accum, 1);
    count_mech("ct_b bank swaps", n_swap_ctb, 1);
    count_mech("ct_sum bank swaps", n_swap_sum, 1);
    count_mech("ct_out bank swaps", n_swap_out, 1);
    count_mech("matrix buffer swaps", n_swap_mat, GT * L * BT / PI);
    count_mech("interconnect contention cycles", n_contend, 1);
    count_mech("memory stall cycles", mem.stalls, 1);
    count_mech("key buffer at credit limit", n_keyfull, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
