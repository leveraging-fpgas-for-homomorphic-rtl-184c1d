// matmul_core: homomorphic matrix-vector product (MatMul) accelerator core.
//
// It computes ct_out = sum_g Rot^(g*BT)( sum_b PCmul(m_(g*BT+b), Rot^b(ct_in)) )
// with the baby-step giant-step schedule of the MatMul algorithm (BT baby steps,
// GT giant steps, GT*BT plaintext diagonals m_j):
//   phase A (baby steps):  ct_b = Rot^1(ct_(b-1)) for b = 1 .. BT-1
//   phase B (giant steps): for g = GT-1 down to 0
//       ct_sum = sum_b PCmul(m_(g*BT+b), ct_b)
//       ct_out = ct_sum                          if g = GT-1
//       ct_out = CCadd(Rot^BT(ct_out), ct_sum)   otherwise
// The Rot^BT of one giant step runs in the Rot core while the PCmul cores
// compute the next ct_sum, since the two do not depend on each other.
//
// Blocks: one Rot core shared by both phases; PI PCmul cores, each with its own
// matrix buffer; a tree of PI-1 CCadd cores summing their products; a CCadd
// that accumulates into the ct_sum buffer; a CCadd that adds Rot's output to
// ct_sum; double-buffered one-limb data-transfer buffers ct_b, ct_sum, ct_out;
// a mux choosing Rot's input (ct_b or ct_out buffer) and one choosing what
// enters the ct_out buffer (ct_sum itself, or the CCadd sum); and an
// interconnect to the single off-chip memory port. Ciphertexts move through
// the buffers one RNS limb (both polynomials) at a time.
//
// Off-chip layout (word addresses; a word is PC residues; LW = 2*N/PC words per
// limb, polynomial 0 first): ciphertext c, limb l of a region at
// base + (c*L + l)*LW. ct_0 = ct_in is ciphertext 0 of the ctb region, which
// also receives ct_1 .. ct_(BT-1). ct_sum and ct_out use ciphertext 0 of their
// regions; the result is in the ct_out region. Plaintext m_j occupies N/PC
// words at mat_base + j*N/PC, one coefficient in the low PT_W bits of each lane.
// Rotation keys (gal1/key1_base for Rot^1, galB/keyB_base for Rot^BT) and the
// twiddle tables are laid out as described in rot.sv.
//
// Memory port: read requests carry a tag that must come back with the data;
// responses are always accepted. start begins the whole MatMul; done pulses at
// the end. The PC/PI/PB parallelism, the core inventory and the data paths
// follow the accelerator's block diagram; the per-limb loop order, the memory
// layout, the tagging and the sequential (not overlapped) fetch of each limb
// into the double buffers are this design's own choices.
module matmul_core
  import omr_pkg::*;
#(
  parameter int N      = N_DEF,
  parameter int L      = L_DEF,
  parameter int PC     = PC_DEF,
  parameter int PI     = PI_DEF,
  parameter int PB     = PB_DEF,
  parameter int GT     = GT_DEF,
  parameter int BT     = BT_DEF,
  parameter int KDEPTH = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  input  mod_cfg_t             mods [L+1],
  input  logic [$clog2(N):0]   gal1,
  input  logic [$clog2(N):0]   galB,
  input  logic [ADDR_W-1:0]    ctb_base,
  input  logic [ADDR_W-1:0]    ctsum_base,
  input  logic [ADDR_W-1:0]    ctout_base,
  input  logic [ADDR_W-1:0]    mat_base,
  input  logic [ADDR_W-1:0]    key1_base,
  input  logic [ADDR_W-1:0]    keyB_base,
  input  logic [ADDR_W-1:0]    tf_base,
  // off-chip memory port
  output logic                 m_rd_req_valid,
  input  logic                 m_rd_req_ready,
  output logic [ADDR_W-1:0]    m_rd_req_addr,
  output logic [ID_W-1:0]      m_rd_req_id,
  input  logic                 m_rd_rsp_valid,
  input  logic [ID_W-1:0]      m_rd_rsp_id,
  input  logic [PC-1:0][W-1:0] m_rd_rsp_data,
  output logic                 m_wr_valid,
  input  logic                 m_wr_ready,
  output logic [ADDR_W-1:0]    m_wr_addr,
  output logic [PC-1:0][W-1:0] m_wr_data
);
  localparam int NW   = N / PC;
  localparam int LW   = 2 * NW;
  localparam int AW   = $clog2(NW);
  localparam int AWL  = $clog2(LW);
  localparam int NRD  = 5 + PI;
  localparam int NWR  = 3;
  localparam int TL   = $clog2(PI);
  localparam int DL   = MUL_LAT + TL;     // PCmul + tree latency
  localparam int CW   = 16;               // loop counter width
  localparam int SW   = $clog2(PI + 1);

  // client numbers on the interconnect
  localparam int RC_CTB = 0, RC_SUM = 1, RC_OUT = 2, RC_KEY = 3, RC_TF = 4, RC_MAT = 5;
  localparam int WC_CTB = 0, WC_SUM = 1, WC_OUT = 2;

  typedef enum logic [5:0] {
    T_IDLE,
    A_START, A_LD, A_LDW, A_FEED, A_OUT, A_SWP, A_ST, A_STW,
    B_START, B_RLD, B_RLDW, B_RFEED,
    B_MLD, B_CLD, B_CLDW, B_MW, B_MAC, B_MDRAIN,
    B_BYP, B_BSWP, B_BST, B_BSTW,
    B_SSWP, B_SST, B_SSTW,
    B_XLD, B_XLDW, B_COMB, B_CDRAIN, B_CSWP, B_CST, B_CSTW,
    B_NEXTG, T_DONE
  } tstate_t;
  tstate_t state;

  logic [CW-1:0]  b_i, g_i, bg, l_i;
  logic [SW-1:0]  si;
  logic [AWL:0]   cnt;

  function automatic logic [ADDR_W-1:0] ct_addr(logic [ADDR_W-1:0] base, int c, int l);
    return base + ADDR_W'(unsigned'((c * L + l) * LW));
  endfunction

  // ---------------- interconnect ----------------
  logic [NRD-1:0]       c_rd_req_valid, c_rd_req_ready, c_rd_rsp_valid;
  logic [ADDR_W-1:0]    c_rd_req_addr [NRD];
  logic [PC-1:0][W-1:0] c_rd_rsp_data;
  logic [NWR-1:0]       c_wr_valid, c_wr_ready;
  logic [ADDR_W-1:0]    c_wr_addr [NWR];
  logic [PC-1:0][W-1:0] c_wr_data [NWR];

  hbm_xbar #(.PC(PC), .NRD(NRD), .NWR(NWR)) u_xbar (
    .clk, .rst_n,
    .c_rd_req_valid, .c_rd_req_ready, .c_rd_req_addr, .c_rd_rsp_valid, .c_rd_rsp_data,
    .c_wr_valid, .c_wr_ready, .c_wr_addr, .c_wr_data,
    .m_rd_req_valid, .m_rd_req_ready, .m_rd_req_addr, .m_rd_req_id,
    .m_rd_rsp_valid, .m_rd_rsp_id, .m_rd_rsp_data,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data
  );

  // ---------------- data-transfer buffers ----------------
  logic                          ctb_swap, ctb_dstart, ctb_dstore, ctb_dbusy, ctb_ddone, ctb_we;
  logic [SW-1:0]                 ctb_dsub;
  logic [ADDR_W-1:0]             ctb_daddr;
  logic [AWL-1:0]                ctb_raddr, ctb_waddr;
  logic [PI-1:0][PC-1:0][W-1:0]  ctb_rdata;
  logic [PC-1:0][W-1:0]          ctb_wdata;

  ct_buffer #(.N(N), .PC(PC), .SUB(PI)) u_ctb (
    .clk, .rst_n, .swap(ctb_swap),
    .rd_addr(ctb_raddr), .rd_data(ctb_rdata),
    .wr_en(ctb_we), .wr_sub('0), .wr_addr(ctb_waddr), .wr_data(ctb_wdata),
    .dma_start(ctb_dstart), .dma_store(ctb_dstore), .dma_sub(ctb_dsub), .dma_addr(ctb_daddr),
    .dma_busy(ctb_dbusy), .dma_done(ctb_ddone),
    .rd_req_valid(c_rd_req_valid[RC_CTB]), .rd_req_ready(c_rd_req_ready[RC_CTB]),
    .rd_req_addr(c_rd_req_addr[RC_CTB]), .rd_rsp_valid(c_rd_rsp_valid[RC_CTB]),
    .rd_rsp_data(c_rd_rsp_data),
    .wr_valid(c_wr_valid[WC_CTB]), .wr_ready(c_wr_ready[WC_CTB]),
    .hbm_wr_addr(c_wr_addr[WC_CTB]), .hbm_wr_data(c_wr_data[WC_CTB])
  );

  logic                 sum_swap, sum_dstart, sum_dstore, sum_dbusy, sum_ddone, sum_we;
  logic [ADDR_W-1:0]    sum_daddr;
  logic [AWL-1:0]       sum_raddr, sum_waddr;
  logic [0:0][PC-1:0][W-1:0] sum_rdata;
  logic [PC-1:0][W-1:0] sum_wdata;

  ct_buffer #(.N(N), .PC(PC), .SUB(1)) u_ctsum (
    .clk, .rst_n, .swap(sum_swap),
    .rd_addr(sum_raddr), .rd_data(sum_rdata),
    .wr_en(sum_we), .wr_sub('0), .wr_addr(sum_waddr), .wr_data(sum_wdata),
    .dma_start(sum_dstart), .dma_store(sum_dstore), .dma_sub('0), .dma_addr(sum_daddr),
    .dma_busy(sum_dbusy), .dma_done(sum_ddone),
    .rd_req_valid(c_rd_req_valid[RC_SUM]), .rd_req_ready(c_rd_req_ready[RC_SUM]),
    .rd_req_addr(c_rd_req_addr[RC_SUM]), .rd_rsp_valid(c_rd_rsp_valid[RC_SUM]),
    .rd_rsp_data(c_rd_rsp_data),
    .wr_valid(c_wr_valid[WC_SUM]), .wr_ready(c_wr_ready[WC_SUM]),
    .hbm_wr_addr(c_wr_addr[WC_SUM]), .hbm_wr_data(c_wr_data[WC_SUM])
  );

  logic                 out_swap, out_dstart, out_dstore, out_dbusy, out_ddone, out_we;
  logic [ADDR_W-1:0]    out_daddr;
  logic [AWL-1:0]       out_raddr, out_waddr;
  logic [0:0][PC-1:0][W-1:0] out_rdata;
  logic [PC-1:0][W-1:0] out_wdata;

  ct_buffer #(.N(N), .PC(PC), .SUB(1)) u_ctout (
    .clk, .rst_n, .swap(out_swap),
    .rd_addr(out_raddr), .rd_data(out_rdata),
    .wr_en(out_we), .wr_sub('0), .wr_addr(out_waddr), .wr_data(out_wdata),
    .dma_start(out_dstart), .dma_store(out_dstore), .dma_sub('0), .dma_addr(out_daddr),
    .dma_busy(out_dbusy), .dma_done(out_ddone),
    .rd_req_valid(c_rd_req_valid[RC_OUT]), .rd_req_ready(c_rd_req_ready[RC_OUT]),
    .rd_req_addr(c_rd_req_addr[RC_OUT]), .rd_rsp_valid(c_rd_rsp_valid[RC_OUT]),
    .rd_rsp_data(c_rd_rsp_data),
    .wr_valid(c_wr_valid[WC_OUT]), .wr_ready(c_wr_ready[WC_OUT]),
    .hbm_wr_addr(c_wr_addr[WC_OUT]), .hbm_wr_data(c_wr_data[WC_OUT])
  );

  // ---------------- matrix buffers and PCmul cores ----------------
  logic [PI-1:0]           mat_dstart, mat_dbusy, mat_ddone, mat_swap;
  logic [ADDR_W-1:0]       mat_daddr [PI];
  logic [PC-1:0][PT_W-1:0] mat_rdata [PI];
  logic                    mac_issue;
  logic [PI-1:0]           pm_valid;
  logic [PI-1:0][PC-1:0][W-1:0] pm_prod;
  mod_cfg_t                lm;          // modulus of the current limb
  assign lm = mods[l_i];

  for (genvar i = 0; i < PI; i++) begin : g_pc
    matrix_buffer #(.N(N), .PC(PC)) u_mat (
      .clk, .rst_n, .swap(mat_swap[i]),
      .rd_addr(cnt[AW-1:0]), .rd_data(mat_rdata[i]),
      .dma_start(mat_dstart[i]), .dma_addr(mat_daddr[i]),
      .dma_busy(mat_dbusy[i]), .dma_done(mat_ddone[i]),
      .rd_req_valid(c_rd_req_valid[RC_MAT+i]), .rd_req_ready(c_rd_req_ready[RC_MAT+i]),
      .rd_req_addr(c_rd_req_addr[RC_MAT+i]), .rd_rsp_valid(c_rd_rsp_valid[RC_MAT+i]),
      .rd_rsp_data(c_rd_rsp_data)
    );
    pcmul #(.PC(PC)) u_pcmul (
      .clk, .rst_n, .in_valid(mac_issue), .ct(ctb_rdata[i]), .pt(mat_rdata[i]),
      .q(lm.q), .mu(lm.mu), .out_valid(pm_valid[i]), .prod(pm_prod[i])
    );
    assign mat_daddr[i] = mat_base +
        ADDR_W'(unsigned'((int'(g_i) * BT + int'(bg) * PI + i) * NW));
  end

  // ---------------- CCadd tree and accumulation ----------------
  logic                 tr_valid, acc_valid;
  logic [PC-1:0][W-1:0] tr_sum, acc_sum;
  ccadd_tree #(.PC(PC), .PI(PI)) u_tree (
    .clk, .rst_n, .in_valid(pm_valid[0]), .in(pm_prod), .q(lm.q),
    .out_valid(tr_valid), .sum(tr_sum)
  );

  logic [AWL-1:0] wpipe [DL+1];
  always_ff @(posedge clk) begin
    wpipe[0] <= cnt[AWL-1:0];
    for (int d = 1; d <= DL; d++) wpipe[d] <= wpipe[d-1];
  end
  // wpipe[DL-1] is the word address of the tree output, wpipe[DL] one cycle later

  ccadd #(.PC(PC)) u_acc (
    .clk, .rst_n, .in_valid(tr_valid), .a(tr_sum),
    .b((bg == '0) ? '0 : sum_rdata[0]), .q(lm.q),
    .out_valid(acc_valid), .sum(acc_sum)
  );

  // ---------------- Rot core and combining CCadd ----------------
  logic                 rot_start, rot_busy, rot_ks, rot_done;
  logic                 rot_in_valid, rot_in_ready, rot_out_valid, rot_out_ready;
  logic [PC-1:0][W-1:0] rot_in_data, rot_out_data;
  logic                 phase_b;

  rot #(.N(N), .L(L), .PC(PC), .PB(PB), .KDEPTH(KDEPTH)) u_rot (
    .clk, .rst_n, .mods, .start(rot_start), .gal(phase_b ? galB : gal1),
    .key_base(phase_b ? keyB_base : key1_base), .tf_base(tf_base),
    .busy(rot_busy), .ks_active(rot_ks), .done(rot_done),
    .in_valid(rot_in_valid), .in_ready(rot_in_ready), .in_data(rot_in_data),
    .out_valid(rot_out_valid), .out_ready(rot_out_ready), .out_data(rot_out_data),
    .key_req_valid(c_rd_req_valid[RC_KEY]), .key_req_ready(c_rd_req_ready[RC_KEY]),
    .key_req_addr(c_rd_req_addr[RC_KEY]), .key_rsp_valid(c_rd_rsp_valid[RC_KEY]),
    .key_rsp_data(c_rd_rsp_data),
    .tf_req_valid(c_rd_req_valid[RC_TF]), .tf_req_ready(c_rd_req_ready[RC_TF]),
    .tf_req_addr(c_rd_req_addr[RC_TF]), .tf_rsp_valid(c_rd_rsp_valid[RC_TF]),
    .tf_rsp_data(c_rd_rsp_data)
  );

  // Rot input mux: ct_b buffer (baby steps) or ct_out buffer (giant steps)
  assign rot_in_data   = (state == B_RFEED) ? out_rdata[0] : ctb_rdata[0];
  assign rot_in_valid  = (state == A_FEED) || (state == B_RFEED);
  assign rot_out_ready = (state == A_OUT) || (state == B_COMB);
  assign rot_start     = (state == A_START) || (state == B_START && int'(g_i) != GT - 1);

  logic                 cb_valid;
  logic [PC-1:0][W-1:0] cb_sum;
  logic [AWL-1:0]       cnt_d;
  ccadd #(.PC(PC)) u_comb (
    .clk, .rst_n, .in_valid((state == B_COMB) && rot_out_valid), .a(rot_out_data),
    .b(sum_rdata[0]), .q(lm.q), .out_valid(cb_valid), .sum(cb_sum)
  );
  always_ff @(posedge clk) cnt_d <= cnt[AWL-1:0];

  // ---------------- buffer ports ----------------
  assign mac_issue = (state == B_MAC);
  assign ctb_raddr = cnt[AWL-1:0];
  assign out_raddr = cnt[AWL-1:0];
  assign sum_raddr = (state == B_MAC || state == B_MDRAIN) ? wpipe[DL-1] : cnt[AWL-1:0];

  // ct_b buffer is written with Rot's output during the baby steps
  assign ctb_we    = (state == A_OUT) && rot_out_valid;
  assign ctb_waddr = cnt[AWL-1:0];
  assign ctb_wdata = rot_out_data;

  assign sum_we    = acc_valid;
  assign sum_waddr = wpipe[DL];
  assign sum_wdata = acc_sum;

  // ct_out input mux: ct_sum (first giant step) or CCadd(Rot(ct_out), ct_sum)
  always_comb begin
    if (state == B_BYP) begin
      out_we = 1'b1; out_waddr = cnt[AWL-1:0]; out_wdata = sum_rdata[0];
    end else begin
      out_we = cb_valid; out_waddr = cnt_d; out_wdata = cb_sum;
    end
  end

  // DMA commands
  assign ctb_dstart = (state == A_LD) || (state == A_ST) || (state == B_CLD);
  assign ctb_dstore = (state == A_ST);
  assign ctb_dsub   = (state == B_CLD) ? si : '0;
  always_comb begin
    unique case (state)
      A_LD:    ctb_daddr = ct_addr(ctb_base, int'(b_i) - 1, int'(l_i));
      A_ST:    ctb_daddr = ct_addr(ctb_base, int'(b_i), int'(l_i));
      default: ctb_daddr = ct_addr(ctb_base, int'(bg) * PI + int'(si), int'(l_i));
    endcase
  end
  assign sum_dstart = (state == B_SST) || (state == B_XLD);
  assign sum_dstore = (state == B_SST);
  assign sum_daddr  = ct_addr(ctsum_base, 0, int'(l_i));
  assign out_dstart = (state == B_RLD) || (state == B_BST) || (state == B_CST);
  assign out_dstore = (state != B_RLD);
  assign out_daddr  = ct_addr(ctout_base, 0, int'(l_i));
  assign mat_dstart = {PI{state == B_MLD}};

  assign ctb_swap = (state == A_LDW && ctb_ddone) || (state == A_SWP) || (state == B_MW && mat_dbusy == '0);
  assign mat_swap = {PI{state == B_MW && mat_dbusy == '0}};
  assign sum_swap = (state == B_SSWP) || (state == B_XLDW && sum_ddone);
  assign out_swap = (state == B_RLDW && out_ddone) || (state == B_BSWP) || (state == B_CSWP);

  // pipeline occupancy for the accumulate drain
  logic [DL+1:0] mvpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mvpipe <= '0;
    else        mvpipe <= {mvpipe[DL:0], mac_issue};
  end

  // ---------------- controller (MatMul algorithm) ----------------
  assign busy    = (state != T_IDLE);
  assign phase_b = (state >= B_START) && (state != T_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; done <= 1'b0;
      b_i <= '0; g_i <= '0; bg <= '0; l_i <= '0; si <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          l_i <= '0; cnt <= '0;
          if (BT > 1) begin b_i <= CW'(1); state <= A_START; end
          else begin g_i <= CW'(GT - 1); state <= B_START; end
        end
        // ---- phase A: ct_b = Rot^1(ct_(b-1)) ----
        A_START: begin l_i <= '0; state <= A_LD; end
        A_LD:    state <= A_LDW;
        A_LDW:   if (ctb_ddone) begin cnt <= '0; state <= A_FEED; end
        A_FEED:  if (rot_in_ready) begin
          if (int'(cnt) == LW - 1) begin
            cnt <= '0;
            if (int'(l_i) == L - 1) begin l_i <= '0; state <= A_OUT; end
            else begin l_i <= l_i + 1'b1; state <= A_LD; end
          end else cnt <= cnt + 1'b1;
        end
        A_OUT: if (rot_out_valid) begin
          if (int'(cnt) == LW - 1) begin cnt <= '0; state <= A_SWP; end
          else cnt <= cnt + 1'b1;
        end
        A_SWP: state <= A_ST;
        A_ST:  state <= A_STW;
        A_STW: if (ctb_ddone) begin
          if (int'(l_i) == L - 1) begin
            l_i <= '0;
            if (int'(b_i) == BT - 1) begin g_i <= CW'(GT - 1); state <= B_START; end
            else begin b_i <= b_i + 1'b1; state <= A_START; end
          end else begin l_i <= l_i + 1'b1; state <= A_OUT; end
        end
        // ---- phase B: giant steps ----
        B_START: begin
          l_i <= '0; bg <= '0; si <= '0;
          state <= (int'(g_i) != GT - 1) ? B_RLD : B_MLD;
        end
        B_RLD:  state <= B_RLDW;
        B_RLDW: if (out_ddone) begin cnt <= '0; state <= B_RFEED; end
        B_RFEED: if (rot_in_ready) begin
          if (int'(cnt) == LW - 1) begin
            cnt <= '0;
            if (int'(l_i) == L - 1) begin l_i <= '0; state <= B_MLD; end
            else begin l_i <= l_i + 1'b1; state <= B_RLD; end
          end else cnt <= cnt + 1'b1;
        end
        B_MLD:  begin si <= '0; state <= B_CLD; end
        B_CLD:  state <= B_CLDW;
        B_CLDW: if (ctb_ddone) begin
          if (int'(si) == PI - 1) begin si <= '0; state <= B_MW; end
          else begin si <= si + 1'b1; state <= B_CLD; end
        end
        B_MW: if (mat_dbusy == '0) begin cnt <= '0; state <= B_MAC; end
        B_MAC: begin
          if (int'(cnt) == LW - 1) begin cnt <= '0; state <= B_MDRAIN; end
          else cnt <= cnt + 1'b1;
        end
        B_MDRAIN: if (mvpipe == '0 && !acc_valid) begin
          if (int'(bg) == BT / PI - 1) begin
            bg <= '0;
            state <= (int'(g_i) == GT - 1) ? B_BYP : B_SSWP;
          end else begin bg <= bg + 1'b1; state <= B_MLD; end
        end
        B_BYP: begin
          if (int'(cnt) == LW - 1) begin cnt <= '0; state <= B_BSWP; end
          else cnt <= cnt + 1'b1;
        end
        B_BSWP: state <= B_BST;
        B_BST:  state <= B_BSTW;
        B_BSTW: if (out_ddone) begin
          if (int'(l_i) == L - 1) begin l_i <= '0; state <= B_NEXTG; end
          else begin l_i <= l_i + 1'b1; state <= B_MLD; end
        end
        B_SSWP: state <= B_SST;
        B_SST:  state <= B_SSTW;
        B_SSTW: if (sum_ddone) begin
          if (int'(l_i) == L - 1) begin l_i <= '0; state <= B_XLD; end
          else begin l_i <= l_i + 1'b1; state <= B_MLD; end
        end
        B_XLD:  state <= B_XLDW;
        B_XLDW: if (sum_ddone) begin cnt <= '0; state <= B_COMB; end
        B_COMB: if (rot_out_valid) begin
          if (int'(cnt) == LW - 1) begin state <= B_CDRAIN; end
          else cnt <= cnt + 1'b1;
        end
        B_CDRAIN: if (!cb_valid) begin cnt <= '0; state <= B_CSWP; end
        B_CSWP: state <= B_CST;
        B_CST:  state <= B_CSTW;
        B_CSTW: if (out_ddone) begin
          if (int'(l_i) == L - 1) begin l_i <= '0; state <= B_NEXTG; end
          else begin l_i <= l_i + 1'b1; state <= B_XLD; end
        end
        B_NEXTG: begin
          if (g_i == '0) state <= T_DONE;
          else begin g_i <= g_i - 1'b1; state <= B_START; end
        end
        T_DONE: begin done <= 1'b1; state <= T_IDLE; end
        default: state <= T_IDLE;
      endcase
    end
  end

  initial assert (BT % PI == 0) else $error("BT must be a multiple of PI");
endmodule
