// rot: Rot core, homomorphic rotation of a BFV ciphertext (ApplyGalois followed
// by KeySwitch) in the RNS representation.
//
// Interface. A start pulse latches the Galois element `gal` of the rotation and
// the off-chip base addresses of its rotation key and of the twiddle tables.
// The ciphertext then arrives on in_* (valid/ready) as L limbs, each polynomial
// 0 then polynomial 1, each N/PC words of PC coefficients in coefficient form.
// The rotated ciphertext leaves on out_* in the same order, limb by limb, after
// all input has been taken. done pulses after the last output word.
// mods[0..L-1] describe the ciphertext moduli q_i, mods[L] the special modulus p.
//
// How it works. While the input streams in, PC galois_unit lanes scatter every
// coefficient to its image under X -> X^gal (ApplyGalois) into an on-chip store
// of the whole ciphertext (c0, c1). Key switching then follows the RNS algorithm
// with one special modulus: for every target modulus (p first, then q_0 ..
// q_{L-1}) and every limb j of c1, c1_j is reduced to the target modulus,
// transformed by the NTT unit and multiplied with the two key polynomials
// K[target][j] (NTT form, streamed through key_buffer); the products are summed
// per target in two accumulators. The limbs are pipelined: while limb j+1 is
// written into the NTT unit, the NTT output of limb j is copied into a one-limb
// buffer (nb), and the key multiply-accumulate of limb j then runs from nb
// while the NTT transforms limb j+1. Per limb this costs N/PC cycles of
// loading plus the longer of the NTT and the 2N/PC-cycle MAC. Each accumulator is brought back with the
// inverse NTT. For p the result plus floor(p/2) is kept; for q_i the mod-down
//   out = (acc_i - ((acc_p + floor(p/2)) mod q_i - floor(p/2) mod q_i)) * p^-1 mod q_i
// gives the key-switched limb, and c0_i is added to polynomial 0 before it is
// streamed out. The NTT unit's twiddle memory is reloaded from off-chip memory
// whenever the (modulus, direction) it needs changes.
//
// Off-chip layout (word addresses, NW = N/PC, tt = 0 for p, tt = i+1 for q_i):
//   key word  (tt, j, w, poly) at key_base + ((tt*L + j)*NW + w)*2 + poly
//   twiddles  (tt, dir)        at tf_base + (tt*2 + dir)*NW, dir 1 = inverse table
//
// Following the accelerator: one Rot core built from ApplyGalois and KeySwitch,
// NTT with PB butterflies, a partial key buffer refilled from off-chip memory,
// twiddle factors fetched from off-chip memory, PC coefficients per cycle
// elsewhere, and limb-based pipelining of the NTT with the key MAC. This
// design's own: the key-switching variant (one special modulus, as in SEAL,
// where the accelerator's parameters imply several), the copy buffer that
// realises the limb pipelining, and holding the whole input ciphertext.
module rot
  import omr_pkg::*;
#(
  parameter int N      = N_DEF,
  parameter int L      = L_DEF,
  parameter int PC     = PC_DEF,
  parameter int PB     = PB_DEF,
  parameter int KDEPTH = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mod_cfg_t             mods [L+1],
  input  logic                 start,
  input  logic [$clog2(N):0]   gal,
  input  logic [ADDR_W-1:0]    key_base,
  input  logic [ADDR_W-1:0]    tf_base,
  output logic                 busy,
  output logic                 ks_active,
  output logic                 done,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [PC-1:0][W-1:0] in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [PC-1:0][W-1:0] out_data,
  // off-chip read client: rotation key
  output logic                 key_req_valid,
  input  logic                 key_req_ready,
  output logic [ADDR_W-1:0]    key_req_addr,
  input  logic                 key_rsp_valid,
  input  logic [PC-1:0][W-1:0] key_rsp_data,
  // off-chip read client: twiddle factors
  output logic                 tf_req_valid,
  input  logic                 tf_req_ready,
  output logic [ADDR_W-1:0]    tf_req_addr,
  input  logic                 tf_rsp_valid,
  input  logic [PC-1:0][W-1:0] tf_rsp_data
);
  localparam int LOGN = $clog2(N);
  localparam int NW   = N / PC;
  localparam int AW   = $clog2(NW);
  localparam int LW_  = $clog2(L + 1);

  typedef enum logic [3:0] {
    R_IDLE, R_INGEST, R_TFCHK, R_TFLOAD, R_LOADC, R_NTTGO, R_NTTW, R_MWAIT, R_CPLAST,
    R_MACEND, R_LOADA, R_SAVEP, R_MODDOWN, R_MDDRAIN, R_EMIT
  } rstate_t;
  rstate_t state;

  // ciphertext store: coefficient (poly, limb, idx) at (poly*L + limb)*N + idx
  logic [W-1:0]         cst [2*L*N];
  logic [PC-1:0][W-1:0] accm [2*NW];   // key-switch accumulators, poly*NW + w
  logic [PC-1:0][W-1:0] apm  [2*NW];   // special-modulus result + floor(p/2)
  logic [PC-1:0][W-1:0] nb   [NW];     // NTT output of the limb being multiplied

  logic [$clog2(N):0]   gal_r;
  logic [ADDR_W-1:0]    key_base_r, tf_base_r;

  // loop counters
  logic [LW_-1:0]       il, tt, jj;
  logic                 ip, pp, ph_inv;
  logic [AW:0]          cnt;           // word counter (up to 2*NW)
  logic [LW_:0]         tf_have;       // {tt, dir} of loaded table
  logic                 tf_have_v;

  // modulus of the current target
  logic [LW_-1:0] mi;
  mod_cfg_t       cm;
  assign mi = (tt == '0) ? LW_'(L) : tt - 1'b1;
  assign cm = mods[mi];

  assign busy      = (state != R_IDLE);
  assign ks_active = busy && (state != R_INGEST);
  assign in_ready  = (state == R_INGEST);

  // ---------------- ApplyGalois on ingest ----------------
  logic [LOGN-1:0] g_idx [PC];
  logic [W-1:0]    g_val [PC];
  for (genvar k = 0; k < PC; k++) begin : g_gal
    galois_unit #(.N(N)) u_gal (
      .idx(LOGN'(int'(cnt[AW-1:0]) * PC + k)), .gal(gal_r), .x(in_data[k]),
      .q(mods[il].q), .out_idx(g_idx[k]), .out_x(g_val[k])
    );
  end

  // ---------------- NTT unit ----------------
  logic                 ntt_start, ntt_busy, ntt_done, ntt_we;
  logic [AW-1:0]        ntt_waddr, ntt_raddr;
  logic [PC-1:0][W-1:0] ntt_wdata, ntt_rdata;
  logic                 tf_we;
  logic [AW:0]          tf_waddr_full;
  logic [PC-1:0][W-1:0] tf_wdata;

  ntt_core #(.N(N), .PC(PC), .PB(PB)) u_ntt (
    .clk, .rst_n, .q(cm.q), .mu(cm.mu), .ninv(cm.ninv),
    .start(ntt_start), .inverse(ph_inv), .busy(ntt_busy), .done(ntt_done),
    .wr_en(ntt_we), .wr_addr(ntt_waddr), .wr_data(ntt_wdata),
    .rd_addr(ntt_raddr), .rd_data(ntt_rdata),
    .tf_we(tf_we), .tf_waddr(tf_waddr_full[AW-1:0]), .tf_wdata(tf_wdata)
  );
  assign ntt_start = (state == R_NTTGO);

  // ---------------- twiddle loader ----------------
  logic tf_dma_start, tf_dma_busy, tf_dma_done;
  logic unused_tf_wv;
  logic [ADDR_W-1:0] unused_tf_wa;
  logic [PC-1:0][W-1:0] unused_tf_wd;
  logic [AW:0] unused_tf_ra;
  dma_engine #(.PC(PC), .CNT_W(AW+1)) u_tf_dma (
    .clk, .rst_n, .start(tf_dma_start), .store(1'b0),
    .base(tf_base_r + ADDR_W'(unsigned'((int'(tt) * 2 + int'(ph_inv)) * NW))),
    .count((AW+1)'(NW)), .busy(tf_dma_busy), .done(tf_dma_done),
    .rd_req_valid(tf_req_valid), .rd_req_ready(tf_req_ready), .rd_req_addr(tf_req_addr),
    .rd_rsp_valid(tf_rsp_valid), .rd_rsp_data(tf_rsp_data),
    .wr_valid(unused_tf_wv), .wr_ready(1'b0), .wr_addr(unused_tf_wa), .wr_data(unused_tf_wd),
    .mem_we(tf_we), .mem_waddr(tf_waddr_full), .mem_wdata(tf_wdata),
    .mem_raddr(unused_tf_ra), .mem_rdata('0)
  );
  assign tf_dma_start = (state == R_TFCHK) && !(tf_have_v && tf_have == {tt, ph_inv});

  // ---------------- key buffer ----------------
  logic                 key_start, key_valid, key_pop;
  logic [PC-1:0][W-1:0] key_data;
  key_buffer #(.PC(PC), .DEPTH(KDEPTH)) u_key (
    .clk, .rst_n, .start(key_start), .base(key_base_r),
    .count(32'((L + 1) * L * 2 * NW)),
    .rd_req_valid(key_req_valid), .rd_req_ready(key_req_ready), .rd_req_addr(key_req_addr),
    .rd_rsp_valid(key_rsp_valid), .rd_rsp_data(key_rsp_data),
    .out_valid(key_valid), .out_ready(key_pop), .out_data(key_data)
  );

  // ---------------- shared lane multipliers (MAC and mod-down) ----------------
  logic [W-1:0] ma [PC], mb [PC], mr [PC];
  for (genvar k = 0; k < PC; k++) begin : g_mul
    modmul u_mul (.clk(clk), .a(ma[k]), .b(mb[k]), .q(cm.q), .mu(cm.mu), .r(mr[k]));
  end

  // Key MAC process: runs from nb, beside the NTT of the next limb. mcnt counts
  // 2*NW key words (word w, polynomial o at 2w + o); mfirst marks limb 0.
  logic              mac_run, mfirst, mac_go, copy_we;
  logic [AW:0]       mcnt;
  logic              mac_issue, md_issue;
  logic [AW-1:0]     cw;                 // current word index
  logic [PC-1:0][W-1:0] nb_rd;
  assign cw        = cnt[AW-1:0];
  assign nb_rd     = nb[mcnt[AW:1]];
  assign mac_issue = mac_run && key_valid;
  assign md_issue  = (state == R_MODDOWN);
  assign key_pop   = mac_issue;
  assign ntt_raddr = cw;

  always_comb begin
    for (int k = 0; k < PC; k++) begin
      logic [W-1:0] y;
      y = sub_mod(red_once(apm[int'(pp) * NW + int'(cw)][k], cm.q), cm.phalf, cm.q);
      if (mac_run) begin
        ma[k] = nb_rd[k];
        mb[k] = key_data[k];
      end else begin
        ma[k] = sub_mod(ntt_rdata[k], y, cm.q);
        mb[k] = cm.pinv;
      end
    end
  end

  // pipeline of (valid, kind, target word)
  logic [MUL_LAT-1:0] pv;
  logic               pkind [MUL_LAT];   // 0 = MAC, 1 = mod-down
  logic [AW:0]        paddr [MUL_LAT];   // MAC: poly*NW + w ; mod-down: w
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv <= '0;
    else        pv <= {pv[MUL_LAT-2:0], mac_issue | md_issue};
  end
  always_ff @(posedge clk) begin
    pkind[0] <= md_issue;
    paddr[0] <= md_issue ? {1'b0, cw} : {mcnt[0], mcnt[AW:1]};
    for (int d = 1; d < MUL_LAT; d++) begin
      pkind[d] <= pkind[d-1];
      paddr[d] <= paddr[d-1];
    end
  end
  logic          p_out, p_md;
  logic [AW:0]   p_a;
  assign p_out = pv[MUL_LAT-1];
  assign p_md  = pkind[MUL_LAT-1];
  assign p_a   = paddr[MUL_LAT-1];

  // ---------------- NTT host-port writes ----------------
  always_comb begin
    ntt_we = 1'b0; ntt_waddr = cnt[AW-1:0]; ntt_wdata = '0;
    unique case (state)
      R_LOADC: begin
        ntt_we = 1'b1;
        for (int k = 0; k < PC; k++)
          ntt_wdata[k] = red_once(cst[(L + int'(jj)) * N + int'(cnt[AW-1:0]) * PC + k], cm.q);
      end
      R_LOADA: begin
        ntt_we = 1'b1;
        ntt_wdata = accm[int'(pp) * NW + int'(cnt[AW-1:0])];
      end
      R_MODDOWN, R_MDDRAIN: begin
        ntt_we    = p_out && p_md;
        ntt_waddr = p_a[AW-1:0];
        for (int k = 0; k < PC; k++)
          ntt_wdata[k] = pp ? mr[k]
                            : add_mod(mr[k], cst[int'(mi) * N + int'(p_a[AW-1:0]) * PC + k], cm.q);
      end
      default: ;
    endcase
  end

  assign out_valid = (state == R_EMIT);
  assign out_data  = ntt_rdata;

  // copy of the previous limb's NTT output while the next limb is loaded; the
  // MAC of that limb starts when the copy is complete
  assign copy_we = (state == R_CPLAST) || (state == R_LOADC && jj != '0);
  assign mac_go  = copy_we && (int'(cnt[AW-1:0]) == NW - 1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_run <= 1'b0; mcnt <= '0; mfirst <= 1'b0;
    end else if (mac_go) begin
      mac_run <= 1'b1; mcnt <= '0;
      mfirst  <= (state == R_CPLAST) ? (L == 1) : (jj == LW_'(1));
    end else if (mac_issue) begin
      if (int'(mcnt) == 2 * NW - 1) mac_run <= 1'b0;
      mcnt <= mcnt + 1'b1;
    end
  end

  // ---------------- storage writes ----------------
  always_ff @(posedge clk) begin
    if (copy_we) nb[cw] <= ntt_rdata;
    if (state == R_INGEST && in_valid)
      for (int k = 0; k < PC; k++)
        cst[(int'(ip) * L + int'(il)) * N + int'(g_idx[k])] <= g_val[k];
    if (p_out && !p_md)
      for (int k = 0; k < PC; k++)
        accm[p_a][k] <= mfirst ? mr[k] : add_mod(accm[p_a][k], mr[k], cm.q);
    if (state == R_SAVEP)
      for (int k = 0; k < PC; k++)
        apm[int'(pp) * NW + int'(cnt[AW-1:0])][k] <= add_mod(ntt_rdata[k], cm.phalf, cm.q);
  end

  // ---------------- control ----------------
  assign key_start = (state == R_INGEST) && in_valid && (il == LW_'(L - 1)) && ip &&
                     (int'(cnt[AW-1:0]) == NW - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE; done <= 1'b0;
      il <= '0; ip <= 1'b0; tt <= '0; jj <= '0; pp <= 1'b0; ph_inv <= 1'b0;
      cnt <= '0; tf_have <= '0; tf_have_v <= 1'b0;
      gal_r <= '0; key_base_r <= '0; tf_base_r <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        R_IDLE: if (start) begin
          gal_r <= gal; key_base_r <= key_base; tf_base_r <= tf_base;
          il <= '0; ip <= 1'b0; cnt <= '0; state <= R_INGEST;
        end
        R_INGEST: if (in_valid) begin
          if (int'(cnt[AW-1:0]) == NW - 1) begin
            cnt <= '0;
            ip  <= ~ip;
            if (ip) begin
              if (il == LW_'(L - 1)) begin
                il <= '0; tt <= '0; jj <= '0; pp <= 1'b0; ph_inv <= 1'b0; state <= R_TFCHK;
              end else il <= il + 1'b1;
            end
          end else cnt <= cnt + 1'b1;
        end
        R_TFCHK: begin
          cnt <= '0;
          if (tf_have_v && tf_have == {tt, ph_inv}) state <= ph_inv ? R_LOADA : R_LOADC;
          else begin tf_have_v <= 1'b0; state <= R_TFLOAD; end
        end
        R_TFLOAD: if (tf_dma_done) begin
          tf_have <= {tt, ph_inv}; tf_have_v <= 1'b1;
          state <= ph_inv ? R_LOADA : R_LOADC;
        end
        R_LOADC: begin
          if (int'(cnt[AW-1:0]) == NW - 1) begin cnt <= '0; state <= R_NTTGO; end
          else cnt <= cnt + 1'b1;
        end
        R_LOADA: begin
          if (int'(cnt[AW-1:0]) == NW - 1) begin cnt <= '0; state <= R_NTTGO; end
          else cnt <= cnt + 1'b1;
        end
        R_NTTGO: state <= R_NTTW;
        R_NTTW: if (ntt_done) begin
          cnt <= '0;
          if (!ph_inv) state <= R_MWAIT;
          else if (tt == '0) state <= R_SAVEP;
          else state <= R_MODDOWN;
        end
        // wait for the MAC of the previous limb, then load the next limb
        // (copying this one's NTT output) or copy the last one alone
        R_MWAIT: if (!mac_run && pv == '0) begin
          cnt <= '0;
          if (jj == LW_'(L - 1)) state <= R_CPLAST;
          else begin jj <= jj + 1'b1; state <= R_LOADC; end
        end
        R_CPLAST: begin
          if (int'(cnt[AW-1:0]) == NW - 1) begin cnt <= '0; state <= R_MACEND; end
          else cnt <= cnt + 1'b1;
        end
        R_MACEND: if (!mac_run && !mac_go && pv == '0) begin
          jj <= '0; pp <= 1'b0; ph_inv <= 1'b1; state <= R_TFCHK;
        end
        R_SAVEP: begin
          if (int'(cnt[AW-1:0]) == NW - 1) begin
            cnt <= '0;
            if (!pp) begin pp <= 1'b1; state <= R_TFCHK; end
            else begin pp <= 1'b0; ph_inv <= 1'b0; tt <= tt + 1'b1; state <= R_TFCHK; end
          end else cnt <= cnt + 1'b1;
        end
        R_MODDOWN: begin
          if (int'(cnt[AW-1:0]) == NW - 1) begin cnt <= '0; state <= R_MDDRAIN; end
          else cnt <= cnt + 1'b1;
        end
        R_MDDRAIN: if (pv == '0) begin cnt <= '0; state <= R_EMIT; end
        R_EMIT: if (out_ready) begin
          if (int'(cnt[AW-1:0]) == NW - 1) begin
            cnt <= '0;
            if (!pp) begin pp <= 1'b1; state <= R_TFCHK; end
            else if (tt == LW_'(L)) begin
              pp <= 1'b0; ph_inv <= 1'b0; tt <= '0; state <= R_IDLE; done <= 1'b1;
            end else begin
              pp <= 1'b0; ph_inv <= 1'b0; tt <= tt + 1'b1; state <= R_TFCHK;
            end
          end else cnt <= cnt + 1'b1;
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  no_input_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                        start |-> state == R_IDLE);
endmodule
