// ntt_core: iterative negacyclic NTT / inverse NTT over one limb, with PB
// butterfly units and a twiddle-factor memory loaded from off-chip.
//
// The limb (N residues mod q) sits in an internal memory written and read PC
// coefficients per cycle through the host port (wr_* / rd_*, combinational
// read) while the unit is idle. The twiddle memory holds one table of N
// entries, written through tf_we/tf_waddr/tf_wdata: for the forward transform
// tf[k] = psi^brv(k), for the inverse tf[k] = psi^-brv(k), where psi is a
// primitive 2N-th root of unity mod q and brv reverses log2(N) bits.
//
// start with inverse = 0 runs the in-place Cooley-Tukey transform (natural-order
// input, bit-reversed output: entry k = a(psi^(2*brv(k)+1))). Stage s uses
// t = N >> (s+1); butterfly b in it pairs j = 2*t*(b / t) + b % t with j + t and
// uses tf[2^s + b / t]: a[j] = U + V*S, a[j+t] = U - V*S. start with inverse = 1
// runs the Gentleman-Sande transform back (stage s: t = 2^s, tf index
// N/(2t) + b/t, a[j] = U + V, a[j+t] = (U - V)*S) and then scales every entry by
// ninv = N^-1 mod q. Each cycle PB butterflies are issued into a MUL_LAT-deep
// modmul pipeline; the pipeline drains between stages. One transform takes
// about log2(N) * (N/(2*PB) + MUL_LAT + 1) cycles, plus N/PB + MUL_LAT + 1 for
// the inverse scaling. done pulses when the result is in memory.
// The iterative architecture, Barrett multipliers and PB parallel butterfly
// units follow the accelerator's NTT; one unit serving both directions and the
// memory organisation are this design's own.
module ntt_core
  import omr_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int PC = PC_DEF,
  parameter int PB = PB_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [W-1:0]               q,
  input  logic [MU_W-1:0]            mu,
  input  logic [W-1:0]               ninv,
  input  logic                       start,
  input  logic                       inverse,
  output logic                       busy,
  output logic                       done,
  input  logic                       wr_en,
  input  logic [$clog2(N/PC)-1:0]    wr_addr,
  input  logic [PC-1:0][W-1:0]       wr_data,
  input  logic [$clog2(N/PC)-1:0]    rd_addr,
  output logic [PC-1:0][W-1:0]       rd_data,
  input  logic                       tf_we,
  input  logic [$clog2(N/PC)-1:0]    tf_waddr,
  input  logic [PC-1:0][W-1:0]       tf_wdata
);
  localparam int LOGN = $clog2(N);
  localparam int NG   = N / 2 / PB;     // butterfly groups per stage
  localparam int NGS  = N / PB;         // groups of the scaling pass
  localparam int GW   = $clog2(NGS) + 1;

  typedef enum logic [1:0] {IDLE, RUN, DRAIN, SCALE} state_t;
  state_t state;

  logic [W-1:0] a  [N];
  logic [W-1:0] tf [N];

  logic              inv_r;
  logic [$clog2(LOGN+1)-1:0] stage;
  logic [GW-1:0]     grp;
  logic              scaling;

  // ---------------- issue side ----------------
  logic              issue;
  logic [LOGN-1:0]   ij  [PB];    // first index (or element index when scaling)
  logic [LOGN-1:0]   ijt [PB];    // second index
  logic [W-1:0]      m_a [PB];
  logic [W-1:0]      m_b [PB];
  logic [W-1:0]      keep [PB];   // value that bypasses the multiplier
  logic [W-1:0]      m_r [PB];

  assign issue = (state == RUN) || (state == SCALE);

  always_comb begin
    for (int u = 0; u < PB; u++) begin
      logic [LOGN-1:0] bi, i, jj, tmask, j, ti;
      int lt;
      bi = LOGN'(int'(grp) * PB + u);
      lt = inv_r ? int'(stage) : (LOGN - 1 - int'(stage));
      tmask = LOGN'((1 << lt) - 1);
      i  = bi >> lt;
      jj = bi & tmask;
      j  = (i << (lt + 1)) | jj;
      ij[u]  = j;
      ijt[u] = j | LOGN'(1 << lt);
      ti = inv_r ? (LOGN'(N >> (int'(stage) + 1)) + i) : (LOGN'(1 << int'(stage)) + i);
      if (scaling) begin
        ij[u]  = LOGN'(int'(grp) * PB + u);
        ijt[u] = ij[u];
        m_a[u] = a[ij[u]];
        m_b[u] = ninv;
        keep[u] = '0;
      end else if (inv_r) begin
        m_a[u]  = sub_mod(a[j], a[ijt[u]], q);
        m_b[u]  = tf[ti];
        keep[u] = add_mod(a[j], a[ijt[u]], q);
      end else begin
        m_a[u]  = a[ijt[u]];
        m_b[u]  = tf[ti];
        keep[u] = a[j];
      end
    end
  end

  for (genvar u = 0; u < PB; u++) begin : g_bu
    modmul u_mul (.clk(clk), .a(m_a[u]), .b(m_b[u]), .q(q), .mu(mu), .r(m_r[u]));
  end

  // ---------------- pipeline bookkeeping ----------------
  logic [MUL_LAT-1:0] pv;
  logic               pmode_inv [MUL_LAT];
  logic               pmode_scl [MUL_LAT];
  logic [LOGN-1:0]    pj   [MUL_LAT][PB];
  logic [LOGN-1:0]    pjt  [MUL_LAT][PB];
  logic [W-1:0]       pkeep[MUL_LAT][PB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv <= '0;
    else        pv <= {pv[MUL_LAT-2:0], issue};
  end

  always_ff @(posedge clk) begin
    pmode_inv[0] <= inv_r;
    pmode_scl[0] <= scaling;
    for (int u = 0; u < PB; u++) begin
      pj[0][u] <= ij[u]; pjt[0][u] <= ijt[u]; pkeep[0][u] <= keep[u];
    end
    for (int d = 1; d < MUL_LAT; d++) begin
      pmode_inv[d] <= pmode_inv[d-1];
      pmode_scl[d] <= pmode_scl[d-1];
      pj[d] <= pj[d-1]; pjt[d] <= pjt[d-1]; pkeep[d] <= pkeep[d-1];
    end
  end

  // ---------------- memories ----------------
  always_ff @(posedge clk) begin
    if (pv[MUL_LAT-1]) begin
      for (int u = 0; u < PB; u++) begin
        if (pmode_scl[MUL_LAT-1]) begin
          a[pj[MUL_LAT-1][u]] <= m_r[u];
        end else if (pmode_inv[MUL_LAT-1]) begin
          a[pj[MUL_LAT-1][u]]  <= pkeep[MUL_LAT-1][u];
          a[pjt[MUL_LAT-1][u]] <= m_r[u];
        end else begin
          a[pj[MUL_LAT-1][u]]  <= add_mod(pkeep[MUL_LAT-1][u], m_r[u], q);
          a[pjt[MUL_LAT-1][u]] <= sub_mod(pkeep[MUL_LAT-1][u], m_r[u], q);
        end
      end
    end else if (wr_en && state == IDLE) begin
      for (int k = 0; k < PC; k++) a[int'(wr_addr) * PC + k] <= wr_data[k];
    end
    if (tf_we && state == IDLE)
      for (int k = 0; k < PC; k++) tf[int'(tf_waddr) * PC + k] <= tf_wdata[k];
  end

  always_comb
    for (int k = 0; k < PC; k++) rd_data[k] = a[int'(rd_addr) * PC + k];

  // ---------------- control ----------------
  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; inv_r <= 1'b0; stage <= '0; grp <= '0; scaling <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= RUN; inv_r <= inverse; stage <= '0; grp <= '0; scaling <= 1'b0;
        end
        RUN: begin
          if (int'(grp) == NG - 1) begin
            grp <= '0; state <= DRAIN;
          end else grp <= grp + 1'b1;
        end
        SCALE: begin
          if (int'(grp) == NGS - 1) begin
            grp <= '0; state <= DRAIN;
          end else grp <= grp + 1'b1;
        end
        DRAIN: if (pv == '0) begin
          if (scaling) begin
            scaling <= 1'b0; state <= IDLE; done <= 1'b1;
          end else if (int'(stage) == LOGN - 1) begin
            if (inv_r) begin scaling <= 1'b1; state <= SCALE; end
            else begin state <= IDLE; done <= 1'b1; end
          end else begin
            stage <= stage + 1'b1; state <= RUN;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  initial assert (NG >= 1 && (N & (N - 1)) == 0 && N % PC == 0) else $error("bad NTT geometry");
endmodule
