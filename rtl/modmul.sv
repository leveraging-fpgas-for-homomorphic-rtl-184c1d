// modmul: pipelined modular multiplier, r = a * b mod q, using Barrett reduction.
//
// The modulus q must have exactly 60 bits (2^59 < q < 2^60) and both operands
// must already be reduced (< q). The host supplies mu = floor(2^120 / q).
// Stage 1 forms the 120-bit product, stage 2 the Barrett quotient estimate
// qh = ((x >> 59) * mu) >> 61, stage 3 the remainder x - qh*q (< 3q) followed by
// up to two conditional subtractions. Latency is MUL_LAT = 3 cycles; a new
// operand pair is accepted every cycle. q and mu travel with the data, so the
// modulus may change from one cycle to the next.
// Barrett reduction follows the accelerator's NTT library choice; the pipeline
// split is this design's own.
module modmul
  import omr_pkg::*;
(
  input  logic            clk,
  input  logic [W-1:0]    a,
  input  logic [W-1:0]    b,
  input  logic [W-1:0]    q,
  input  logic [MU_W-1:0] mu,
  output logic [W-1:0]    r
);
  logic [2*W-1:0]  x1, x2;
  logic [W-1:0]    q1, q2;
  logic [MU_W-1:0] mu1;
  logic [W:0]      qh2;

  logic [W+MU_W:0] prod_est;
  always_comb prod_est = {1'b0, x1[2*W-1:W-1]} * {{(W+1){1'b0}}, mu1};

  logic [W+1:0] rem;
  always_comb begin
    rem = x2[W+1:0] - ({1'b0, qh2} * {2'b00, q2});
    if (rem >= {2'b00, q2}) rem = rem - {2'b00, q2};
    if (rem >= {2'b00, q2}) rem = rem - {2'b00, q2};
  end

  always_ff @(posedge clk) begin
    x1  <= a * b;
    q1  <= q;
    mu1 <= mu;
    x2  <= x1;
    q2  <= q1;
    qh2 <= prod_est[W+1 +: W+1];
    r   <= rem[W-1:0];
  end
endmodule
