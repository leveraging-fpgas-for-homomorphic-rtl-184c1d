// galois_unit: ApplyGalois for one coefficient of a coefficient-form polynomial.
//
// The automorphism X -> X^g (g odd, g < 2N) sends the coefficient at index i to
// index (i*g mod 2N) mod N, negated modulo q when i*g mod 2N >= N, because
// X^N = -1 in Z_q[X]/(X^N + 1). Purely combinational; the Rot core instantiates
// PC of these so that a whole input word is permuted per cycle. The operation is
// the standard BFV automorphism named by the accelerator (ApplyGalois); the
// per-coefficient scatter form is this design's own.
module galois_unit
  import omr_pkg::*;
#(
  parameter int N = N_DEF
) (
  input  logic [$clog2(N)-1:0] idx,
  input  logic [$clog2(N):0]   gal,
  input  logic [W-1:0]         x,
  input  logic [W-1:0]         q,
  output logic [$clog2(N)-1:0] out_idx,
  output logic [W-1:0]         out_x
);
  localparam int LOGN = $clog2(N);
  logic [2*LOGN:0] prod;
  always_comb begin
    prod    = {{(LOGN+1){1'b0}}, idx} * {{LOGN{1'b0}}, gal};
    out_idx = prod[LOGN-1:0];
    out_x   = (prod[LOGN] && x != '0) ? q - x : x;
  end
endmodule
