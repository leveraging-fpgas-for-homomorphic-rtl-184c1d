// ccadd: CCadd core, element-wise modular addition of two ciphertext streams.
//
// Each cycle it takes PC coefficients of each operand (all of the same RNS limb,
// modulus q) and returns (a + b) mod q one cycle later, with initiation
// interval 1. out_valid is in_valid delayed by the same cycle. Processing PC
// coefficients per cycle at II = 1 is the accelerator's coefficient-level
// parallelism; the single register stage is this design's choice.
module ccadd
  import omr_pkg::*;
#(
  parameter int PC = PC_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [PC-1:0][W-1:0] a,
  input  logic [PC-1:0][W-1:0] b,
  input  logic [W-1:0]      q,
  output logic              out_valid,
  output logic [PC-1:0][W-1:0] sum
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < PC; i++) sum[i] <= add_mod(a[i], b[i], q);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
