// pcmul: PCmul core, element-wise product of a ciphertext limb with a plaintext.
//
// Each cycle it multiplies PC ciphertext coefficients (residues mod q) by PC
// plaintext coefficients (PT_W-bit values below t < q, used directly as
// residues) and returns the products mod q after MUL_LAT cycles, at initiation
// interval 1. It holds one Barrett modmul per lane. The element-wise definition
// and the PC lanes at II = 1 follow the accelerator; the lane multiplier is
// this design's own.
module pcmul
  import omr_pkg::*;
#(
  parameter int PC = PC_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [PC-1:0][W-1:0]    ct,
  input  logic [PC-1:0][PT_W-1:0] pt,
  input  logic [W-1:0]            q,
  input  logic [MU_W-1:0]         mu,
  output logic                    out_valid,
  output logic [PC-1:0][W-1:0]    prod
);
  for (genvar i = 0; i < PC; i++) begin : g_lane
    modmul u_mul (
      .clk(clk), .a(ct[i]), .b({{(W-PT_W){1'b0}}, pt[i]}), .q(q), .mu(mu), .r(prod[i])
    );
  end

  logic [MUL_LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[MUL_LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[MUL_LAT-1];
endmodule
