// omr_pkg: types, constants and small modular-arithmetic helpers shared by the
// homomorphic MatMul accelerator.
//
// Every residue is a W = 60-bit word: each RNS limb modulus q_i (and the special
// key-switching modulus p) has exactly 60 bits, as in the SophOMR parameter set.
// Plaintext coefficients are PT_W = 20 bits wide, enough for t = 786,433.
// The *_DEF constants are the defaults of the main (best) configuration:
// ring dimension N = 2^16, 19 ciphertext limbs, PC = 16 coefficient lanes,
// PI = 2 PCmul instances, PB = 64 NTT butterfly units, and a baby-step /
// giant-step split of b~ = 46, g~ = 23.
//
// mod_cfg_t carries the per-modulus constants the host precomputes and loads:
// the modulus, its Barrett constant floor(2^120/q), n^-1 mod q (inverse NTT
// scaling), p^-1 mod q and floor(p/2) mod q (key-switching mod-down).
package omr_pkg;

  localparam int W      = 60;   // residue width
  localparam int PT_W   = 20;   // plaintext coefficient width
  localparam int MU_W   = 62;   // Barrett constant width
  localparam int MUL_LAT = 3;   // modmul pipeline depth
  localparam int ADDR_W = 40;   // off-chip word address width
  localparam int ID_W   = 4;    // interconnect client tag width

  localparam int N_DEF  = 65536;
  localparam int L_DEF  = 19;
  localparam int PC_DEF = 16;
  localparam int PI_DEF = 2;
  localparam int PB_DEF = 64;
  localparam int GT_DEF = 23;
  localparam int BT_DEF = 46;

  typedef logic [W-1:0] res_t;

  typedef struct packed {
    logic [W-1:0]    q;      // modulus, 2^59 < q < 2^60
    logic [MU_W-1:0] mu;     // floor(2^120 / q)
    logic [W-1:0]    ninv;   // N^-1 mod q
    logic [W-1:0]    pinv;   // p^-1 mod q (unused for the special modulus)
    logic [W-1:0]    phalf;  // floor(p/2) mod q
  } mod_cfg_t;

  // (a + b) mod q for a, b < q
  function automatic res_t add_mod(res_t a, res_t b, res_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

  // (a - b) mod q for a, b < q
  function automatic res_t sub_mod(res_t a, res_t b, res_t q);
    logic [W:0] d;
    d = {1'b0, a} - {1'b0, b};
    if (a < b) d = d + {1'b0, q};
    return d[W-1:0];
  endfunction

  // x mod q for x < 2q (any 60-bit value against a 60-bit modulus)
  function automatic res_t red_once(res_t x, res_t q);
    return (x >= q) ? x - q : x;
  endfunction

endpackage
