// ccadd_tree: adds the PI products of the PCmul cores with PI-1 CCadd cores.
//
// The PI inputs (PI a power of two) enter a balanced binary tree of ccadd cores;
// level k holds PI >> (k+1) cores, PI-1 in all. Latency is log2(PI) cycles and a
// new set of inputs is accepted every cycle. With PI = 1 the input passes
// through with latency 0. Using PI-1 CCadd cores for this sum follows the
// accelerator; the balanced tree shape is this design's choice.
module ccadd_tree
  import omr_pkg::*;
#(
  parameter int PC = PC_DEF,
  parameter int PI = PI_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [PI-1:0][PC-1:0][W-1:0] in,
  input  logic [W-1:0]               q,
  output logic                       out_valid,
  output logic [PC-1:0][W-1:0]       sum
);
  localparam int LV = $clog2(PI);

  // level k holds PI >> k operands; level 0 is the input
  logic [PI-1:0][PC-1:0][W-1:0] lvl [LV+1];
  logic                               lvl_v [LV+1];
  logic [W-1:0]                       lvl_q [LV+1];

  assign lvl[0]   = in;
  assign lvl_v[0] = in_valid;
  assign lvl_q[0] = q;

  for (genvar k = 0; k < LV; k++) begin : g_lvl
    localparam int NA = PI >> (k + 1);
    logic [NA-1:0] v;
    for (genvar j = 0; j < NA; j++) begin : g_add
      ccadd #(.PC(PC)) u_add (
        .clk(clk), .rst_n(rst_n), .in_valid(lvl_v[k]),
        .a(lvl[k][2*j]), .b(lvl[k][2*j+1]), .q(lvl_q[k]),
        .out_valid(v[j]), .sum(lvl[k+1][j])
      );
    end
    for (genvar j = NA; j < PI; j++) begin : g_pad
      assign lvl[k+1][j] = '0;
    end
    assign lvl_v[k+1] = v[0];
    always_ff @(posedge clk) lvl_q[k+1] <= lvl_q[k];
  end

  assign sum       = lvl[LV][0];
  assign out_valid = lvl_v[LV];

  initial assert (PI >= 1 && (PI & (PI - 1)) == 0) else $error("PI must be a power of two");
endmodule
