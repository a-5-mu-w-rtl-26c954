// hdc_sim_manip -- similarity manipulator: flips w/128 of the vector's bits.
//
// Follows the published structure step by step: the 7-bit word w is turned
// into a 128-bit thermometer (unary) code with its w lowest bits set, every
// code bit is repeated W/128 times to reach the subpart width W = D/K, the
// result passes through a hardwired random permutation (seed SM_SEED) that
// scatters the ones over all positions, and that mask is XOR-ed onto the
// input vector. With en_i low the stage is bypassed. Repeating the code
// bits in adjacent blocks before the permutation is this design's reading of
// "repeating each bit". W must be a power of two and at least 128.
// Purely combinational.
module hdc_sim_manip
  import hdc_pkg::*;
#(
  parameter int unsigned W = D_DEF / K_DEF
) (
  input  logic               en_i,
  input  logic [SM_IN_W-1:0] w_i,
  input  logic [W-1:0]       vec_i,
  output logic [W-1:0]       vec_o,
  output logic [W-1:0]       mask_o
);
  localparam int unsigned REP = W / SM_UNARY_W;

  logic [SM_UNARY_W-1:0] unary;
  logic [W-1:0]          spread;

  always_comb begin
    for (int j = 0; j < SM_UNARY_W; j++) unary[j] = (j < int'(w_i));
  end

  for (genvar j = 0; j < SM_UNARY_W; j++) begin : g_rep
    assign spread[j*REP +: REP] = {REP{unary[j]}};
  end

  hdc_permute #(.W(W), .SEED(SM_SEED), .INVERSE(1'b0)) i_perm (
    .x_i(spread),
    .y_o(mask_o)
  );

  assign vec_o = en_i ? (vec_i ^ mask_o) : vec_i;

  initial begin
    assert (W >= SM_UNARY_W && W % SM_UNARY_W == 0)
      else $error("hdc_sim_manip: W must be a multiple of 128");
  end
endmodule
