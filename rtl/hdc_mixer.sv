// hdc_mixer -- mixing stage of the HD encoder (item-memory materialization).
//
// Routes the vector through one of four hardwired random permutations,
// pi_0, pi_1, pi_0^-1 or pi_1^-1 (a 4-input multiplexer per bit), or around
// them when the stage is disabled (a 2-input multiplexer per bit), as the
// paper describes. sel_i chooses pi_0 / pi_1, inv_i the inverse set. The
// permutations are the hash wirings of hdc_permute with seeds PI0_SEED and
// PI1_SEED; the paper only asks that they be random and not commute.
// Purely combinational.
module hdc_mixer
  import hdc_pkg::*;
#(
  parameter int unsigned W = D_DEF / K_DEF
) (
  input  logic         en_i,
  input  logic         inv_i,
  input  logic         sel_i,
  input  logic [W-1:0] vec_i,
  output logic [W-1:0] vec_o
);
  logic [W-1:0] p0, p1, p0i, p1i;

  hdc_permute #(.W(W), .SEED(PI0_SEED), .INVERSE(1'b0)) i_p0  (.x_i(vec_i), .y_o(p0));
  hdc_permute #(.W(W), .SEED(PI1_SEED), .INVERSE(1'b0)) i_p1  (.x_i(vec_i), .y_o(p1));
  hdc_permute #(.W(W), .SEED(PI0_SEED), .INVERSE(1'b1)) i_p0i (.x_i(vec_i), .y_o(p0i));
  hdc_permute #(.W(W), .SEED(PI1_SEED), .INVERSE(1'b1)) i_p1i (.x_i(vec_i), .y_o(p1i));

  always_comb begin
    if (!en_i) vec_o = vec_i;
    else begin
      unique case ({inv_i, sel_i})
        2'b00:   vec_o = p0;
        2'b01:   vec_o = p1;
        2'b10:   vec_o = p0i;
        default: vec_o = p1i;
      endcase
    end
  end
endmodule
