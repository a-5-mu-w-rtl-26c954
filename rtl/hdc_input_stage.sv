// hdc_input_stage -- first stage of the HD encoder.
//
// Selects the vector that enters the encoder's combinational pipeline among
// the four sources named in the paper: the all-zero vector, a hardwired
// random seed vector S, the subpart read from the associative memory and the
// encoder register (feedback). Select encoding (ENCSEL 0..3 = zero, seed,
// AM, register) is this design's choice. The seed bits come from the
// constant function hdc_pkg::seed_bit, so S is fixed wiring to 0/1. With a
// vector fold K > 1 every subpart uses the same W = D/K bit seed (the
// per-part item vectors are made distinct with part-index mixing).
// Purely combinational.
module hdc_input_stage
  import hdc_pkg::*;
#(
  parameter int unsigned W = D_DEF / K_DEF
) (
  input  encsel_e      sel_i,
  input  logic [W-1:0] am_i,
  input  logic [W-1:0] enc_i,
  output logic [W-1:0] vec_o
);
  logic [W-1:0] seed;

  for (genvar i = 0; i < W; i++) begin : g_seed
    assign seed[i] = seed_bit(i);
  end

  always_comb begin
    unique case (sel_i)
      ENC_ZERO: vec_o = '0;
      ENC_SEED: vec_o = seed;
      ENC_AM:   vec_o = am_i;
      default:  vec_o = enc_i;
    endcase
  end
endmodule
