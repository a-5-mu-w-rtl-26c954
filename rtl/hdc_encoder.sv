// hdc_encoder -- the HD encoder: input stage, similarity manipulator, mixer,
// W = D/K encoder units and the serializer.
//
// The stages form one combinational pipeline without registers between
// them, as in the paper: input mux -> similarity manipulator -> mixer ->
// encoder units, whose flip-flops form the encoder register. The order of
// the manipulator before the mixer follows the two block diagrams (the
// manipulator's input comes "from Input Mux" and its output goes "to
// Mixer"); one sentence of the text instead says the manipulator transforms
// the mixer's output.
// Every cycle with ctrl_i.en set, the register (and, if enabled, the bundle
// counters) take the result; wb_data_o is that result before the clock edge
// and is what the associative memory stores when write-back is enabled.
// The similarity manipulator word comes from the external input (SMSEL = 1)
// or the internal immediate register sm_reg_i (SMSEL = 0). During MIX the
// mixer select comes from the serializer, which is loaded from the
// instruction immediate, the part index or the external input.
module hdc_encoder
  import hdc_pkg::*;
#(
  parameter int unsigned W = D_DEF / K_DEF
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  enc_ctrl_t          ctrl_i,
  input  logic [W-1:0]       am_rd_i,
  input  logic [SER_W-1:0]   ext_data_i,
  input  logic [SER_W-1:0]   pidx_i,
  input  logic [SM_IN_W-1:0] sm_reg_i,
  output logic [W-1:0]       enc_q_o,
  output logic [W-1:0]       wb_data_o
);
  logic [W-1:0]       in_vec, sm_vec, mx_vec;
  logic [SM_IN_W-1:0] sm_word;
  logic [SER_W-1:0]   ser_val;
  logic               ser_bit, mx_sel;

  hdc_input_stage #(.W(W)) i_input (
    .sel_i (ctrl_i.encsel),
    .am_i  (am_rd_i),
    .enc_i (enc_q_o),
    .vec_o (in_vec)
  );

  assign sm_word = ctrl_i.smsel ? ext_data_i[SM_IN_W-1:0] : sm_reg_i;

  hdc_sim_manip #(.W(W)) i_sm (
    .en_i   (ctrl_i.smen),
    .w_i    (sm_word),
    .vec_i  (in_vec),
    .vec_o  (sm_vec),
    .mask_o ()
  );

  always_comb begin
    unique case (ctrl_i.ser_src)
      MIX_PIDX: ser_val = pidx_i;
      MIX_EXT:  ser_val = ext_data_i;
      default:  ser_val = ctrl_i.ser_imm;
    endcase
  end

  hdc_serializer #(.W(SER_W)) i_ser (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .load_i     (ctrl_i.ser_load),
    .load_val_i (ser_val),
    .shift_i    (ctrl_i.ser_shift),
    .bit_o      (ser_bit),
    .value_o    ()
  );

  assign mx_sel = ctrl_i.mx_from_ser ? ser_bit : ctrl_i.mxsel;

  hdc_mixer #(.W(W)) i_mix (
    .en_i  (ctrl_i.mxen),
    .inv_i (ctrl_i.mxinv),
    .sel_i (mx_sel),
    .vec_i (sm_vec),
    .vec_o (mx_vec)
  );

  for (genvar i = 0; i < W; i++) begin : g_eu
    hdc_encoder_unit i_eu (
      .clk_i    (clk_i),
      .rst_ni   (rst_ni),
      .en_i     (ctrl_i.en),
      .op_i     (ctrl_i.op),
      .x_i      (mx_vec[i]),
      .bnden_i  (ctrl_i.bnden),
      .bndrst_i (ctrl_i.bndrst),
      .q_o      (enc_q_o[i]),
      .d_o      (wb_data_o[i]),
      .cnt_o    ()
    );
  end
endmodule
