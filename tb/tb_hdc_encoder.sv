// tb_hdc_encoder -- self-checking test of the complete HD encoder.
// Random control words (input source, manipulator, mixer, serializer-driven
// mixing, encoder-unit operation, bundling) are applied for many cycles and
// the write-back data and the encoder register are compared every cycle
// with a reference model built from tb_hdc_ref_pkg. Directed sequences then
// check an item-memory mapping through the serializer and a bundle of three
// vectors thresholded to their majority.
module tb_hdc_encoder;
  import hdc_pkg::*;
  import tb_hdc_ref_pkg::*;
  localparam int W = 256;
  typedef ref_model #(W) rm;
  typedef logic [W-1:0] vec_t;

  logic clk = 0, rst_n = 0;
  enc_ctrl_t ctrl;
  vec_t am, q, wb;
  logic [15:0] ext = 0, pidx = 0;
  logic [6:0]  smreg = 0;
  int checks = 0, failures = 0;

  // reference state
  vec_t        mq;
  int          mc [W];
  logic [15:0] mser;

  hdc_encoder #(.W(W)) dut (.clk_i(clk), .rst_ni(rst_n), .ctrl_i(ctrl), .am_rd_i(am),
    .ext_data_i(ext), .pidx_i(pidx), .sm_reg_i(smreg), .enc_q_o(q), .wb_data_o(wb));
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic vec_t rvec();
    vec_t v;
    for (int k = 0; k < W / 32; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction

  // Apply ctrl for one clock and advance the model.
  task automatic cycle();
    vec_t iv, sv, mv, res;
    logic msel;
    case (ctrl.encsel)
      ENC_ZERO: iv = '0;
      ENC_SEED: iv = rm::seed();
      ENC_AM:   iv = am;
      default:  iv = mq;
    endcase
    sv = rm::sm(iv, ctrl.smen, ctrl.smsel ? int'(ext[6:0]) : int'(smreg));
    msel = ctrl.mx_from_ser ? mser[0] : ctrl.mxsel;
    mv = rm::mix(sv, ctrl.mxen, ctrl.mxinv, msel);
    for (int i = 0; i < W; i++) begin
      logic [4:0] c5;
      c5 = 5'(mc[i]);
      case (ctrl.op)
        OP_PASS:   res[i] = mv[i];
        OP_XOR:    res[i] = mv[i] ^ mq[i];
        OP_AND:    res[i] = mv[i] & mq[i];
        OP_OR:     res[i] = mv[i] | mq[i];
        OP_NOT:    res[i] = !mv[i];
        OP_THRESH: res[i] = mc[i] > 0;
        OP_EVICT:  res[i] = c5[4];
        default:   res[i] = mv[i];
      endcase
    end
    #1 check(wb == res, "write-back data");
    if (ctrl.en) begin
      for (int i = 0; i < W; i++) begin
        logic [4:0] c5;
        c5 = 5'(mc[i]);
        if (ctrl.bndrst) mc[i] = 0;
        else if (ctrl.op == OP_EVICT) begin c5 = {c5[3:0], c5[4]}; mc[i] = $signed(c5); end
        else if (ctrl.op == OP_LOAD)  begin c5 = {c5[3:0], mv[i]}; mc[i] = $signed(c5); end
        else if (ctrl.bnden) begin
          if (res[i] && mc[i] < 15) mc[i]++;
          else if (!res[i] && mc[i] > -16) mc[i]--;
        end
      end
      mq = res;
    end
    if (ctrl.ser_load)
      case (ctrl.ser_src)
        MIX_PIDX: mser = pidx;
        MIX_EXT:  mser = ext;
        default:  mser = ctrl.ser_imm;
      endcase
    else if (ctrl.ser_shift) mser = mser >> 1;
    @(posedge clk); #1;
    check(q == mq, "encoder register");
    @(negedge clk);
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vec_t a, b, c, e;
    ctrl = '0; am = '0;
    mq = '0; mser = '0;
    for (int i = 0; i < W; i++) mc[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    // random control
    for (int t = 0; t < 1500; t++) begin
      ctrl = enc_ctrl_t'({$urandom, $urandom, $urandom});
      ctrl.en = ($urandom_range(0, 7) != 0);
      ctrl.bndrst = ($urandom_range(0, 15) == 0);
      if (ctrl.ser_src == 2'd3) ctrl.ser_src = MIX_IMM;
      am = rvec(); ext = 16'($urandom); pidx = 16'($urandom); smreg = 7'($urandom);
      cycle();
    end
    // item-memory mapping of w = 0x5a3 (12 bits) from the seed, through the serializer
    ctrl = '0; ctrl.en = 1; ctrl.encsel = ENC_SEED; ctrl.op = OP_PASS; cycle();
    ctrl = '0; ctrl.ser_load = 1; ctrl.ser_src = MIX_IMM; ctrl.ser_imm = 16'h05a3; cycle();
    for (int k = 0; k < 12; k++) begin
      ctrl = '0; ctrl.en = 1; ctrl.encsel = ENC_REG; ctrl.mxen = 1; ctrl.mx_from_ser = 1;
      ctrl.ser_shift = 1; ctrl.op = OP_PASS; cycle();
    end
    check(q == rm::im_map(rm::seed(), 32'h5a3, 12), "IM mapping via serializer");
    // bundle three random vectors from the AM port, threshold
    a = rvec(); b = rvec(); c = rvec();
    ctrl = '0; ctrl.en = 1; ctrl.bndrst = 1; cycle();
    am = a; ctrl = '0; ctrl.en = 1; ctrl.encsel = ENC_AM; ctrl.bnden = 1; cycle();
    am = b; cycle();
    am = c; cycle();
    ctrl = '0; ctrl.en = 1; ctrl.op = OP_THRESH; cycle();
    e = (a & b) | (a & c) | (b & c);
    check(q == e, "majority of three");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
