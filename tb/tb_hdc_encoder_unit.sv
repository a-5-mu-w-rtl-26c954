// tb_hdc_encoder_unit -- self-checking test of one encoder unit.
// Random operation sequences are compared cycle by cycle with a reference
// model of the register bit and the 5-bit saturating bundle counter; a
// directed part checks saturation at +15 / -16 and the bit-serial
// evict / load round trip of the counter.
module tb_hdc_encoder_unit;
  import hdc_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, x = 0, bnden = 0, bndrst = 0, q, d;
  enc_op_e op = OP_PASS;
  logic [4:0] cnt;
  int checks = 0, failures = 0;
  logic       rq;
  int         rc;

  hdc_encoder_unit dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .op_i(op), .x_i(x),
                        .bnden_i(bnden), .bndrst_i(bndrst), .q_o(q), .d_o(d), .cnt_o(cnt));
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one clock with the given inputs, updating the reference model
  task automatic step(enc_op_e o, logic xi, logic be, logic br, logic e = 1);
    logic r;
    logic [4:0] c5;
    @(negedge clk); op = o; x = xi; bnden = be; bndrst = br; en = e;
    c5 = 5'(rc);
    case (o)
      OP_PASS:   r = xi;
      OP_XOR:    r = xi ^ rq;
      OP_AND:    r = xi & rq;
      OP_OR:     r = xi | rq;
      OP_NOT:    r = !xi;
      OP_THRESH: r = (rc > 0);
      OP_EVICT:  r = c5[4];
      default:   r = xi;
    endcase
    #1 check(d == r, $sformatf("result op=%0d", o));
    if (e) begin
      rq = r;
      if (br) rc = 0;
      else if (o == OP_EVICT) begin c5 = {c5[3:0], c5[4]}; rc = $signed(c5); end
      else if (o == OP_LOAD)  begin c5 = {c5[3:0], xi};    rc = $signed(c5); end
      else if (be) begin
        if (r && rc < 15) rc++;
        else if (!r && rc > -16) rc--;
      end
    end
    @(posedge clk); #1;
    check(q == rq, "register");
    check($signed(cnt) == rc, $sformatf("counter %0d vs %0d", $signed(cnt), rc));
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rq = 0; rc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // saturation
    for (int i = 0; i < 20; i++) step(OP_PASS, 1, 1, 0);
    check(rc == 15, "saturated high");
    for (int i = 0; i < 40; i++) step(OP_PASS, 0, 1, 0);
    check(rc == -16, "saturated low");
    // evict / load round trip of a value
    step(OP_PASS, 0, 0, 1);
    for (int i = 0; i < 7; i++) step(OP_PASS, 1, 1, 0);   // counter = 7
    begin
      logic [4:0] ev;
      for (int b = 0; b < 5; b++) begin step(OP_EVICT, 0, 0, 0); ev = {ev[3:0], q}; end
      check(ev == 5'd7 && rc == 7, "evict emits MSB first and keeps value");
      step(OP_PASS, 0, 0, 1);
      for (int b = 4; b >= 0; b--) step(OP_LOAD, ev[b], 0, 0);
      check(rc == 7, "load restores");
    end
    // random
    for (int i = 0; i < 3000; i++)
      step(enc_op_e'($urandom_range(0, 7)), 1'($urandom), 1'($urandom), ($urandom_range(0, 30) == 0),
           ($urandom_range(0, 9) != 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
