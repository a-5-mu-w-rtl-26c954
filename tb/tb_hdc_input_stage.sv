// tb_hdc_input_stage -- self-checking test of the encoder input multiplexer.
// Checks all four sources; the seed is compared with the seed formula
// (integer hash of the bit index, bit 16) recomputed here, and must be
// roughly balanced.
module tb_hdc_input_stage;
  import hdc_pkg::*;
  localparam int W = 256;
  encsel_e sel;
  logic [W-1:0] am, enc, vec, seed_ref;
  int checks = 0, failures = 0;

  hdc_input_stage #(.W(W)) dut (.sel_i(sel), .am_i(am), .enc_i(enc), .vec_o(vec));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < W; i++) begin
      int unsigned x;
      x = i * 32'h9E3779B1 + 32'h7F4A7C15;
      x = x ^ (x >> 15);
      x = x * 32'h85EBCA6B;
      x = x ^ (x >> 13);
      seed_ref[i] = x[16];
    end
    for (int t = 0; t < 10; t++) begin
      for (int k = 0; k < W / 32; k++) begin
        am[k*32 +: 32]  = $urandom;
        enc[k*32 +: 32] = $urandom;
      end
      sel = ENC_ZERO; #1; check(vec == '0, "zero");
      sel = ENC_SEED; #1; check(vec == seed_ref, "seed");
      sel = ENC_AM;   #1; check(vec == am, "am");
      sel = ENC_REG;  #1; check(vec == enc, "enc");
    end
    check($countones(seed_ref) > W / 3 && $countones(seed_ref) < 2 * W / 3, "seed balance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
