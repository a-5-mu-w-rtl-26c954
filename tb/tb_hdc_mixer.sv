// tb_hdc_mixer -- self-checking test of the mixing stage.
// Each permutation keeps the number of ones, moves a single one to the
// position given by the wiring hash, its inverse undoes it, pi0 and pi1
// differ and do not commute, and disable bypasses the stage.
module tb_hdc_mixer;
  import hdc_pkg::*;
  localparam int W = 256;
  localparam int LW = 8;
  logic en, inv, sel;
  logic [W-1:0] vi, vo;
  int checks = 0, failures = 0;

  hdc_mixer #(.W(W)) dut (.en_i(en), .inv_i(inv), .sel_i(sel), .vec_i(vi), .vec_o(vo));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apply(input logic e, input logic iv, input logic s, input logic [W-1:0] x,
                       output logic [W-1:0] y);
    en = e; inv = iv; sel = s; vi = x; #1; y = vo;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] x, y, z, a, b;
    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < W / 32; k++) x[k*32 +: 32] = $urandom;
      for (int s = 0; s < 2; s++) begin
        apply(1, 0, s[0], x, y);
        check($countones(y) == $countones(x), "ones kept");
        apply(1, 1, s[0], y, z);
        check(z == x, $sformatf("inverse of pi%0d", s));
        check(y != x, "permutation moves bits");
      end
      apply(1, 0, 0, x, a); apply(1, 0, 1, a, a);   // pi1(pi0 x)
      apply(1, 0, 1, x, b); apply(1, 0, 0, b, b);   // pi0(pi1 x)
      check(a != b, "pi0 and pi1 do not commute");
      apply(0, 1, 1, x, y);
      check(y == x, "bypass");
    end
    // single one: forward y[i] = x[p(i)], so a one at p(i) lands at i
    for (int i = 0; i < W; i += 7) begin
      int p;
      p = perm_idx(i, PI0_SEED, LW);
      x = '0; x[p] = 1'b1;
      apply(1, 0, 0, x, y);
      check(y[i] == 1'b1 && $countones(y) == 1, "pi0 wiring");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
