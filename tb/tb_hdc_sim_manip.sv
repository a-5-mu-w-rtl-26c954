// tb_hdc_sim_manip -- self-checking test of the similarity manipulator.
// For every word w the stage must flip exactly w*W/128 bits, the flipped
// set must grow with w (thermometer code), blocks of W/128 bits must be
// flipped together (each code bit is repeated), and disable must bypass.
module tb_hdc_sim_manip;
  import hdc_pkg::*;
  localparam int W = 512;
  logic en;
  logic [6:0] w;
  logic [W-1:0] vi, vo, mask, prev_mask;
  int checks = 0, failures = 0;

  hdc_sim_manip #(.W(W)) dut (.en_i(en), .w_i(w), .vec_i(vi), .vec_o(vo), .mask_o(mask));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prev_mask = '0;
    for (int i = 0; i < 128; i++) begin
      for (int k = 0; k < W / 32; k++) vi[k*32 +: 32] = $urandom;
      en = 1; w = 7'(i); #1;
      check($countones(vo ^ vi) == i * (W / 128), $sformatf("flip count w=%0d: %0d", i, $countones(vo ^ vi)));
      check((prev_mask & ~(vo ^ vi)) == '0, $sformatf("monotonic w=%0d", i));
      prev_mask = vo ^ vi;
      en = 0; #1;
      check(vo == vi, "bypass");
    end
    // 50% word on the all-zero vector gives a half-dense mask
    vi = '0; en = 1; w = 7'd64; #1;
    check($countones(vo) == W / 2, "half density");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
