// tb_hdc_serializer -- self-checking test of the 16-bit MIX serializer.
// Loads random words, shifts them out and checks that bit_o presents the
// bits LSB first, that load wins over shift, and that an idle cycle holds.
module tb_hdc_serializer;
  logic clk = 0, rst_n = 0, load = 0, shift = 0, bit_o;
  logic [15:0] val = '0, q;
  int checks = 0, failures = 0;

  hdc_serializer #(.W(16)) dut (.clk_i(clk), .rst_ni(rst_n), .load_i(load), .load_val_i(val),
                                .shift_i(shift), .bit_o(bit_o), .value_o(q));
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      logic [15:0] w;
      w = 16'($urandom);
      @(negedge clk); load = 1; val = w; shift = 1;   // load has priority
      @(negedge clk); load = 0; shift = 0;
      check(q == w, "load value");
      for (int b = 0; b < 16; b++) begin
        check(bit_o == w[b], $sformatf("bit %0d of %h", b, w));
        @(negedge clk); shift = 1;
        @(negedge clk); shift = 0;
      end
      check(q == 16'd0, "shifted empty");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
