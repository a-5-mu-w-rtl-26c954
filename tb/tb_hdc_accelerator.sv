// tb_hdc_accelerator -- end-to-end test of the accelerator at reduced size.
// Two instances run side by side: D = 256, K = 1, N = 16 with the n-gram
// text-classification program, and D = 256, K = 2, N = 8 with the
// sensor-channel program that uses vector folding. tb_hdc_acc_driver
// drives each one over its pins and compares it with the instruction-level
// model; this module adds the results up.
module tb_hdc_accelerator;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst_a, rst_b;
  logic [31:0] paddr_a, pwdata_a, prdata_a, paddr_b, pwdata_b, prdata_b;
  logic        psel_a, penable_a, pwrite_a, pready_a, pslverr_a;
  logic        psel_b, penable_b, pwrite_b, pready_b, pslverr_b;
  logic [15:0] in_a, in_b;
  logic        iv_a, ir_a, irq_a, done_a, iv_b, ir_b, irq_b, done_b;
  int          ch_a, fl_a, ch_b, fl_b;

  hdc_accelerator #(.D(256), .K(1), .N(16)) dut_a (
    .clk_i(clk), .rst_ni(rst_a), .paddr_i(paddr_a), .psel_i(psel_a), .penable_i(penable_a),
    .pwrite_i(pwrite_a), .pwdata_i(pwdata_a), .prdata_o(prdata_a), .pready_o(pready_a),
    .pslverr_o(pslverr_a), .in_data_i(in_a), .in_valid_i(iv_a), .in_ready_o(ir_a), .irq_o(irq_a));

  tb_hdc_acc_driver #(.D(256), .K(1), .N(16), .PROG(0), .NCHARS(12), .RUNS(2)) drv_a (
    .clk(clk), .rst_n(rst_a), .paddr(paddr_a), .psel(psel_a), .penable(penable_a),
    .pwrite(pwrite_a), .pwdata(pwdata_a), .prdata(prdata_a), .pready(pready_a),
    .pslverr(pslverr_a), .in_data(in_a), .in_valid(iv_a), .in_ready(ir_a), .irq(irq_a),
    .done(done_a), .checks(ch_a), .failures(fl_a));

  hdc_accelerator #(.D(256), .K(2), .N(8)) dut_b (
    .clk_i(clk), .rst_ni(rst_b), .paddr_i(paddr_b), .psel_i(psel_b), .penable_i(penable_b),
    .pwrite_i(pwrite_b), .pwdata_i(pwdata_b), .prdata_o(prdata_b), .pready_o(pready_b),
    .pslverr_o(pslverr_b), .in_data_i(in_b), .in_valid_i(iv_b), .in_ready_o(ir_b), .irq_o(irq_b));

  tb_hdc_acc_driver #(.D(256), .K(2), .N(8), .PROG(1), .NCHARS(6), .RUNS(2)) drv_b (
    .clk(clk), .rst_n(rst_b), .paddr(paddr_b), .psel(psel_b), .penable(penable_b),
    .pwrite(pwrite_b), .pwdata(pwdata_b), .prdata(prdata_b), .pready(pready_b),
    .pslverr(pslverr_b), .in_data(in_b), .in_valid(iv_b), .in_ready(ir_b), .irq(irq_b),
    .done(done_b), .checks(ch_b), .failures(fl_b));

  initial begin
    #20ms;
    $display("TB_RESULT checks=%0d failures=%0d", ch_a + ch_b, fl_a + fl_b + 1);
    $finish;
  end

  initial begin
    @(posedge clk);  // the drivers have initialised done by now
    wait (done_a && done_b);
    $display("TB_RESULT checks=%0d failures=%0d", ch_a + ch_b, fl_a + fl_b);
    $finish;
  end
endmodule
