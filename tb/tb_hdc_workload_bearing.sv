// tb_hdc_workload_bearing -- end-to-end test of the accelerator with every
// parameter at its default (D = 2048, K = 1, N = 32) running the vibration
// anomaly-detection workload: each 7-bit sample is mapped to an item vector
// with MIX (external source, 7 bits), 250 samples form a window, five
// windows are bundled into one measurement vector, and its Hamming distance
// to a calibration vector in row 0 is reported through the lookup and the
// interrupt. Window length and window count are the published ones; the
// program itself (11 instructions, about 11 cycles per sample) is this
// design's. tb_hdc_acc_driver checks memory, result and cycle count against
// the instruction-level model.
module tb_hdc_workload_bearing;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst_n;
  logic [31:0] paddr, pwdata, prdata;
  logic        psel, penable, pwrite, pready, pslverr;
  logic [15:0] in_data;
  logic        in_valid, in_ready, irq, done;
  int          checks, failures;

  hdc_accelerator dut (
    .clk_i(clk), .rst_ni(rst_n), .paddr_i(paddr), .psel_i(psel), .penable_i(penable),
    .pwrite_i(pwrite), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .pslverr_o(pslverr), .in_data_i(in_data), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .irq_o(irq));

  tb_hdc_acc_driver #(.D(2048), .K(1), .N(32), .PROG(2), .NCHARS(250), .RUNS(1)) drv (
    .clk(clk), .rst_n(rst_n), .paddr(paddr), .psel(psel), .penable(penable), .pwrite(pwrite),
    .pwdata(pwdata), .prdata(prdata), .pready(pready), .pslverr(pslverr), .in_data(in_data),
    .in_valid(in_valid), .in_ready(in_ready), .irq(irq), .done(done), .checks(checks),
    .failures(failures));

  initial begin
    #50ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(posedge clk);  // the driver has initialised done by now
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
