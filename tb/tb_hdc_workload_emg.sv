// tb_hdc_workload_emg -- end-to-end test of the accelerator with every
// parameter at its default (D = 2048, K = 1, N = 32) running the
// multi-channel gesture-recognition style program on 64 channels, the
// published channel count. For each channel a 7-bit sample drives the
// similarity manipulator (continuous item mapping) on the channel label, the
// result is bundled, and the next channel label is made from the previous
// one with one permutation, all in a two-instruction channel loop. The
// bundle is thresholded into the search vector, compared with three
// prototypes, and the counters are also evicted bit-serially. The program is
// this design's; the published one is not given. tb_hdc_acc_driver checks
// memory, result and cycle count against the instruction-level model for two
// windows.
module tb_hdc_workload_emg;
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

  tb_hdc_acc_driver #(.D(2048), .K(1), .N(32), .PROG(1), .NCHARS(64), .RUNS(2)) drv (
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
