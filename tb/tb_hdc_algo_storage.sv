// tb_hdc_algo_storage -- self-checking test of the microcode storage:
// random words written through the host port are read back on both read
// paths, and a write to one word leaves the others unchanged.
module tb_hdc_algo_storage;
  import hdc_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, haddr = 0, faddr = 0;
  instr_t wdata = '0, hdata, fdata;
  instr_t ref_mem [DEPTH];
  int checks = 0, failures = 0;

  hdc_algo_storage #(.DEPTH(DEPTH)) dut (.clk_i(clk), .we_i(we), .waddr_i(waddr), .wdata_i(wdata),
    .host_raddr_i(haddr), .host_rdata_o(hdata), .fetch_addr_i(faddr), .fetch_data_o(fdata));
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = instr_t'($urandom); ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        we = 1; waddr = 6'($urandom); wdata = instr_t'($urandom);
        @(negedge clk); we = 0; ref_mem[waddr] = wdata;
      end
      haddr = 6'($urandom); faddr = 6'($urandom); #1;
      check(hdata == ref_mem[haddr], "host read");
      check(fdata == ref_mem[faddr], "fetch read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
