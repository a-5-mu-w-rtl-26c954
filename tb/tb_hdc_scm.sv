// tb_hdc_scm -- self-checking test of the vector storage (N=4 rows, W=64,
// K=2): encoder-port writes, host word writes, combinational reads on the
// read port and the word port, and the search-vector output (last row).
module tb_hdc_scm;
  localparam int N = 4, W = 64, K = 2, E = N * K, WPE = W / 32;
  logic clk = 0, we = 0, cwe = 0;
  logic [2:0] raddr = 0, waddr = 0;
  logic [W-1:0] wdata = '0, rdata, sdata;
  logic [3:0] caddr = 0;
  logic [31:0] cwdata = 0, crdata;
  logic spart = 0;
  logic [W-1:0] ref_mem [E];
  int checks = 0, failures = 0;

  hdc_scm #(.N(N), .W(W), .K(K)) dut (.clk_i(clk), .rd_addr_i(raddr), .rd_data_o(rdata),
    .wr_en_i(we), .wr_addr_i(waddr), .wr_data_i(wdata), .cfg_we_i(cwe), .cfg_addr_i(caddr),
    .cfg_wdata_i(cwdata), .cfg_rdata_o(crdata), .search_part_i(spart), .search_data_o(sdata));
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
    for (int e = 0; e < E; e++) begin
      @(negedge clk); we = 1; waddr = 3'(e); wdata = {$urandom, $urandom}; ref_mem[e] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 2) == 0; cwe = $urandom_range(0, 2) == 0;
      waddr = 3'($urandom); wdata = {$urandom, $urandom};
      caddr = 4'($urandom); cwdata = $urandom;
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      if (cwe) ref_mem[caddr / WPE][(caddr % WPE) * 32 +: 32] = cwdata;
      we = 0; cwe = 0;
      raddr = 3'($urandom); caddr = 4'($urandom); spart = 1'($urandom); #1;
      check(rdata == ref_mem[raddr], "read port");
      check(crdata == ref_mem[caddr / WPE][(caddr % WPE) * 32 +: 32], "word port read");
      check(sdata == ref_mem[(N - 1) * K + spart], "search vector");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
