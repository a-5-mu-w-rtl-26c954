// tb_hdc_assoc_mem -- self-checking test of the associative memory
// (N=8 rows, W=128, K=2). Prototypes and the search vector are written
// through the 32-bit host port or the encoder write port; lookups with
// random limits are compared with a full search done here, and the
// encoder read port and host read-back are checked against a memory model.
module tb_hdc_assoc_mem;
  localparam int N = 8, W = 128, K = 2, E = N * K, WPE = W / 32, DW = $clog2(W * K + 1);
  logic clk = 0, rst_n = 0, we = 0, cwe = 0, start = 0, busy, done, irq;
  logic [3:0] raddr = 0, waddr = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic [5:0] caddr = 0;
  logic [31:0] cwdata = 0, crdata;
  logic [5:0] smax = 0, bidx, ithr = 0;
  logic [DW-1:0] bdist;
  logic [15:0] dthr = 0;
  logic [W-1:0] ref_mem [E];
  int checks = 0, failures = 0;

  hdc_assoc_mem #(.N(N), .W(W), .K(K)) dut (.clk_i(clk), .rst_ni(rst_n), .rd_addr_i(raddr),
    .rd_data_o(rdata), .wr_en_i(we), .wr_addr_i(waddr), .wr_data_i(wdata), .cfg_we_i(cwe),
    .cfg_addr_i(caddr), .cfg_wdata_i(cwdata), .cfg_rdata_o(crdata), .search_start_i(start),
    .search_max_i(smax), .search_busy_o(busy), .search_done_o(done), .best_idx_o(bidx),
    .best_dist_o(bdist), .dist_thr_i(dthr), .idx_thr_i(ithr), .irq_cond_o(irq));
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int m, ei, ed, cyc;
      // fill: even rounds through the host port, odd through the write port
      for (int e = 0; e < E; e++) begin
        if (t % 2 == 0)
          for (int w = 0; w < WPE; w++) begin
            @(negedge clk); cwe = 1; caddr = 6'(e * WPE + w); cwdata = $urandom;
            ref_mem[e][w*32 +: 32] = cwdata;
          end
        else begin
          @(negedge clk); we = 1; waddr = 4'(e); wdata = {$urandom, $urandom, $urandom, $urandom};
          ref_mem[e] = wdata;
        end
      end
      @(negedge clk); cwe = 0; we = 0;
      for (int r = 0; r < 8; r++) begin
        raddr = 4'($urandom); caddr = 6'($urandom); #1;
        check(rdata == ref_mem[raddr], "read port");
        check(crdata == ref_mem[caddr / WPE][(caddr % WPE) * 32 +: 32], "host read");
      end
      m = $urandom_range(1, N - 1);
      ei = 0; ed = (1 << DW) - 1;
      for (int r = 0; r < m; r++) begin
        int d;
        d = 0;
        for (int p = 0; p < K; p++) d += $countones(ref_mem[r*K+p] ^ ref_mem[(N-1)*K+p]);
        if (d < ed) begin ed = d; ei = r; end
      end
      @(negedge clk); start = 1; smax = 6'(m); cyc = 1;
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc + 1 == m * K + 2, "lookup cycles");
      @(negedge clk);
      check(32'(bidx) == ei && 32'(bdist) == ed, $sformatf("result %0d/%0d exp %0d/%0d", bidx, bdist, ei, ed));
      dthr = 16'(ed); ithr = 6'(ei); #1; check(irq, "irq at thresholds");
      dthr = 16'(ed - 1); #1; check(!irq, "no irq below distance");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
