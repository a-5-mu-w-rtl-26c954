// tb_hdc_am_lookup -- self-checking test of the associative lookup logic.
// A memory model answers the unit's read port (N=8 rows, W=128, K=2). For
// random contents and random search limits the test checks the returned
// index and Hamming distance against a full search done here, the lower
// index on ties, the cycle count max_idx*K + 2 and the interrupt compare.
module tb_hdc_am_lookup;
  localparam int N = 8, W = 128, K = 2, E = N * K, DW = $clog2(W * K + 1);
  logic clk = 0, rst_n = 0, start = 0, busy, done, irq;
  logic [5:0] max_idx = 0, best_idx, idx_thr = 0;
  logic [3:0] raddr;
  logic spart;
  logic [DW-1:0] best_dist;
  logic [15:0] dist_thr = 0;
  logic [W-1:0] mem [E];
  int checks = 0, failures = 0;

  hdc_am_lookup #(.N(N), .W(W), .K(K)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .max_idx_i(max_idx), .busy_o(busy), .done_o(done), .rd_addr_o(raddr), .rd_data_i(mem[raddr]),
    .search_part_o(spart), .search_data_i(mem[(N - 1) * K + spart]), .best_idx_o(best_idx),
    .best_dist_o(best_dist), .dist_thr_i(dist_thr), .idx_thr_i(idx_thr), .irq_cond_o(irq));
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
    for (int t = 0; t < 200; t++) begin
      int exp_idx, exp_dist, cycles, m;
      for (int e = 0; e < E; e++) mem[e] = {$urandom, $urandom, $urandom, $urandom};
      if (t % 5 == 0) begin   // planted near match, sometimes duplicated (tie)
        int r;
        r = $urandom_range(0, N - 2);
        mem[r*K] = mem[(N-1)*K] ^ 128'h1; mem[r*K+1] = mem[(N-1)*K+1];
        if (t % 10 == 0 && r < N - 2) begin mem[(r+1)*K] = mem[r*K]; mem[(r+1)*K+1] = mem[r*K+1]; end
      end
      m = (t % 17 == 0) ? 0 : $urandom_range(1, N - 1);
      exp_idx = 0; exp_dist = (1 << DW) - 1;
      for (int r = 0; r < m; r++) begin
        int d;
        d = 0;
        for (int p = 0; p < K; p++) d += $countones(mem[r*K+p] ^ mem[(N-1)*K+p]);
        if (d < exp_dist) begin exp_dist = d; exp_idx = r; end
      end
      @(negedge clk); start = 1; max_idx = 6'(m); cycles = 1;
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cycles++; end
      cycles++;    // the done cycle itself
      check(cycles == m * K + 2, $sformatf("cycles %0d for max %0d", cycles, m));
      @(negedge clk);
      check(32'(best_idx) == exp_idx, $sformatf("index %0d exp %0d", best_idx, exp_idx));
      check(32'(best_dist) == exp_dist, $sformatf("distance %0d exp %0d", best_dist, exp_dist));
      dist_thr = 16'($urandom_range(0, 140)); idx_thr = 6'($urandom_range(0, N)); #1;
      check(irq == (exp_dist <= 32'(dist_thr) && exp_idx <= 32'(idx_thr)), "interrupt compare");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
