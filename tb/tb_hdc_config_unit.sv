// tb_hdc_config_unit -- self-checking test of the APB configuration unit.
// APB transfers (setup then access phase) write and read back the CTRL
// register, algorithm words and memory words (against models of the
// storage and memory attached here), read STATUS / RESULT, pulse the
// interrupt clear, and get PSLVERR for unmapped addresses.
module tb_hdc_config_unit;
  import hdc_pkg::*;
  localparam int DEPTH = 16, AMW = 64;
  logic clk = 0, rst_n = 0;
  logic [31:0] paddr = 0, pwdata = 0, prdata;
  logic psel = 0, penable = 0, pwrite = 0, pready, pslverr;
  logic run, irq_clr, irq = 0, busy = 0;
  logic [9:0] pcv = 0;
  logic [5:0] ridx = 0;
  logic [15:0] rdist = 0;
  logic awe, mwe;
  logic [3:0] aaddr;
  logic [5:0] maddr;
  instr_t awd;
  logic [31:0] mwd;
  instr_t amem [DEPTH];
  logic [31:0] mmem [AMW];
  int checks = 0, failures = 0, clears = 0;

  hdc_config_unit #(.DEPTH(DEPTH), .AM_WORDS(AMW)) dut (.clk_i(clk), .rst_ni(rst_n),
    .paddr_i(paddr), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite), .pwdata_i(pwdata),
    .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr), .run_o(run), .irq_clear_o(irq_clr),
    .irq_i(irq), .busy_i(busy), .pc_i(pcv), .res_idx_i(ridx), .res_dist_i(rdist),
    .algo_we_o(awe), .algo_addr_o(aaddr), .algo_wdata_o(awd), .algo_rdata_i(amem[aaddr]),
    .am_we_o(mwe), .am_addr_o(maddr), .am_wdata_o(mwd), .am_rdata_i(mmem[maddr]));
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (awe) amem[aaddr] <= awd;
    if (mwe) mmem[maddr] <= mwd;
    if (irq_clr) clears++;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apb(bit wr, logic [31:0] a, logic [31:0] d, output logic [31:0] r, output logic err);
    @(negedge clk); psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = d;
    @(negedge clk); penable = 1; #1;
    r = prdata; err = pslverr;
    check(pready, "PREADY");
    @(posedge clk); @(negedge clk); psel = 0; penable = 0;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r;
    logic e;
    instr_t aref [DEPTH];
    logic [31:0] mref [AMW];
    repeat (2) @(posedge clk); rst_n = 1;
    apb(1, 32'h0, 32'h1, r, e); check(run && !e, "run set");
    apb(0, 32'h0, 0, r, e); check(r == 32'h1, "CTRL read");
    apb(1, 32'h0, 32'h0, r, e); check(!run, "run cleared");
    for (int i = 0; i < DEPTH; i++) begin
      aref[i] = instr_t'($urandom);
      apb(1, 32'h0010_0000 + 4 * i, 32'(aref[i]) | 32'hfc00_0000, r, e);
    end
    for (int i = 0; i < AMW; i++) begin
      mref[i] = $urandom;
      apb(1, 32'h0020_0000 + 4 * i, mref[i], r, e);
    end
    for (int t = 0; t < 40; t++) begin
      int i;
      i = $urandom_range(0, DEPTH - 1);
      apb(0, 32'h0010_0000 + 4 * i, 0, r, e); check(r == 32'(aref[i]) && !e, "algorithm read-back");
      i = $urandom_range(0, AMW - 1);
      apb(0, 32'h0020_0000 + 4 * i, 0, r, e); check(r == mref[i] && !e, "memory read-back");
    end
    irq = 1; busy = 1; pcv = 10'd37; ridx = 6'd5; rdist = 16'd400;
    apb(0, 32'h4, 0, r, e); check(r == {6'd0, 10'd37, 14'd0, 1'b1, 1'b1}, "STATUS");
    apb(0, 32'hc, 0, r, e); check(r == {16'd400, 10'd0, 6'd5}, "RESULT");
    apb(1, 32'h8, 32'h1, r, e); check(clears == 1, "IRQ clear pulse");
    apb(1, 32'h8, 32'h0, r, e); check(clears == 1, "no clear without bit 0");
    apb(1, 32'h0010_0000 + 4 * DEPTH, 32'h5, r, e); check(e, "PSLVERR beyond storage");
    apb(0, 32'h0030_0000, 0, r, e); check(e, "PSLVERR unmapped region");
    apb(1, 32'h10, 32'h1, r, e); check(e && !run, "PSLVERR unmapped register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
