// tb_hdc_controller -- self-checking test of the control unit (N=8, K=4).
// A microcode program in a memory model exercises every instruction:
// SMREG, part index increment/clear, two nested hardware loops, a NISC
// instruction that waits for external input, MIX (n + 2 cycles), AM_SEARCH
// against a modelled lookup (max*K + 2 cycles), INTR stalling until the
// host clears the interrupt, JMP, and a zero-count loop that skips its body.
// Writes to the memory are counted per address; control fields and cycle
// counts are compared with the values the program implies.
module tb_hdc_controller;
  import hdc_pkg::*;
  import tb_hdc_asm_pkg::*;
  localparam int N = 8, K = 4, DEPTH = 64;

  logic clk = 0, rst_n = 0, run = 0, ext_valid = 0, ext_ready, irq_clear = 0, irq, busy;
  logic [5:0] pc;
  instr_t imem [DEPTH];
  enc_ctrl_t ec;
  logic [1:0] pidx;
  logic [6:0] smr;
  logic [4:0] rda, wra;
  logic wen, sstart, sdone = 0, irq_cond = 0;
  logic [5:0] smax, ithr;
  logic [15:0] dthr;
  int checks = 0, failures = 0;
  int writes [32];
  int pc_cycles [DEPTH];
  int shifts = 0, loads = 0, search_cnt = 0;

  hdc_controller #(.N(N), .K(K), .DEPTH(DEPTH)) dut (.clk_i(clk), .rst_ni(rst_n), .run_i(run),
    .pc_o(pc), .instr_i(imem[pc]), .enc_ctrl_o(ec), .pidx_o(pidx), .sm_reg_o(smr),
    .ext_valid_i(ext_valid), .ext_ready_o(ext_ready), .am_rd_addr_o(rda), .am_wr_en_o(wen),
    .am_wr_addr_o(wra), .search_start_o(sstart), .search_max_o(smax), .search_done_i(sdone),
    .dist_thr_o(dthr), .idx_thr_o(ithr), .irq_cond_i(irq_cond), .irq_clear_i(irq_clear),
    .irq_o(irq), .busy_o(busy));
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // lookup model: done one cycle after max*K scan cycles
  initial forever begin
    @(posedge clk);
    if (sstart) begin
      int m;
      m = int'(smax);
      search_cnt++;
      repeat (m * K) @(posedge clk);
      #1 sdone = 1;
      @(posedge clk); #1 sdone = 0;
    end
  end

  // monitor
  always @(posedge clk) if (run) begin
    pc_cycles[pc]++;
    if (wen) writes[wra]++;
    if (ec.ser_shift) begin
      shifts++;
      if (!(ec.en && ec.mx_from_ser && ec.mxen && ec.encsel == ENC_REG)) begin
        failures++; $display("FAIL: mixing cycle controls");
      end
    end
    if (ec.ser_load) loads++;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) imem[i] = nop();
    imem[0]  = smreg(45);
    imem[1]  = pidx_op(1);
    imem[2]  = hwloop(3, 7);
    imem[3]  = hwloop(4, 5);
    imem[4]  = nisc(ENC_AM, 0, 0, 1, 0, 1, OP_XOR, 1, 0, 1, 2, 1);
    imem[5]  = nisc(ENC_REG, 1, 1, 0, 0, 0, OP_PASS, 0, 0, 1, 3, 2);
    imem[6]  = mix(MIX_IMM, 5, 'h15);
    imem[7]  = am_search(5);
    imem[8]  = intr(100, 3);
    imem[9]  = pidx_op(0);
    imem[10] = nisc(ENC_SEED, 0, 0, 0, 1, 0, OP_NOT, 0, 1, 1, 0, 3);
    imem[11] = jmp(13);
    imem[12] = nisc(ENC_ZERO, 0, 0, 0, 0, 0, OP_PASS, 0, 0, 1, 0, 7);
    imem[13] = hwloop(0, 15);
    imem[14] = nisc(ENC_ZERO, 0, 0, 0, 0, 0, OP_PASS, 0, 0, 1, 0, 6);
    imem[15] = nop();
    imem[16] = jmp(16);
    foreach (writes[i]) writes[i] = 0;
    foreach (pc_cycles[i]) pc_cycles[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); run = 1;
    // NISC decode of instruction 4 once it is reached
    wait (pc == 6'd4); #1;
    check(ec.en && ec.encsel == ENC_AM && ec.mxen && ec.mxsel && !ec.mxinv && ec.op == OP_XOR
          && ec.bnden && wen, "NISC field decode");
    check(rda == 5'(2 * K + 1) && wra == 5'(1 * K + 1), "row * K + part index addressing");
    check(smr == 7'd45, "SMREG");
    // external input: instruction 5 waits for valid
    wait (pc == 6'd5); @(negedge clk);
    check(ext_ready && !ec.en && !wen && pc == 6'd5, "stall without input");
    repeat (3) @(negedge clk);
    check(pc == 6'd5, "still stalled");
    ext_valid = 1;
    // interrupt: condition true when INTR is reached
    irq_cond = 1;
    wait (pc == 6'd8);
    repeat (2) @(negedge clk);
    check(irq && pc == 6'd8, "INTR raises irq and waits");
    repeat (10) @(negedge clk);
    check(pc == 6'd8, "waiting for clear");
    irq_clear = 1; @(negedge clk); irq_clear = 0;
    check(!irq && pc == 6'd9, "continues after clear");
    wait (pc == 6'd16); repeat (5) @(negedge clk);
    check(pc == 6'd16, "final spin");
    check(writes[1*K+1] == 12, $sformatf("inner loop body ran %0d times", writes[1*K+1]));
    check(writes[2*K+1] == 3, $sformatf("outer loop body ran %0d times", writes[2*K+1]));
    check(pc_cycles[6] == 3 * (5 + 2), $sformatf("MIX cycles %0d", pc_cycles[6]));
    check(shifts == 15 && loads == 3, "serializer loads / shifts");
    check(pc_cycles[7] == 5 * K + 2 && search_cnt == 1, $sformatf("AM_SEARCH cycles %0d", pc_cycles[7]));
    check(writes[3*K] == 1, "part index cleared");
    check(writes[7*K] == 0, "JMP skipped");
    check(writes[6*K] == 0, "zero-count loop skipped");
    check(pc_cycles[4] == 12 && pc_cycles[10] == 1, "one cycle per NISC instruction");
    // run low returns to address 0
    @(negedge clk); run = 0; @(negedge clk);
    check(pc == 6'd0, "held at 0 when stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
