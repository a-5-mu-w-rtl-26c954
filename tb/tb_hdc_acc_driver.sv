// tb_hdc_acc_driver -- end-to-end stimulus and checker for hdc_accelerator.
//
// Drives the accelerator only through its pins, like a host and a sensor
// would: it fills the associative memory (random prototypes in rows
// 0..NPROTO-1, zeros elsewhere) and the algorithm storage over APB, sets
// RUN and streams input words with random gaps on the valid/ready
// handshake. The same program and inputs run on the instruction-level model
// tb_hdc_iss_pkg. At every interrupt the whole memory and the RESULT
// register are read back and compared with the model, and the number of
// non-stalled cycles up to the interrupt is compared with the model's cycle
// count. The host then clears the interrupt and the program continues.
// PROG 0 is the n-gram text-classification program (item-memory mapping of
// external characters with MIX, n-gram FIFO in scratchpad rows, bundling,
// lookup); PROG 1 is a sensor-channel program for vector fold K > 1
// (per-part loop with the part index counter, similarity manipulator on
// external samples bound to rotating channel labels, part-index mixing,
// inverse permutation, counter eviction); PROG 2 is the vibration-monitoring
// program (7-bit samples mapped to item vectors with MIX, NCHARS samples per
// window, five windows bundled into one measurement vector, distance to a
// calibration vector in row 0). Each mechanism the program uses is counted
// and must occur at least once.
module tb_hdc_acc_driver
  import hdc_pkg::*;
  import tb_hdc_asm_pkg::*;
  import tb_hdc_iss_pkg::*;
#(
  parameter int D      = 256,
  parameter int K      = 1,
  parameter int N      = 16,
  parameter int PROG   = 0,
  parameter int NCHARS = 12,   // characters per sentence / samples per channel loop
  parameter int RUNS   = 2
) (
  input  logic        clk,
  output logic        rst_n,
  output logic [31:0] paddr,
  output logic        psel,
  output logic        penable,
  output logic        pwrite,
  output logic [31:0] pwdata,
  input  logic [31:0] prdata,
  input  logic        pready,
  input  logic        pslverr,
  output logic [15:0] in_data,
  output logic        in_valid,
  input  logic        in_ready,
  input  logic        irq,
  output logic        done,
  output int          checks,
  output int          failures
);
  localparam int W = D / K;
  localparam int WPE = W / 32;
  localparam int NPROTO = 3;
  localparam int DW = $clog2(D + 1);

  typedef iss #(W, K, N) iss_t;
  iss_t m;

  tb_apb_if apb (clk);
  assign paddr   = apb.paddr;
  assign psel    = apb.psel;
  assign penable = apb.penable;
  assign pwrite  = apb.pwrite;
  assign pwdata  = apb.pwdata;
  assign apb.prdata  = prdata;
  assign apb.pready  = pready;
  assign apb.pslverr = pslverr;

  instr_t prog [];
  logic [15:0] dut_q [$];
  logic [15:0] iss_q [$];
  int stalls = 0, irqs = 0;
  logic counting = 0;
  longint dut_cycles = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic void build_program();
    if (PROG == 0) begin
      int r11, r12, r13, r14, r15;
      r15 = N - 1; r14 = N - 2; r13 = N - 3; r12 = N - 4; r11 = N - 5;
      prog = new [17];
      prog[0]  = smreg(64);                                                   // 50 % flip word
      prog[1]  = nisc(ENC_ZERO, 0, 0, 0, 0, 0, OP_PASS, 0, 1, 0, 0, 0);        // clear reg, counters
      prog[2]  = hwloop(NCHARS, 12);
      prog[3]  = nisc(ENC_REG, 0, 0, 1, 0, 0, OP_PASS, 0, 0, 0, 0, 0);         // enc_reg -> mix -> enc_reg
      prog[4]  = nisc(ENC_AM, 0, 0, 1, 0, 0, OP_XOR, 0, 0, 1, r12, r11);       // mem[12] -> mix -> bind -> mem[11]
      prog[5]  = nisc(ENC_AM, 0, 0, 1, 0, 0, OP_PASS, 0, 0, 1, r13, r12);
      prog[6]  = nisc(ENC_AM, 0, 0, 1, 0, 0, OP_PASS, 0, 0, 1, r14, r13);
      prog[7]  = nisc(ENC_AM, 0, 0, 1, 0, 0, OP_PASS, 0, 0, 1, r15, r14);
      prog[8]  = nisc(ENC_ZERO, 1, 0, 0, 0, 0, OP_PASS, 0, 0, 0, 0, 0);        // zero -> man 50 % -> enc_reg
      prog[9]  = mix(MIX_EXT, 5, 0);                                           // MIX_EXT 5
      prog[10] = nisc(ENC_REG, 0, 0, 0, 0, 0, OP_PASS, 0, 0, 1, 0, r15);       // enc_reg -> mem[15]
      prog[11] = nisc(ENC_AM, 0, 0, 0, 0, 0, OP_XOR, 1, 0, 0, r11, 0);         // mem[11] -> bind -> bundle
      prog[12] = nisc(ENC_REG, 0, 0, 0, 0, 0, OP_THRESH, 0, 0, 1, 0, r15);     // threshold -> mem[15]
      prog[13] = am_search(NPROTO);
      prog[14] = intr(0, 63);                                                  // distance 0 only: skipped
      prog[15] = intr(16'hffff, 63);                                           // always taken
      prog[16] = jmp(1);
    end else if (PROG == 2) begin
      prog = new [12];
      prog[0]  = nisc(ENC_ZERO, 0, 0, 0, 0, 0, OP_PASS, 0, 1, 0, 0, 0);        // clear counters
      prog[1]  = hwloop(5, 7);                                                 // five windows
      prog[2]  = hwloop(NCHARS, 6);                                            // samples of a window
      prog[3]  = nisc(ENC_SEED, 0, 0, 0, 0, 0, OP_PASS, 0, 0, 0, 0, 0);        // seed -> reg
      prog[4]  = mix(MIX_EXT, 7, 0);                                           // item vector of the sample
      prog[5]  = nisc(ENC_REG, 0, 0, 0, 0, 0, OP_PASS, 1, 0, 0, 0, 0);         // bundle it
      prog[6]  = nop();                                                        // end of a window
      prog[7]  = nisc(ENC_REG, 0, 0, 0, 0, 0, OP_THRESH, 0, 0, 1, 0, N - 1);   // measurement vector
      prog[8]  = am_search(1);                                                 // distance to calibration
      prog[9]  = intr(0, 63);
      prog[10] = intr(16'hffff, 63);
      prog[11] = jmp(0);
    end else begin
      prog = new [18];
      prog[0]  = pidx_op(0);
      prog[1]  = hwloop(K, 13);
      prog[2]  = nisc(ENC_ZERO, 0, 0, 0, 0, 0, OP_PASS, 0, 1, 0, 0, 0);        // clear counters
      prog[3]  = hwloop(NCHARS, 6);
      prog[4]  = nisc(ENC_AM, 1, 1, 0, 0, 0, OP_PASS, 1, 0, 0, 0, 0);          // label ^ CIM(sample) -> bundle
      prog[5]  = nisc(ENC_AM, 0, 0, 1, 0, 0, OP_PASS, 0, 0, 1, 0, 0);          // next channel label
      prog[6]  = nisc(ENC_REG, 0, 0, 0, 0, 0, OP_THRESH, 0, 0, 1, 0, N - 1);   // search vector part
      prog[7]  = nisc(ENC_SEED, 0, 0, 0, 0, 0, OP_PASS, 0, 0, 0, 0, 0);
      prog[8]  = mix(MIX_PIDX, (K > 1) ? $clog2(K) : 1, 0);                    // part-specific permutation
      prog[9]  = nisc(ENC_REG, 0, 0, 1, 1, 1, OP_XOR, 0, 0, 1, 0, N - 2);      // inverse pi1, bind
      prog[10] = hwloop(5, 12);
      prog[11] = nisc(ENC_REG, 0, 0, 0, 0, 0, OP_EVICT, 0, 0, 1, 0, N - 3);    // bit-serial counter eviction
      prog[12] = pidx_op(1);
      prog[13] = pidx_op(0);
      prog[14] = am_search(NPROTO);
      prog[15] = intr(0, 63);
      prog[16] = intr(16'hffff, 63);
      prog[17] = jmp(0);
    end
  endfunction

  // Input stream: random gaps; a word is consumed when valid and ready meet.
  initial begin
    in_valid = 0; in_data = 0;
    forever begin
      logic fire;
      @(negedge clk);
      if (dut_q.size() > 0) begin
        in_valid = ($urandom_range(0, 3) != 0);
        in_data  = dut_q[0];
      end else in_valid = 0;
      #4;
      fire = in_valid && in_ready;
      if (counting && !irq && in_ready && !in_valid) stalls++;
      if (counting && !irq && !(in_ready && !in_valid)) dut_cycles++;
      @(posedge clk);
      if (fire) void'(dut_q.pop_front());
    end
  end

  task automatic compare_state(int seg);
    logic [31:0] r;
    int bad;
    bad = 0;
    for (int e = 0; e < N * K; e++)
      for (int w = 0; w < WPE; w++) begin
        apb.read(32'h0020_0000 + 4 * (e * WPE + w), r);
        if (r !== m.mem[e][w*32 +: 32]) begin
          bad++;
          if (bad < 4) $display("FAIL: mem entry %0d word %0d: %h exp %h", e, w, r, m.mem[e][w*32 +: 32]);
        end
      end
    check(bad == 0, $sformatf("segment %0d memory contents (%0d words differ)", seg, bad));
    apb.read(32'hc, r);
    check(int'(r[5:0]) == m.best_idx && int'(r[31:16]) == (m.best_dist & ((1 << DW) - 1)),
          $sformatf("segment %0d lookup result idx %0d dist %0d exp %0d %0d",
                    seg, r[5:0], r[31:16], m.best_idx, m.best_dist));
  endtask

  initial begin
    logic [31:0] r;
    longint iss_prev;
    checks = 0; failures = 0; done = 0; rst_n = 0;
    m = new();
    build_program();
    repeat (3) @(posedge clk); rst_n = 1;
    // memory image
    for (int e = 0; e < N * K; e++) begin
      for (int w = 0; w < WPE; w++) begin
        logic [31:0] v;
        v = (e / K < NPROTO) ? $urandom : 32'h0;
        m.mem[e][w*32 +: 32] = v;
        apb.write(32'h0020_0000 + 4 * (e * WPE + w), v);
      end
    end
    foreach (prog[i]) apb.write(32'h0010_0000 + 4 * i, 32'(prog[i]));
    apb.read(32'h0010_0000 + 4 * 4, r);
    check(r[25:0] == prog[4], "program read-back");
    // inputs for all runs
    for (int s = 0; s < RUNS * NCHARS * ((PROG == 0) ? 1 : (PROG == 2) ? 5 : K); s++) begin
      logic [15:0] v;
      v = (PROG == 0) ? 16'($urandom_range(0, 26)) : 16'($urandom_range(0, 127));
      dut_q.push_back(v); iss_q.push_back(v);
    end
    iss_prev = 0;
    apb.write(32'h0, 32'h1);    // RUN
    counting = 1;
    for (int seg = 0; seg < RUNS; seg++) begin
      m.run(prog, iss_q);
      wait (irq);
      counting = 0;
      irqs++;
      check(dut_cycles == m.cycles - iss_prev,
            $sformatf("segment %0d cycles %0d exp %0d", seg, dut_cycles, m.cycles - iss_prev));
      apb.read(32'h4, r);
      check(r[0] == 1'b1, "STATUS shows pending interrupt");
      compare_state(seg);
      iss_prev = m.cycles;
      dut_cycles = 0;
      counting = 1;
      apb.write(32'h8, 32'h1);  // clear interrupt
      m.resume();
    end
    counting = 0;
    // every mechanism the program uses must have happened
    check(m.n_loop_back > 0, "hardware loop back-edge");
    check(m.n_search > 0, "associative lookup");
    check(m.n_intr_taken > 0 && irqs > 0, "interrupt raised");
    check(m.n_intr_skipped > 0, "interrupt condition not met");
    check(m.n_bundle > 0, "bundling");
    check(m.n_ext > 0, "external input consumed");
    check(stalls > 0, "stall waiting for input");
    if (PROG != 2) check(m.n_sm > 0, "similarity manipulator");
    check(m.n_mix > 0, "MIX instruction");
    if (PROG == 1) begin
      check(m.n_pidx > 0, "part index counter");
      check(m.n_inv > 0, "inverse permutation");
      check(m.n_evict > 0, "counter eviction");
    end
    $display("driver D=%0d K=%0d N=%0d prog=%0d: loops=%0d searches=%0d irq=%0d skipped=%0d bundles=%0d ext=%0d stalls=%0d sm=%0d mix=%0d pidx=%0d inv=%0d evict=%0d",
             D, K, N, PROG, m.n_loop_back, m.n_search, m.n_intr_taken, m.n_intr_skipped, m.n_bundle,
             m.n_ext, stalls, m.n_sm, m.n_mix, m.n_pidx, m.n_inv, m.n_evict);
    done = 1;
  end
endmodule
