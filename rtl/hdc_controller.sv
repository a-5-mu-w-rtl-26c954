// hdc_controller -- control unit that executes the microcode stream.
//
// While run_i is high the unit fetches the word at its program counter from
// the algorithm storage (combinational read) and executes it:
//  * NISC instruction (bit 25 = 0): one cycle. Its fields drive the encoder
//    multiplexers and enables directly; RIDX / WIDX select the memory rows,
//    and the part index counter is appended as the low part of the address
//    (entry = row*K + part). If the similarity manipulator takes its word
//    from the external input (SMEN and SMSEL set) the instruction waits for
//    a valid input word (ext_valid_i / ext_ready_o handshake).
//  * MIX: one cycle loading the serializer (immediate, part index or
//    external input), n mixing cycles on the encoder register, one closing
//    cycle: n + 2 cycles, as the paper's "MIX_EXT 5 # 5+2 cycles".
//  * AM_SEARCH: starts the lookup and retires in its done cycle
//    (max_idx*K + 2 cycles, the paper's "nr_classes + 2 cycles" for K = 1).
//  * INTR: one cycle if the last lookup misses either threshold. Otherwise
//    it raises irq_o and waits until the host clears it, so the program
//    continues only after the host has seen the result (the paper: the
//    program restarts "after the host processor clears the pending
//    interrupt").
//  * LOOP: pushes one of three nested hardware loops: 10-bit iteration
//    count and 10-bit end address. The end address is the first
//    instruction after the body, the label position in the paper's listing.
//    A count of 0 skips the body.
//  * JMP, PIDX (clear / increment / decrement the part index counter),
//    SMREG (load the internal similarity manipulator word), NOP.
// CISC opcode values, operand layout, the handshake, loop-end convention and
// stalling INTR are this design's choices; the paper names the operations
// and their operands. When run_i is low the unit is held at address 0 with
// no loop active and the interrupt cleared.
module hdc_controller
  import hdc_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned DEPTH = ALGO_DEPTH_DEF,
  localparam int unsigned E  = N * K,
  localparam int unsigned EW = (E > 1) ? $clog2(E) : 1,
  localparam int unsigned RW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned PW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  run_i,
  // algorithm storage
  output logic [AW-1:0]         pc_o,
  input  instr_t                instr_i,
  // encoder
  output enc_ctrl_t             enc_ctrl_o,
  output logic [PW-1:0]         pidx_o,
  output logic [SM_IN_W-1:0]    sm_reg_o,
  // external input handshake
  input  logic                  ext_valid_i,
  output logic                  ext_ready_o,
  // associative memory
  output logic [EW-1:0]         am_rd_addr_o,
  output logic                  am_wr_en_o,
  output logic [EW-1:0]         am_wr_addr_o,
  output logic                  search_start_o,
  output logic [IDX_W-1:0]      search_max_o,
  input  logic                  search_done_i,
  output logic [DIST_THR_W-1:0] dist_thr_o,
  output logic [IDX_W-1:0]      idx_thr_o,
  input  logic                  irq_cond_i,
  // host
  input  logic                  irq_clear_i,
  output logic                  irq_o,
  output logic                  busy_o
);
  typedef enum logic [2:0] {S_EXEC, S_MIX, S_MIXEND, S_SEARCH, S_INTR} state_e;

  typedef struct packed {
    logic [AW-1:0]         start;
    logic [ADDR_W-1:0]     end_addr;
    logic [LOOP_CNT_W-1:0] count;
  } loop_t;

  state_e         state;
  logic [AW-1:0]  pc;
  logic [PW-1:0]  pidx;
  logic [4:0]     mix_left;
  loop_t          loops [NUM_LOOPS];
  logic [1:0]     sp;     // number of active loops

  nisc_t nisc;
  cisc_t cisc;
  assign nisc = nisc_t'(instr_i);
  assign cisc = cisc_t'(instr_i);

  // Decoded operands.
  logic [IDX_W-1:0]      op_max_idx, op_idx_thr;
  mix_src_e              op_mix_src;
  logic [4:0]            op_mix_n;
  logic [15:0]           op_mix_imm;
  logic [DIST_THR_W-1:0] op_dist_thr;
  logic [LOOP_CNT_W-1:0] op_loop_cnt;
  logic [ADDR_W-1:0]     op_addr;
  logic [1:0]            op_pidx;

  assign op_max_idx  = cisc.operand[IDX_W-1:0];
  assign op_mix_src  = mix_src_e'(cisc.operand[21:20]);
  assign op_mix_n    = {1'b0, cisc.operand[19:16]} + 5'd1;
  assign op_mix_imm  = cisc.operand[15:0];
  assign op_dist_thr = cisc.operand[21:6];
  assign op_idx_thr  = cisc.operand[5:0];
  assign op_loop_cnt = cisc.operand[19:10];
  assign op_addr     = cisc.operand[9:0];
  assign op_pidx     = cisc.operand[1:0];

  // Control decisions of the current cycle.
  logic retire;       // instruction completes, move to next address
  logic jump;         // retire to jump_target instead of the sequential one
  logic [AW-1:0] jump_target;
  logic push_loop;

  // Sequential successor with hardware-loop handling.
  logic [AW-1:0] seq_pc, next_pc;
  logic          loop_back, loop_pop;
  loop_t         top;

  assign seq_pc = pc + 1'b1;
  assign top    = loops[(sp == 2'd0) ? 2'd0 : sp - 2'd1];

  always_comb begin
    loop_back = 1'b0;
    loop_pop  = 1'b0;
    if (sp != 2'd0 && ADDR_W'(seq_pc) == top.end_addr) begin
      if (top.count > LOOP_CNT_W'(1)) loop_back = 1'b1;
      else                            loop_pop  = 1'b1;
    end
  end

  always_comb begin
    if (jump)           next_pc = jump_target;
    else if (loop_back) next_pc = top.start;
    else                next_pc = seq_pc;
  end

  always_comb begin
    enc_ctrl_o          = '0;
    enc_ctrl_o.encsel   = ENC_ZERO;
    enc_ctrl_o.op       = OP_PASS;
    enc_ctrl_o.ser_src  = MIX_IMM;
    ext_ready_o         = 1'b0;
    am_wr_en_o          = 1'b0;
    search_start_o      = 1'b0;
    retire              = 1'b0;
    jump                = 1'b0;
    jump_target         = '0;
    push_loop           = 1'b0;

    if (run_i) begin
      unique case (state)
        S_EXEC: begin
          if (!instr_i[INSTR_W-1]) begin
            // NISC
            enc_ctrl_o.encsel = encsel_e'(nisc.encsel[1:0]);
            enc_ctrl_o.smen   = nisc.smen;
            enc_ctrl_o.smsel  = nisc.smsel;
            enc_ctrl_o.mxen   = nisc.mxen;
            enc_ctrl_o.mxinv  = nisc.mxinv;
            enc_ctrl_o.mxsel  = nisc.mxsel;
            enc_ctrl_o.op     = nisc.op;
            ext_ready_o       = nisc.smen && nisc.smsel;
            if (!ext_ready_o || ext_valid_i) begin
              enc_ctrl_o.en     = 1'b1;
              enc_ctrl_o.bnden  = nisc.bnden;
              enc_ctrl_o.bndrst = nisc.bndrst;
              am_wr_en_o        = nisc.wben;
              retire            = 1'b1;
            end
          end else begin
            unique case (cisc.opcode)
              CI_SEARCH: search_start_o = 1'b1;
              CI_MIX: begin
                enc_ctrl_o.ser_src = op_mix_src;
                enc_ctrl_o.ser_imm = op_mix_imm;
                ext_ready_o        = (op_mix_src == MIX_EXT);
                enc_ctrl_o.ser_load = !ext_ready_o || ext_valid_i;
              end
              CI_INTR: retire = !irq_cond_i;
              CI_LOOP: begin
                retire    = 1'b1;
                push_loop = (op_loop_cnt != '0);
                if (op_loop_cnt == '0) begin
                  jump        = 1'b1;
                  jump_target = AW'(op_addr);
                end
              end
              CI_JMP: begin
                retire      = 1'b1;
                jump        = 1'b1;
                jump_target = AW'(op_addr);
              end
              default: retire = 1'b1;  // PIDX, SMREG, NOP
            endcase
          end
        end
        S_MIX: begin
          enc_ctrl_o.en          = 1'b1;
          enc_ctrl_o.encsel      = ENC_REG;
          enc_ctrl_o.mxen        = 1'b1;
          enc_ctrl_o.mx_from_ser = 1'b1;
          enc_ctrl_o.op          = OP_PASS;
          enc_ctrl_o.ser_shift   = 1'b1;
        end
        S_MIXEND: retire = 1'b1;
        S_SEARCH: retire = search_done_i;
        default:  retire = irq_clear_i;  // S_INTR
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state    <= S_EXEC;
      pc       <= '0;
      pidx     <= '0;
      mix_left <= '0;
      sp       <= '0;
      irq_o    <= 1'b0;
      sm_reg_o <= '0;
      for (int i = 0; i < NUM_LOOPS; i++) loops[i] <= '0;
    end else if (!run_i) begin
      state <= S_EXEC;
      pc    <= '0;
      sp    <= '0;
      irq_o <= 1'b0;
    end else begin
      // State transitions of the multi-cycle instructions.
      unique case (state)
        S_EXEC: if (instr_i[INSTR_W-1]) begin
          unique case (cisc.opcode)
            CI_SEARCH: state <= S_SEARCH;
            CI_MIX: if (enc_ctrl_o.ser_load) begin
              state    <= S_MIX;
              mix_left <= op_mix_n;
            end
            CI_INTR: if (irq_cond_i) begin
              state <= S_INTR;
              irq_o <= 1'b1;
            end
            CI_PIDX: unique case (op_pidx)
              2'd0:    pidx <= '0;
              2'd1:    pidx <= pidx + 1'b1;
              2'd2:    pidx <= pidx - 1'b1;
              default: ;
            endcase
            CI_SMREG: sm_reg_o <= cisc.operand[SM_IN_W-1:0];
            default: ;
          endcase
        end
        S_MIX: begin
          mix_left <= mix_left - 1'b1;
          if (mix_left == 5'd1) state <= S_MIXEND;
        end
        S_MIXEND: state <= S_EXEC;
        S_SEARCH: if (search_done_i) state <= S_EXEC;
        default: if (irq_clear_i) begin  // S_INTR
          state <= S_EXEC;
          irq_o <= 1'b0;
        end
      endcase

      // Program counter and loop stack.
      if (retire) begin
        pc <= next_pc;
        if (push_loop && 32'(sp) < NUM_LOOPS) begin
          loops[sp] <= '{start: seq_pc, end_addr: op_addr, count: op_loop_cnt};
          sp        <= sp + 1'b1;
        end else if (!jump && loop_back) begin
          loops[sp-2'd1].count <= top.count - 1'b1;
        end else if (!jump && loop_pop) begin
          sp <= sp - 1'b1;
        end
      end
    end
  end

  assign pc_o         = pc;
  assign pidx_o       = pidx;
  assign busy_o       = run_i;
  assign search_max_o = op_max_idx;
  assign dist_thr_o   = op_dist_thr;
  assign idx_thr_o    = op_idx_thr;
  assign am_rd_addr_o = EW'(32'(nisc.ridx[RW-1:0]) * K + 32'(pidx));
  assign am_wr_addr_o = EW'(32'(nisc.widx[RW-1:0]) * K + 32'(pidx));

  // At most three loops may be active.
  always_ff @(posedge clk_i) begin
    if (rst_ni && run_i && push_loop && retire)
      assert (32'(sp) < NUM_LOOPS) else $error("hdc_controller: hardware loop stack overflow");
  end
endmodule
