// tb_hdc_iss_pkg -- instruction-level golden model of the accelerator for
// the end-to-end testbenches. It executes the microcode on its own copy of
// the memory, encoder register, bundle counters, serializer value, part
// index, loop stack and lookup result, consuming external input words from
// a queue, and counts the clock cycles each instruction takes (NISC 1,
// MIX n+2, AM_SEARCH max*K+2, INTR 1). run() stops at an INTR whose
// condition holds, as the hardware does.
package tb_hdc_iss_pkg;
  import hdc_pkg::*;
  import tb_hdc_ref_pkg::*;

  class iss #(int W = 256, int K = 1, int N = 16);
    typedef ref_model #(W) rm;
    typedef logic [W-1:0] vec_t;
    vec_t mem [N*K];
    vec_t rq;
    int   cnt [W];
    int   pidx, smreg, pc, sp;
    int   l_start [3], l_end [3], l_cnt [3];
    int   best_idx, best_dist;
    longint cycles;
    // event counters
    int n_mix, n_search, n_intr_taken, n_intr_skipped, n_loop_back, n_bundle, n_ext, n_evict,
        n_load, n_sm, n_inv, n_pidx;

    function new();
      rq = '0; pidx = 0; smreg = 0; pc = 0; sp = 0; cycles = 0;
      best_idx = 0; best_dist = (1 << $clog2(W * K + 1)) - 1;
      foreach (cnt[i]) cnt[i] = 0;
      n_mix = 0; n_search = 0; n_intr_taken = 0; n_intr_skipped = 0; n_loop_back = 0;
      n_bundle = 0; n_ext = 0; n_evict = 0; n_load = 0; n_sm = 0; n_inv = 0; n_pidx = 0;
    endfunction

    function int pmask();
      return K - 1;
    endfunction

    function void next_seq();
      int s;
      s = pc + 1;
      if (sp > 0 && s == l_end[sp-1]) begin
        if (l_cnt[sp-1] > 1) begin l_cnt[sp-1]--; pc = l_start[sp-1]; n_loop_back++; return; end
        sp--;
      end
      pc = s;
    endfunction

    // Executes from pc until an INTR with a true condition (left at that pc).
    function void run(instr_t prog [], ref logic [15:0] inq [$]);
      int guard;
      guard = 0;
      forever begin
        instr_t ins;
        guard++;
        if (guard > 1000000) begin $display("ISS: runaway"); return; end
        ins = prog[pc];
        if (!ins[25]) begin
          nisc_t n;
          vec_t iv, sv, mv, res;
          int ea, wa;
          n = nisc_t'(ins);
          ea = (int'(n.ridx) % N) * K + pidx;
          wa = (int'(n.widx) % N) * K + pidx;
          case (n.encsel[1:0])
            2'd0: iv = '0;
            2'd1: iv = rm::seed();
            2'd2: iv = mem[ea];
            default: iv = rq;
          endcase
          if (n.smen) begin
            int wv;
            n_sm++;
            if (n.smsel) begin wv = int'(inq.pop_front() & 16'h7f); n_ext++; end
            else wv = smreg;
            sv = rm::sm(iv, 1'b1, wv);
          end else sv = iv;
          if (n.mxen && n.mxinv) n_inv++;
          mv = rm::mix(sv, n.mxen, n.mxinv, n.mxsel);
          for (int i = 0; i < W; i++) begin
            logic [4:0] c5;
            c5 = 5'(cnt[i]);
            case (n.op)
              OP_PASS:   res[i] = mv[i];
              OP_XOR:    res[i] = mv[i] ^ rq[i];
              OP_AND:    res[i] = mv[i] & rq[i];
              OP_OR:     res[i] = mv[i] | rq[i];
              OP_NOT:    res[i] = !mv[i];
              OP_THRESH: res[i] = cnt[i] > 0;
              OP_EVICT:  res[i] = c5[4];
              default:   res[i] = mv[i];
            endcase
            if (n.bndrst) cnt[i] = 0;
            else if (n.op == OP_EVICT) begin c5 = {c5[3:0], c5[4]}; cnt[i] = $signed(c5); end
            else if (n.op == OP_LOAD)  begin c5 = {c5[3:0], mv[i]}; cnt[i] = $signed(c5); end
            else if (n.bnden) begin
              if (res[i] && cnt[i] < 15) cnt[i]++;
              else if (!res[i] && cnt[i] > -16) cnt[i]--;
            end
          end
          if (n.bnden) n_bundle++;
          if (n.op == OP_EVICT) n_evict++;
          if (n.op == OP_LOAD) n_load++;
          rq = res;
          if (n.wben) mem[wa] = res;
          cycles++;
          next_seq();
        end else begin
          cisc_t c;
          c = cisc_t'(ins);
          case (c.opcode)
            CI_SEARCH: begin
              int m;
              m = int'(c.operand[5:0]);
              best_idx = 0; best_dist = (1 << $clog2(W * K + 1)) - 1;
              for (int r = 0; r < m; r++) begin
                int d;
                d = 0;
                for (int p = 0; p < K; p++) d += $countones(mem[r*K+p] ^ mem[(N-1)*K+p]);
                if (d < best_dist) begin best_dist = d; best_idx = r; end
              end
              cycles += m * K + 2; n_search++;
              next_seq();
            end
            CI_MIX: begin
              int n, v;
              n = int'(c.operand[19:16]) + 1;
              case (c.operand[21:20])
                2'd1: v = pidx;
                2'd2: begin v = int'(inq.pop_front()); n_ext++; end
                default: v = int'(c.operand[15:0]);
              endcase
              rq = rm::im_map(rq, v, n);
              cycles += n + 2; n_mix++;
              next_seq();
            end
            CI_INTR: begin
              cycles++;
              if (best_dist <= int'(c.operand[21:6]) && best_idx <= int'(c.operand[5:0])) begin
                n_intr_taken++;
                return;
              end
              n_intr_skipped++;
              next_seq();
            end
            CI_LOOP: begin
              int lc, le;
              lc = int'(c.operand[19:10]); le = int'(c.operand[9:0]);
              cycles++;
              if (lc == 0) pc = le;
              else begin
                l_start[sp] = pc + 1; l_end[sp] = le; l_cnt[sp] = lc; sp++;
                pc = pc + 1;
              end
            end
            CI_JMP: begin cycles++; pc = int'(c.operand[9:0]); end
            CI_PIDX: begin
              case (c.operand[1:0])
                2'd0: pidx = 0;
                2'd1: pidx = (pidx + 1) & pmask();
                2'd2: pidx = (pidx - 1) & pmask();
                default: ;
              endcase
              n_pidx++;
              cycles++; next_seq();
            end
            CI_SMREG: begin smreg = int'(c.operand[6:0]); cycles++; next_seq(); end
            default: begin cycles++; next_seq(); end
          endcase
        end
      end
    endfunction

    // continue after the host cleared a taken interrupt
    function void resume();
      next_seq();
    endfunction
  endclass
endpackage
