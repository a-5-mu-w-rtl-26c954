// hdc_accelerator -- top level of the configurable hyperdimensional computing
// accelerator (binary spatter code, D-bit vectors, vector fold K).
//
// Three parts, wired as in the paper's overview diagram:
//  * the HD encoder, a combinational pipeline (input stage, similarity
//    manipulator, mixer, D/K encoder units with bundle counters) that maps
//    low-dimensional input words to hypervectors and transforms vectors,
//  * the associative memory, N rows of D bits that hold class prototypes,
//    the encoder's scratchpad vectors and, in the last row, the search
//    vector, with row-sequential Hamming-distance lookup,
//  * the control path: a 64-word algorithm storage with 26-bit microcode,
//    the control unit that executes it, and an APB configuration unit.
// The encoder reads the memory through the read port (ENCSEL = AM) and
// writes its result through the write port (WBEN); the lookup result and
// the INTR thresholds decide the interrupt line irq_o.
// External input: a 16-bit word with a valid/ready handshake, consumed by
// NISC instructions that feed the similarity manipulator from outside and by
// MIX with the external source. All logic is in one clock domain with an
// active-low asynchronous reset.
module hdc_accelerator
  import hdc_pkg::*;
#(
  parameter int unsigned D          = D_DEF,
  parameter int unsigned K          = K_DEF,
  parameter int unsigned N          = N_DEF,
  parameter int unsigned ALGO_DEPTH = ALGO_DEPTH_DEF
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // APB configuration port
  input  logic [31:0]       paddr_i,
  input  logic              psel_i,
  input  logic              penable_i,
  input  logic              pwrite_i,
  input  logic [31:0]       pwdata_i,
  output logic [31:0]       prdata_o,
  output logic              pready_o,
  output logic              pslverr_o,
  // low-dimensional input values
  input  logic [SER_W-1:0]  in_data_i,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  // wake-up interrupt
  output logic              irq_o
);
  localparam int unsigned W        = D / K;
  localparam int unsigned E        = N * K;
  localparam int unsigned EW       = (E > 1) ? $clog2(E) : 1;
  localparam int unsigned PW       = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned AW       = $clog2(ALGO_DEPTH);
  localparam int unsigned AM_WORDS = N * D / 32;
  localparam int unsigned CW       = $clog2(AM_WORDS);
  localparam int unsigned DW       = $clog2(D + 1);

  // control unit <-> rest
  logic                  run, irq_clear, busy;
  logic [AW-1:0]         pc;
  instr_t                instr;
  enc_ctrl_t             enc_ctrl;
  logic [PW-1:0]         pidx;
  logic [SM_IN_W-1:0]    sm_reg;
  logic [EW-1:0]         am_rd_addr, am_wr_addr;
  logic                  am_wr_en;
  logic                  s_start, s_busy, s_done, irq_cond;
  logic [IDX_W-1:0]      s_max, idx_thr, best_idx;
  logic [DIST_THR_W-1:0] dist_thr;
  logic [DW-1:0]         best_dist;

  // datapath
  logic [W-1:0] am_rd_data, enc_q, wb_data;

  // configuration port
  logic          algo_we, cfg_am_we;
  logic [AW-1:0] algo_addr;
  instr_t        algo_wdata, algo_rdata;
  logic [CW-1:0] cfg_am_addr;
  logic [31:0]   cfg_am_wdata, cfg_am_rdata;

  hdc_config_unit #(.DEPTH(ALGO_DEPTH), .AM_WORDS(AM_WORDS)) i_cfg (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .paddr_i      (paddr_i),
    .psel_i       (psel_i),
    .penable_i    (penable_i),
    .pwrite_i     (pwrite_i),
    .pwdata_i     (pwdata_i),
    .prdata_o     (prdata_o),
    .pready_o     (pready_o),
    .pslverr_o    (pslverr_o),
    .run_o        (run),
    .irq_clear_o  (irq_clear),
    .irq_i        (irq_o),
    .busy_i       (busy),
    .pc_i         (10'(pc)),
    .res_idx_i    (best_idx),
    .res_dist_i   (16'(best_dist)),
    .algo_we_o    (algo_we),
    .algo_addr_o  (algo_addr),
    .algo_wdata_o (algo_wdata),
    .algo_rdata_i (algo_rdata),
    .am_we_o      (cfg_am_we),
    .am_addr_o    (cfg_am_addr),
    .am_wdata_o   (cfg_am_wdata),
    .am_rdata_i   (cfg_am_rdata)
  );

  hdc_algo_storage #(.DEPTH(ALGO_DEPTH)) i_algo (
    .clk_i        (clk_i),
    .we_i         (algo_we),
    .waddr_i      (algo_addr),
    .wdata_i      (algo_wdata),
    .host_raddr_i (algo_addr),
    .host_rdata_o (algo_rdata),
    .fetch_addr_i (pc),
    .fetch_data_o (instr)
  );

  hdc_controller #(.N(N), .K(K), .DEPTH(ALGO_DEPTH)) i_ctrl (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .run_i          (run),
    .pc_o           (pc),
    .instr_i        (instr),
    .enc_ctrl_o     (enc_ctrl),
    .pidx_o         (pidx),
    .sm_reg_o       (sm_reg),
    .ext_valid_i    (in_valid_i),
    .ext_ready_o    (in_ready_o),
    .am_rd_addr_o   (am_rd_addr),
    .am_wr_en_o     (am_wr_en),
    .am_wr_addr_o   (am_wr_addr),
    .search_start_o (s_start),
    .search_max_o   (s_max),
    .search_done_i  (s_done),
    .dist_thr_o     (dist_thr),
    .idx_thr_o      (idx_thr),
    .irq_cond_i     (irq_cond),
    .irq_clear_i    (irq_clear),
    .irq_o          (irq_o),
    .busy_o         (busy)
  );

  hdc_encoder #(.W(W)) i_enc (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .ctrl_i     (enc_ctrl),
    .am_rd_i    (am_rd_data),
    .ext_data_i (in_data_i),
    .pidx_i     (SER_W'(pidx)),
    .sm_reg_i   (sm_reg),
    .enc_q_o    (enc_q),
    .wb_data_o  (wb_data)
  );

  hdc_assoc_mem #(.N(N), .W(W), .K(K)) i_am (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .rd_addr_i      (am_rd_addr),
    .rd_data_o      (am_rd_data),
    .wr_en_i        (am_wr_en),
    .wr_addr_i      (am_wr_addr),
    .wr_data_i      (wb_data),
    .cfg_we_i       (cfg_am_we),
    .cfg_addr_i     (cfg_am_addr),
    .cfg_wdata_i    (cfg_am_wdata),
    .cfg_rdata_o    (cfg_am_rdata),
    .search_start_i (s_start),
    .search_max_i   (s_max),
    .search_busy_o  (s_busy),
    .search_done_o  (s_done),
    .best_idx_o     (best_idx),
    .best_dist_o    (best_dist),
    .dist_thr_i     (dist_thr),
    .idx_thr_i      (idx_thr),
    .irq_cond_o     (irq_cond)
  );
endmodule
