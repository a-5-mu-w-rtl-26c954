// hdc_assoc_mem -- the associative memory: vector storage plus lookup logic.
//
// Wraps hdc_scm and hdc_am_lookup. While a lookup runs it owns the memory
// read port; otherwise the read port serves the HD encoder (combinational
// read of entry rd_addr_i). The write port stores the encoder result; the
// 32-bit word port gives the host access to any stored vector. The rows
// below the AM_SEARCH limit hold class prototypes, the rows above it serve
// the encoder as scratchpad, and the last row is the search vector.
module hdc_assoc_mem
  import hdc_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned W = D_DEF / K_DEF,
  parameter int unsigned K = K_DEF,
  localparam int unsigned E   = N * K,
  localparam int unsigned EW  = (E > 1) ? $clog2(E) : 1,
  localparam int unsigned CW  = $clog2(E * (W / 32)),
  localparam int unsigned DW  = $clog2(W * K + 1)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [EW-1:0]         rd_addr_i,
  output logic [W-1:0]          rd_data_o,
  input  logic                  wr_en_i,
  input  logic [EW-1:0]         wr_addr_i,
  input  logic [W-1:0]          wr_data_i,
  input  logic                  cfg_we_i,
  input  logic [CW-1:0]         cfg_addr_i,
  input  logic [31:0]           cfg_wdata_i,
  output logic [31:0]           cfg_rdata_o,
  input  logic                  search_start_i,
  input  logic [IDX_W-1:0]      search_max_i,
  output logic                  search_busy_o,
  output logic                  search_done_o,
  output logic [IDX_W-1:0]      best_idx_o,
  output logic [DW-1:0]         best_dist_o,
  input  logic [DIST_THR_W-1:0] dist_thr_i,
  input  logic [IDX_W-1:0]      idx_thr_i,
  output logic                  irq_cond_o
);
  localparam int unsigned PW = (K > 1) ? $clog2(K) : 1;

  logic [EW-1:0] lk_addr, mem_rd_addr;
  logic [PW-1:0] s_part;
  logic [W-1:0]  s_data, mem_rd_data;

  assign mem_rd_addr = search_busy_o ? lk_addr : rd_addr_i;
  assign rd_data_o   = mem_rd_data;

  hdc_scm #(.N(N), .W(W), .K(K)) i_scm (
    .clk_i         (clk_i),
    .rd_addr_i     (mem_rd_addr),
    .rd_data_o     (mem_rd_data),
    .wr_en_i       (wr_en_i),
    .wr_addr_i     (wr_addr_i),
    .wr_data_i     (wr_data_i),
    .cfg_we_i      (cfg_we_i),
    .cfg_addr_i    (cfg_addr_i),
    .cfg_wdata_i   (cfg_wdata_i),
    .cfg_rdata_o   (cfg_rdata_o),
    .search_part_i (s_part),
    .search_data_o (s_data)
  );

  hdc_am_lookup #(.N(N), .W(W), .K(K)) i_lookup (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .start_i       (search_start_i),
    .max_idx_i     (search_max_i),
    .busy_o        (search_busy_o),
    .done_o        (search_done_o),
    .rd_addr_o     (lk_addr),
    .rd_data_i     (mem_rd_data),
    .search_part_o (s_part),
    .search_data_i (s_data),
    .best_idx_o    (best_idx_o),
    .best_dist_o   (best_dist_o),
    .dist_thr_i    (dist_thr_i),
    .idx_thr_i     (idx_thr_i),
    .irq_cond_o    (irq_cond_o)
  );
endmodule
