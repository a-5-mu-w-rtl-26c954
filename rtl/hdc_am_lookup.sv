// hdc_am_lookup -- row-sequential associative lookup and interrupt compare.
//
// On start_i the unit scans rows 0 .. max_idx_i-1 (the AM_SEARCH immediate;
// rows at or above it are scratchpad and are skipped). Each cycle it reads
// one subpart of one row through the memory read port, XORs it with the same
// subpart of the search vector (the last memory row), counts the ones with a
// shared W-bit adder tree and accumulates the count over the K subparts of
// the row. After the last subpart the row's Hamming distance is compared
// with the best so far; a strictly smaller distance replaces the result
// register (index and distance), so on a tie the lower index is kept.
// Timing: the start cycle, max_idx*K scan cycles, and one cycle with done_o
// high: max_idx*K + 2 cycles, matching the "nr_classes + 2 cycles" the paper
// gives for K = 1. With max_idx 0 the result is index 0, distance all-ones.
// The interrupt condition compares the stored result with the thresholds
// given by the INTR instruction: it holds when distance <= dist_thr_i and
// index <= idx_thr_i (the paper: no interrupt if the distance or the index is
// higher than its threshold).
module hdc_am_lookup
  import hdc_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned W = D_DEF / K_DEF,
  parameter int unsigned K = K_DEF,
  localparam int unsigned E  = N * K,
  localparam int unsigned EW = (E > 1) ? $clog2(E) : 1,
  localparam int unsigned PW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned DW = $clog2(W * K + 1),
  localparam int unsigned CW = $clog2(W + 1)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  start_i,
  input  logic [IDX_W-1:0]      max_idx_i,
  output logic                  busy_o,
  output logic                  done_o,
  output logic [EW-1:0]         rd_addr_o,
  input  logic [W-1:0]          rd_data_i,
  output logic [PW-1:0]         search_part_o,
  input  logic [W-1:0]          search_data_i,
  output logic [IDX_W-1:0]      best_idx_o,
  output logic [DW-1:0]         best_dist_o,
  input  logic [DIST_THR_W-1:0] dist_thr_i,
  input  logic [IDX_W-1:0]      idx_thr_i,
  output logic                  irq_cond_o
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e           state;
  logic [IDX_W-1:0] row, max_idx;
  logic [PW-1:0]    part;
  logic [DW-1:0]    acc, row_dist;
  logic [CW-1:0]    pc;

  hdc_popcount #(.W(W)) i_pop (.x_i(rd_data_i ^ search_data_i), .cnt_o(pc));

  assign row_dist = acc + DW'(pc);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state       <= S_IDLE;
      row         <= '0;
      part        <= '0;
      acc         <= '0;
      max_idx     <= '0;
      best_idx_o  <= '0;
      best_dist_o <= '1;
    end else begin
      unique case (state)
        S_IDLE: if (start_i) begin
          row         <= '0;
          part        <= '0;
          acc         <= '0;
          max_idx     <= max_idx_i;
          best_idx_o  <= '0;
          best_dist_o <= '1;
          state       <= (max_idx_i == '0) ? S_DONE : S_RUN;
        end
        S_RUN: begin
          if (32'(part) == K - 1) begin
            if (row_dist < best_dist_o) begin
              best_dist_o <= row_dist;
              best_idx_o  <= row;
            end
            acc  <= '0;
            part <= '0;
            row  <= row + 1'b1;
            if (row + 1'b1 == max_idx) state <= S_DONE;
          end else begin
            acc  <= row_dist;
            part <= part + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o        = (state != S_IDLE);
  assign done_o        = (state == S_DONE);
  assign rd_addr_o     = EW'(32'(row) * K + 32'(part));
  assign search_part_o = part;
  assign irq_cond_o    = (32'(best_dist_o) <= 32'(dist_thr_i)) && (best_idx_o <= idx_thr_i);

  // The search must not be restarted while it runs.
  always_ff @(posedge clk_i) begin
    if (rst_ni) assert (!(busy_o && start_i)) else $error("hdc_am_lookup: start while busy");
  end
endmodule
