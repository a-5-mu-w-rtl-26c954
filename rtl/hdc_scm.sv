// hdc_scm -- vector storage of the associative memory.
//
// N rows of D bits, each stored as K subparts of W = D/K bits, i.e. N*K
// entries addressed entry = row*K + part. Three access paths, as drawn in
// the published memory diagram:
//  * a read port (combinational read, rd_addr_i -> rd_data_o) feeding the
//    HD encoder or the lookup logic,
//  * a write port (wr_en_i, one entry per clock) taking the encoder result,
//  * a 32-bit word port for the host (cfg_*), word address = entry*(W/32) +
//    word; a host write takes effect on the same clock as an encoder write
//    and wins on overlapping bits,
//  * the hardwired search-vector output: the subpart search_part_i of the
//    last row (N-1).
// The paper builds each row from latch cells behind one glitch-free clock
// gate driven by the one-hot write address. Here a row is an edge-triggered
// register array whose write enable plays the role of the row clock gate;
// the behaviour seen at the ports is the same one-write-per-cycle memory.
// The array is not reset, like a latch array.
module hdc_scm
  import hdc_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned W = D_DEF / K_DEF,
  parameter int unsigned K = K_DEF,
  localparam int unsigned E   = N * K,
  localparam int unsigned EW  = (E > 1) ? $clog2(E) : 1,
  localparam int unsigned WPE = W / 32,
  localparam int unsigned CW  = $clog2(E * WPE),
  localparam int unsigned PW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk_i,
  input  logic [EW-1:0] rd_addr_i,
  output logic [W-1:0]  rd_data_o,
  input  logic          wr_en_i,
  input  logic [EW-1:0] wr_addr_i,
  input  logic [W-1:0]  wr_data_i,
  input  logic          cfg_we_i,
  input  logic [CW-1:0] cfg_addr_i,
  input  logic [31:0]   cfg_wdata_i,
  output logic [31:0]   cfg_rdata_o,
  input  logic [PW-1:0] search_part_i,
  output logic [W-1:0]  search_data_o
);
  logic [W-1:0] mem [E];

  logic [EW-1:0] cfg_entry;
  logic [CW-1:0] cfg_word;

  assign cfg_entry = EW'(cfg_addr_i / CW'(WPE));
  assign cfg_word  = cfg_addr_i % CW'(WPE);

  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
    if (cfg_we_i) mem[cfg_entry][cfg_word*32 +: 32] <= cfg_wdata_i;
  end

  assign rd_data_o     = mem[rd_addr_i];
  assign cfg_rdata_o   = mem[cfg_entry][cfg_word*32 +: 32];
  assign search_data_o = mem[EW'((N - 1) * K) + EW'(search_part_i)];

  initial begin
    assert (W % 32 == 0) else $error("hdc_scm: W must be a multiple of 32");
  end
endmodule
