// hdc_algo_storage -- the configuration memory that holds the microcode.
//
// DEPTH words of 26 bits. The host writes it through the configuration unit
// (one word per clock on we_i); the control unit fetches from it with a
// combinational read at its program counter, so an instruction is available
// in the cycle its address is presented. A second read path returns words to
// the host. Like the vector memory it is a standard-cell memory without
// reset. The paper states that all its example algorithms need fewer than
// 64 instructions; the default depth of 64 is taken from that remark.
module hdc_algo_storage
  import hdc_pkg::*;
#(
  parameter int unsigned DEPTH = ALGO_DEPTH_DEF,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  instr_t        wdata_i,
  input  logic [AW-1:0] host_raddr_i,
  output instr_t        host_rdata_o,
  input  logic [AW-1:0] fetch_addr_i,
  output instr_t        fetch_data_o
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  assign host_rdata_o = mem[host_raddr_i];
  assign fetch_data_o = mem[fetch_addr_i];
endmodule
