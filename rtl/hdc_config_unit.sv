// hdc_config_unit -- APB slave through which a host sets up and watches the
// accelerator.
//
// The paper shows an APB access port into a configuration unit that writes
// the algorithm storage and has 32-bit read/write access to the associative
// memory; the register map below is this design's own. PADDR[21:20] picks a
// region, PADDR[19:2] is a word offset in it:
//   region 0, registers
//     word 0 CTRL      rw  bit 0 RUN: 1 runs the microcode from address 0,
//                          0 holds the control unit at address 0
//     word 1 STATUS    ro  bit 0 interrupt pending, bit 1 running,
//                          bits 25:16 program counter
//     word 2 IRQ_CLR   wo  writing bit 0 = 1 clears the pending interrupt
//     word 3 RESULT    ro  bits 5:0 index, bits 31:16 Hamming distance of
//                          the last associative lookup
//   region 1, algorithm storage: word i = instruction i (bits 25:0)
//   region 2, associative memory: word w = bits 32*(w mod (D/K/32)) +: 32 of
//                                 entry w div (D/K/32), entry = row*K + part
// Every transfer completes without wait states (PREADY = 1). An access
// outside the implemented words answers PSLVERR = 1 and changes nothing.
// Write side effects happen in the access phase; read data is driven
// combinationally during the access phase.
module hdc_config_unit
  import hdc_pkg::*;
#(
  parameter int unsigned DEPTH    = ALGO_DEPTH_DEF,
  parameter int unsigned AM_WORDS = N_DEF * D_DEF / 32,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(AM_WORDS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // APB
  input  logic [31:0]   paddr_i,
  input  logic          psel_i,
  input  logic          penable_i,
  input  logic          pwrite_i,
  input  logic [31:0]   pwdata_i,
  output logic [31:0]   prdata_o,
  output logic          pready_o,
  output logic          pslverr_o,
  // control
  output logic          run_o,
  output logic          irq_clear_o,
  input  logic          irq_i,
  input  logic          busy_i,
  input  logic [9:0]    pc_i,
  input  logic [5:0]    res_idx_i,
  input  logic [15:0]   res_dist_i,
  // algorithm storage
  output logic          algo_we_o,
  output logic [AW-1:0] algo_addr_o,
  output instr_t        algo_wdata_o,
  input  instr_t        algo_rdata_i,
  // associative memory word port
  output logic          am_we_o,
  output logic [CW-1:0] am_addr_o,
  output logic [31:0]   am_wdata_o,
  input  logic [31:0]   am_rdata_i
);
  logic        access, wr, valid;
  logic [1:0]  region;
  logic [17:0] word;

  assign access = psel_i && penable_i;
  assign wr     = access && pwrite_i;
  assign region = paddr_i[21:20];
  assign word   = paddr_i[19:2];

  always_comb begin
    unique case (region)
      2'd0:    valid = (word < 18'd4);
      2'd1:    valid = (32'(word) < DEPTH);
      2'd2:    valid = (32'(word) < AM_WORDS);
      default: valid = 1'b0;
    endcase
  end

  assign pready_o  = 1'b1;
  assign pslverr_o = access && !valid;

  assign algo_we_o    = wr && valid && region == 2'd1;
  assign algo_addr_o  = AW'(word);
  assign algo_wdata_o = pwdata_i[INSTR_W-1:0];
  assign am_we_o      = wr && valid && region == 2'd2;
  assign am_addr_o    = CW'(word);
  assign am_wdata_o   = pwdata_i;
  assign irq_clear_o  = wr && valid && region == 2'd0 && word == 18'd2 && pwdata_i[0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                                          run_o <= 1'b0;
    else if (wr && valid && region == 2'd0 && word == '0) run_o <= pwdata_i[0];
  end

  always_comb begin
    prdata_o = '0;
    if (access && !pwrite_i && valid) begin
      unique case (region)
        2'd0: unique case (word[1:0])
          2'd0:    prdata_o = {31'd0, run_o};
          2'd1:    prdata_o = {6'd0, pc_i, 14'd0, busy_i, irq_i};
          2'd2:    prdata_o = '0;
          default: prdata_o = {res_dist_i, 10'd0, res_idx_i};
        endcase
        2'd1:    prdata_o = 32'(algo_rdata_i);
        default: prdata_o = am_rdata_i;
      endcase
    end
  end

  // APB: the access phase follows a setup phase with the same select.
  logic setup_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) setup_q <= 1'b0;
    else         setup_q <= psel_i && !penable_i;
  end
  always_ff @(posedge clk_i) begin
    if (rst_ni) begin
      assert (!penable_i || psel_i)
        else $error("hdc_config_unit: PENABLE without PSEL");
      assert (!setup_q || (psel_i && penable_i))
        else $error("hdc_config_unit: setup phase not followed by access phase");
    end
  end
endmodule
