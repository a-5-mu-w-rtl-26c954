// hdc_serializer -- 16-bit shift register feeding the mixer select bit.
//
// The MIX instruction maps a binary word w to a pseudo-random item vector by
// applying pi_0 or pi_1 once per bit of w (Eq. 1 of the design: LSB first).
// The serializer holds w: `load` captures `load_val`, each `shift` moves the
// register one position towards the LSB, and `bit_o` is always the current
// LSB, i.e. the select of the mixing cycle in progress. Load wins over shift.
// Width 16 follows the published encoder diagram; shifting in zeros and LSB
// first order are this design's choices. One clock per operation, active-low
// asynchronous reset to zero.
module hdc_serializer #(
  parameter int unsigned W = hdc_pkg::SER_W
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         load_i,
  input  logic [W-1:0] load_val_i,
  input  logic         shift_i,
  output logic         bit_o,
  output logic [W-1:0] value_o
);
  logic [W-1:0] q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      q <= '0;
    else if (load_i)  q <= load_val_i;
    else if (shift_i) q <= {1'b0, q[W-1:1]};
  end

  assign bit_o   = q[0];
  assign value_o = q;
endmodule
