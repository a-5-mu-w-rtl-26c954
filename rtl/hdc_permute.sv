// hdc_permute -- hardwired random bit permutation of a W-bit vector.
//
// Pure wiring, no logic: forward mode gives y[i] = x[p(i)], inverse mode
// gives y[p(i)] = x[i], where p is the bijective hash hdc_pkg::perm_idx
// with wiring seed SEED. The two modes with the same seed undo each other.
// W must be a power of two. Combinational.
module hdc_permute #(
  parameter int unsigned W       = 2048,
  parameter int unsigned SEED    = 11,
  parameter bit          INVERSE = 1'b0
) (
  input  logic [W-1:0] x_i,
  output logic [W-1:0] y_o
);
  localparam int unsigned LW = (W > 1) ? $clog2(W) : 1;

  for (genvar i = 0; i < W; i++) begin : g_wire
    localparam int unsigned P = hdc_pkg::perm_idx(i, SEED, LW);
    if (INVERSE) begin : g_inv
      assign y_o[P] = x_i[i];
    end else begin : g_fwd
      assign y_o[i] = x_i[P];
    end
  end

  initial begin
    assert ((1 << LW) == W) else $error("hdc_permute: W must be a power of two");
  end
endmodule
