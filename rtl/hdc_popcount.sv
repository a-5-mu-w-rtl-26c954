// hdc_popcount -- number of set bits of a W-bit vector. Combinational.
//
// A balanced adder tree: the input is padded with zeros to the next power of
// two P, level 0 holds the P single bits, and every further level adds
// neighbouring pairs of the level below, so level log2(P) holds the total.
// All sums are carried at the final width; synthesis removes the constant
// upper bits of the lower levels. The associative lookup shares one tree for
// all memory rows and uses it on one D/K-bit part per cycle.
module hdc_popcount #(
  parameter int unsigned W  = 2048,
  localparam int unsigned CW = $clog2(W + 1),
  localparam int unsigned L  = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned P  = 1 << L
) (
  input  logic [W-1:0]  x_i,
  output logic [CW-1:0] cnt_o
);
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    logic [CW-1:0] s [P >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < P; i++) begin : g_bit
        if (i < W) begin : g_in
          assign s[i] = CW'(x_i[i]);
        end else begin : g_pad
          assign s[i] = '0;
        end
      end
    end else begin : g_add
      for (genvar i = 0; i < (P >> l); i++) begin : g_sum
        assign s[i] = g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
  end

  assign cnt_o = g_lvl[L].s[0];
endmodule
