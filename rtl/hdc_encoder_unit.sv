// hdc_encoder_unit -- one bit slice of the encoder's bit-wise stage.
//
// Holds one bit of the encoder register and one 5-bit saturating up/down
// bundle counter, as the paper describes. Each enabled cycle the unit
// computes a result from the mixer output bit x and its register bit
// according to OP (pass, XOR = bind, AND, OR, NOT, threshold of the counter,
// counter evict, counter load) and stores it in the register. With BNDEN the
// same result is bundled: the counter counts up for a 1 and down for a 0,
// saturating at +15 / -16 (two's complement). BNDRST returns the counter to
// its initial value 0 and takes precedence.
// Bit-serial counter state transfer (the paper: one cycle per counter bit):
// OP_EVICT outputs the counter MSB and rotates the counter left by one, so
// five evictions emit it MSB first and leave it unchanged; OP_LOAD shifts
// the input bit in at the LSB, so five loads MSB first restore a value.
// The op encoding, the threshold rule (counter > 0, a tie gives 0) and the
// rotate-based eviction are this design's choices.
// d_o is the combinational next register value (the write-back data).
module hdc_encoder_unit
  import hdc_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    en_i,
  input  enc_op_e op_i,
  input  logic    x_i,
  input  logic    bnden_i,
  input  logic    bndrst_i,
  output logic    q_o,
  output logic    d_o,
  output logic [CNT_W-1:0] cnt_o
);
  localparam logic signed [CNT_W-1:0] CMAX = {1'b0, {(CNT_W-1){1'b1}}};
  localparam logic signed [CNT_W-1:0] CMIN = {1'b1, {(CNT_W-1){1'b0}}};

  logic                    q;
  logic signed [CNT_W-1:0] cnt, cnt_d;
  logic                    res;

  always_comb begin
    unique case (op_i)
      OP_PASS:   res = x_i;
      OP_XOR:    res = x_i ^ q;
      OP_AND:    res = x_i & q;
      OP_OR:     res = x_i | q;
      OP_NOT:    res = ~x_i;
      OP_THRESH: res = (cnt > 0);
      OP_EVICT:  res = cnt[CNT_W-1];
      default:   res = x_i;  // OP_LOAD
    endcase
  end

  always_comb begin
    cnt_d = cnt;
    if (bndrst_i)                  cnt_d = '0;
    else if (op_i == OP_EVICT)     cnt_d = {cnt[CNT_W-2:0], cnt[CNT_W-1]};
    else if (op_i == OP_LOAD)      cnt_d = {cnt[CNT_W-2:0], x_i};
    else if (bnden_i) begin
      if (res && cnt != CMAX)      cnt_d = cnt + 1'b1;
      else if (!res && cnt != CMIN) cnt_d = cnt - 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      q   <= 1'b0;
      cnt <= '0;
    end else if (en_i) begin
      q   <= res;
      cnt <= cnt_d;
    end
  end

  assign q_o   = q;
  assign d_o   = res;
  assign cnt_o = cnt;
endmodule
