// hdc_pkg -- shared constants, types and hardwired-wiring functions of the
// HDC accelerator.
//
// The accelerator works on binary spatter code hypervectors of D bits that
// are processed in K subparts of D/K bits ("vector fold"). This package holds:
//  * the 26-bit microcode format. Bit 25 tells the two instruction classes
//    apart. For a NISC (datapath) instruction it is the top bit of the 3-bit
//    ENCSEL field, which therefore only takes the values 0..3; the other
//    fields sit at the positions of the published bit field. A CISC
//    (multi-cycle) instruction has bit 25 set, a 3-bit opcode in bits
//    24:22 and a 22-bit operand field. The CISC opcode values and operand
//    layout are this design's own choice.
//  * the encoder-unit operation codes (the paper gives a 3-bit OP field but
//    no encoding; the list below is this design's choice),
//  * constant functions that define the hardwired random permutations and
//    the random seed vector. Each permutation is a bijective integer hash on
//    log2(width) bits (multiply by an odd constant, add, xor-shift, all
//    modulo 2^n), so it is a true permutation of a power-of-two width and
//    its inverse is the same wiring read in the other direction.
package hdc_pkg;

  // Paper defaults: 32 x 2048 bit associative memory, vector fold 1.
  localparam int unsigned D_DEF        = 2048;
  localparam int unsigned K_DEF        = 1;
  localparam int unsigned N_DEF        = 32;
  localparam int unsigned CNT_W        = 5;    // bundle counter width
  localparam int unsigned SER_W        = 16;   // serializer width
  localparam int unsigned SM_IN_W      = 7;    // similarity manipulator word
  localparam int unsigned SM_UNARY_W   = 128;  // thermometer code width
  localparam int unsigned INSTR_W      = 26;
  localparam int unsigned IDX_W        = 6;    // RIDX / WIDX field width
  localparam int unsigned ADDR_W       = 10;   // loop / jump address immediates
  localparam int unsigned LOOP_CNT_W   = 10;   // loop iteration immediate
  localparam int unsigned NUM_LOOPS    = 3;    // nested hardware loops
  localparam int unsigned ALGO_DEPTH_DEF = 64;
  localparam int unsigned DIST_THR_W   = 16;   // INTR distance threshold field

  typedef logic [INSTR_W-1:0] instr_t;

  // Input stage sources (ENCSEL values).
  typedef enum logic [1:0] {
    ENC_ZERO = 2'd0,
    ENC_SEED = 2'd1,
    ENC_AM   = 2'd2,
    ENC_REG  = 2'd3
  } encsel_e;

  // Encoder unit operations (OP field).
  typedef enum logic [2:0] {
    OP_PASS   = 3'd0,  // reg <= x
    OP_XOR    = 3'd1,  // reg <= x ^ reg      (bind)
    OP_AND    = 3'd2,  // reg <= x & reg
    OP_OR     = 3'd3,  // reg <= x | reg
    OP_NOT    = 3'd4,  // reg <= ~x
    OP_THRESH = 3'd5,  // reg <= (counter > 0) (majority of the bundle)
    OP_EVICT  = 3'd6,  // reg <= counter MSB, counter rotates left by one
    OP_LOAD   = 3'd7   // counter <= {counter[3:0], x}, reg <= x
  } enc_op_e;

  // NISC instruction fields, bit 25 down to bit 0.
  typedef struct packed {
    logic [2:0]       encsel;  // [25:23], encsel[2] = 0 for NISC
    logic             smen;    // [22]
    logic             smsel;   // [21] 1: external input, 0: internal register
    logic             mxen;    // [20]
    logic             mxinv;   // [19]
    logic             mxsel;   // [18]
    enc_op_e          op;      // [17:15]
    logic             bnden;   // [14]
    logic             bndrst;  // [13]
    logic             wben;    // [12]
    logic [IDX_W-1:0] ridx;    // [11:6]
    logic [IDX_W-1:0] widx;    // [5:0]
  } nisc_t;

  typedef enum logic [2:0] {
    CI_SEARCH = 3'd0,  // AM_SEARCH  operand[5:0]  = maximum index (exclusive)
    CI_MIX    = 3'd1,  // MIX        operand[21:20]= source, [19:16] = bits-1, [15:0] = immediate
    CI_INTR   = 3'd2,  // INTR       operand[21:6] = distance threshold, [5:0] = index threshold
    CI_LOOP   = 3'd3,  // LOOP       operand[19:10]= iterations, [9:0] = end address
    CI_JMP    = 3'd4,  // JMP        operand[9:0]  = target address
    CI_PIDX   = 3'd5,  // PIDX       operand[1:0]  = 0 clear, 1 increment, 2 decrement
    CI_SMREG  = 3'd6,  // SMREG      operand[6:0]  = similarity manipulator immediate
    CI_NOP    = 3'd7
  } cisc_op_e;

  typedef struct packed {
    logic        cisc;     // [25] = 1
    cisc_op_e    opcode;   // [24:22]
    logic [21:0] operand;  // [21:0]
  } cisc_t;

  typedef enum logic [1:0] {
    MIX_IMM  = 2'd0,
    MIX_PIDX = 2'd1,
    MIX_EXT  = 2'd2
  } mix_src_e;

  // Per-cycle control of the encoder datapath, driven by the control unit.
  typedef struct packed {
    logic        en;        // update encoder register / counters this cycle
    encsel_e     encsel;
    logic        smen;
    logic        smsel;
    logic        mxen;
    logic        mxinv;
    logic        mxsel;
    logic        mx_from_ser; // take mixer select from the serializer (MIX)
    enc_op_e     op;
    logic        bnden;
    logic        bndrst;
    logic        ser_load;
    mix_src_e    ser_src;
    logic [SER_W-1:0] ser_imm;
    logic        ser_shift;
  } enc_ctrl_t;

  // Bijective hash on n bits used as hardwired random wiring.
  function automatic int unsigned perm_idx(int unsigned i, int unsigned seed, int unsigned nbits);
    longint unsigned x, mask;
    int unsigned     s;
    mask = (longint'(1) << nbits) - 1;
    s    = (nbits > 1) ? (nbits + 1) / 2 : 1;
    x    = longint'(i) & mask;
    for (int r = 0; r < 3; r++) begin
      x = (x * (longint'(2 * (seed * 7919 + r * 104729) + 1))) & mask;
      x = (x + longint'(seed * 40503 + r * 2654435)) & mask;
      if (nbits > 1) x = (x ^ (x >> s)) & mask;
    end
    return int'(x);
  endfunction

  // One pseudo-random bit per index (seed vector).
  function automatic logic seed_bit(int unsigned i);
    int unsigned x;
    x = i * 32'h9E3779B1 + 32'h7F4A7C15;
    x = x ^ (x >> 15);
    x = x * 32'h85EBCA6B;
    x = x ^ (x >> 13);
    return x[16];
  endfunction

  // Wiring seeds of the hardwired permutations.
  localparam int unsigned PI0_SEED = 11;
  localparam int unsigned PI1_SEED = 23;
  localparam int unsigned SM_SEED  = 37;

endpackage
