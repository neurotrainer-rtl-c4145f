// nt_pkg: types and constants shared by the NeuroTrainer logic die.
//
// The accelerator is programmed layer by layer. One layer program holds a
// program for the PMAG on the common data vault, one shared by the PMAGs on
// the independent vaults, and one shared by all processing elements (PEs).
// The structs below are those programs; the iBuffer stores them as packed
// words and the sequencer casts them back.
//
// What follows the paper: 15 PEs with 32 MACs each, 16 vaults, 7-level
// nested 16-bit counters, the counter-source choices of the address decoders
// (r0..r7, p, q), the f(a,b,c,d) / g(s,t) structure, the END-MARK value, the
// PE operation types (MAC or MAX, 16 or 32 bit, with or without stochastic
// rounding). Own choices: the exact bit layout of each program, the linear
// form of f(a,b,c,d) (base plus four programmable strides), the MOVE
// operation of the PE used for data preparation, and the fixed-point
// formats Q4.28 / Q4.12.
package nt_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_VAULT  = 16;   // HMC 1.0 vaults
  localparam int unsigned N_PE     = 15;   // all but one vault carry a PE
  localparam int unsigned N_MAC    = 32;   // k, MACs per PE
  localparam int unsigned WORD_W   = 32;   // vault / bus / PE data word
  localparam int unsigned CNT_W    = 16;   // nested counters are 16 bit
  localparam int unsigned ADDR_W   = 32;   // vault word address
  localparam int unsigned N_LEVELS = 7;    // r1 .. r7

  localparam logic [WORD_W-1:0] END_MARK = 32'hFFFF_FFFF;

  // Fixed point: 4 integer bits (sign included) in both precisions.
  localparam int unsigned FRAC32 = 28;
  localparam int unsigned FRAC16 = 12;

  // ------------------------------------------- PMAG counter source select
  // Sources of the a/b/c/d decoders ("7:1 Decoder" over r1..r5, p, q in the
  // block diagram) widened with r6, r7, r0 and the constants 0 and 1 that
  // the programming tables also use.
  typedef enum logic [3:0] {
    SRC_ZERO = 4'd0,
    SRC_R1   = 4'd1,
    SRC_R2   = 4'd2,
    SRC_R3   = 4'd3,
    SRC_R4   = 4'd4,
    SRC_R5   = 4'd5,
    SRC_R6   = 4'd6,
    SRC_R7   = 4'd7,
    SRC_P    = 4'd8,
    SRC_Q    = 4'd9,
    SRC_R0   = 4'd10,
    SRC_ONE  = 4'd11
  } src_e;

  typedef enum logic [1:0] {
    LUT_NONE  = 2'd0,   // data passes unchanged
    LUT_F     = 2'd1,   // f(x)
    LUT_DF    = 2'd2    // f'(x)
  } lut_mode_e;

  // RD: the nested counters address vault reads whose data go to the PE (or
  //     bus); results coming back are written sequentially from wbase.
  // WR: nothing is read; the counters address the writes of incoming words.
  typedef enum logic {
    PM_RD = 1'b0,
    PM_WR = 1'b1
  } pmag_dir_e;

  typedef struct packed {
    logic                          en;        // this PMAG takes part in the layer
    pmag_dir_e                     dir;
    logic                          oob_zero;  // out-of-range step: 1 emit zero, 0 skip
    lut_mode_e                     lut;
    logic                          lut16;     // LUT on two 16-bit lanes
    logic [CNT_W-1:0]              r0;        // constant register (e.g. pad radius)
    logic [N_LEVELS-1:0][CNT_W-1:0] rmax;     // loop counts R1..R7 (index 0 = R1)
    logic [7:0]                    stride;    // used by g(s,t), g(u,v)
    logic [2:0]                    sel_s, sel_t, sel_u, sel_v; // 0 = r0, n = rn
    src_e                          sel_a, sel_b, sel_c, sel_d;
    logic [ADDR_W-1:0]             base;
    logic [ADDR_W-1:0]             st_a, st_b, st_c, st_d;     // strides of f()
    logic                          rng_en;    // two range comparators in use
    logic                          sel_h;     // 0: r2, 1: r3
    logic                          sel_k;     // 0: r2, 1: r3
    logic signed [CNT_W:0]         hmin, hmax, kmin, kmax;     // strict bounds
    logic [CNT_W-1:0]              win_step;  // h window shift per vault index
    logic [ADDR_W-1:0]             wbase;     // sequential write base (RD mode)
  } pmag_cfg_t;

  // --------------------------------------------------------- PE program
  typedef enum logic [1:0] {
    PE_MAC  = 2'd0,     // y = a x + y
    PE_MAX  = 2'd1,     // y = max(x, y), with ID
    PE_MOVE = 2'd2      // stream from source to destination (data preparation)
  } pe_op_e;

  typedef enum logic [1:0] {
    SW_NORMAL    = 2'd0, // BUF1 address = o*n2i + i
    SW_TRANSPOSE = 2'd1, // BUF1 address = i*n2o + o      (W^T of a matrix)
    SW_REVERSE   = 2'd2  // BUF1 address = n2o*n2i-1-step (flipped kernel)
  } sweep_e;

  typedef struct packed {
    pe_op_e           op;
    logic             prec32;    // 1: one 32-bit pair, 0: two 16-bit pairs
    logic             sr_en;     // stochastic rounding (32-bit mode)
    sweep_e           sweep;     // how CNT2 addresses BUF Input1
    logic             one_row;   // all products go to output row 0 (convolution)
    logic             keep1;     // BUF Input1 loaded once and reused (small common data)
    logic             src2_bus;  // BUF Input2 fed by the bus (else by the vault)
    logic             dst_bus;   // results (or MOVE data) go to the bus (else vault)
    logic [CNT_W-1:0] n2o;       // CNT2 outer range
    logic [CNT_W-1:0] n2i;       // CNT2 inner range
    logic [CNT_W-1:0] n1;        // CNT1 range (rows of BUF Input2 per tile)
    logic [CNT_W-1:0] acc_tiles; // tiles accumulated before the outputs are drained
  } pe_cfg_t;

  // One layer program as stored in the iBuffer.
  typedef struct packed {
    pe_cfg_t   pe;
    pmag_cfg_t ind;   // PMAGs of the independent vaults
    pmag_cfg_t com;   // PMAG of the common data vault
  } layer_prog_t;

  localparam int unsigned PROG_BITS  = $bits(layer_prog_t);
  localparam int unsigned PROG_WORDS = (PROG_BITS + WORD_W - 1) / WORD_W;

endpackage
