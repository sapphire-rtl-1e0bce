// sapphire_pkg: types and constants shared by the Sapphire lattice crypto core.
//
// Holds the datapath width (24-bit coefficients, as in the paper), the list of
// primes that have dedicated reduction circuits with their Barrett constants
// (m, k) and the rejection-sampling scale factors of the paper's Table 3, the
// ALU operation codes, and the 32-bit instruction encoding and memory map.
// The paper names the instructions but does not give their binary format or the
// host address map: both are this design's own and are defined here.
package sapphire_pkg;

  localparam int unsigned W        = 24;   // coefficient / datapath width
  localparam int unsigned LOGN_MAX = 11;   // n <= 2048
  localparam int unsigned CACHE_WORDS = 8192; // 2 banks x 4 SRAMs x 1024

  // ---------------------------------------------------------------------------
  // Modulus modes: 0..11 dedicated primes, 12 configurable Barrett, 13 2^k
  // ---------------------------------------------------------------------------
  localparam int unsigned NPRIMES   = 12;
  localparam logic [3:0]  QM_CONFIG = 4'd12;
  localparam logic [3:0]  QM_POW2   = 4'd13;

  typedef struct packed {
    logic [23:0] q;
    logic [23:0] m;
    logic [5:0]  k;
    logic [3:0]  scale;  // rejection bound factor (Table 3)
  } prime_t;

  function automatic prime_t prime_info(input logic [3:0] sel);
    prime_t p;
    unique case (sel)
      4'd0:  p = '{24'd7681,    24'd273,     6'd21, 4'd1};
      4'd1:  p = '{24'd12289,   24'd10921,   6'd27, 4'd5};
      4'd2:  p = '{24'd40961,   24'd52427,   6'd31, 4'd3};
      4'd3:  p = '{24'd65537,   24'd65535,   6'd32, 4'd7};
      4'd4:  p = '{24'd120833,  24'd71089,   6'd33, 4'd1};
      4'd5:  p = '{24'd133121,  24'd64527,   6'd33, 4'd7};
      4'd6:  p = '{24'd184321,  24'd46603,   6'd33, 4'd11};
      4'd7:  p = '{24'd8380417, 24'd8396807, 6'd46, 4'd1};
      4'd8:  p = '{24'd8058881, 24'd8731825, 6'd46, 4'd1};
      4'd9:  p = '{24'd4205569, 24'd4183069, 6'd44, 4'd7};
      4'd10: p = '{24'd4206593, 24'd2091025, 6'd43, 4'd7};
      4'd11: p = '{24'd8404993, 24'd4186127, 6'd45, 4'd7};
      default: p = '{24'd0, 24'd0, 6'd0, 4'd1};
    endcase
    return p;
  endfunction

  // ---------------------------------------------------------------------------
  // ALU operations
  // ---------------------------------------------------------------------------
  typedef enum logic [3:0] {
    ALU_BF_DIT = 4'd0,  // (a + wb, a - wb)
    ALU_BF_DIF = 4'd1,  // (a + b, (a - b) w)
    ALU_ADD    = 4'd2,
    ALU_SUB    = 4'd3,
    ALU_MUL    = 4'd4,
    ALU_AND    = 4'd5,
    ALU_OR     = 4'd6,
    ALU_XOR    = 4'd7,
    ALU_RSHIFT = 4'd8,
    ALU_LSHIFT = 4'd9,
    ALU_PASSB  = 4'd10
  } alu_op_e;

  // ---------------------------------------------------------------------------
  // Instruction encoding: opcode in [31:27]
  // ---------------------------------------------------------------------------
  typedef enum logic [4:0] {
    OP_NOP       = 5'd0,
    OP_END       = 5'd1,   // stop, raise interrupt
    OP_CONFIG    = 5'd2,   // [26:23] lg n, [22:19] modulus mode
    OP_CLKCFG    = 5'd3,   // [2] keccak, [1] ntt, [0] sampler clock enable
    OP_CREG      = 5'd4,   // [26] c1/c0, [25:24] 0 set 1 add 2 sub, [15:0] imm
    OP_REG_IMM   = 5'd5,   // reg = imm[23:0]
    OP_TMP_IMM   = 5'd6,   // tmp = imm[23:0]
    OP_TMP_OP    = 5'd7,   // tmp = tmp (op [26:24]) reg
    OP_REG_TMP   = 5'd8,   // reg = tmp
    OP_REG_POLY  = 5'd9,   // reg = max/sum/(poly)[idx]
    OP_POLY_REG  = 5'd10,  // (poly)[idx] = reg
    OP_TRANSFORM = 5'd11,  // [26:25] mode, dst, src
    OP_MULT_PSI  = 5'd12,  // [26] inverse, poly in dst field
    OP_SAMPLE    = 5'd13,  // [26:24] type, [23] prng, [15] seed, [14:0] param
    OP_INIT      = 5'd14,
    OP_POLY_COPY = 5'd15,
    OP_POLY_OP   = 5'd16,  // [26:23] poly op
    OP_SHIFT     = 5'd17,  // [26] ring: 0 x^N+1, 1 x^N-1
    OP_EQ_CHECK  = 5'd18,
    OP_INF_NORM  = 5'd19,  // bound = reg
    OP_COMPARE   = 5'd20,  // [26:25] 0 reg 1 tmp 2 c0 3 c1, [23:0] imm
    OP_BRANCH    = 5'd21,  // [26] not-equal, [25:24] flag value, [7:0] target
    OP_SHA3      = 5'd22   // [26:24] sha3 sub-op, [23] 512, [15] seed select
  } opcode_e;

  // poly fields: dst / single poly [22:16], src [15:9]
  typedef enum logic [1:0] {
    TR_DIF_NTT = 2'd0, TR_DIF_INTT = 2'd1, TR_DIT_NTT = 2'd2, TR_DIT_INTT = 2'd3
  } tr_mode_e;

  typedef enum logic [2:0] {
    SM_BIN = 3'd0, SM_CDT = 3'd1, SM_REJ = 3'd2, SM_UNI = 3'd3,
    SM_TRI1 = 3'd4, SM_TRI2 = 3'd5, SM_TRI3 = 3'd6
  } samp_type_e;

  typedef enum logic [3:0] {
    PO_ADD = 4'd0, PO_SUB = 4'd1, PO_MUL = 4'd2, PO_BITREV = 4'd3,
    PO_CADD = 4'd4, PO_CSUB = 4'd5, PO_CMUL = 4'd6, PO_CAND = 4'd7,
    PO_COR = 4'd8, PO_CXOR = 4'd9, PO_CRSHIFT = 4'd10, PO_CLSHIFT = 4'd11
  } poly_op_e;

  typedef enum logic [2:0] {
    SH_INIT = 3'd0, SH_ABS_POLY = 3'd1, SH_ABS_SEED = 3'd2, SH_DIGEST = 3'd3
  } sha3_op_e;

  // flag register values
  localparam logic [1:0] FLAG_LT = 2'b11, FLAG_EQ = 2'b00, FLAG_GT = 2'b01;

  // ---------------------------------------------------------------------------
  // Host memory map (word addresses, 16-bit)
  // ---------------------------------------------------------------------------
  localparam logic [15:0] MM_CACHE  = 16'h0000; // 0x0000-0x1FFF poly cache
  localparam logic [15:0] MM_CONST  = 16'h2000; // 0x2000-0x33FF NTT constants
  localparam logic [15:0] MM_IMEM   = 16'h4000; // 0x4000-0x40FF instructions
  localparam logic [15:0] MM_CDT    = 16'h5000; // 0x5000-0x503F CDT table
  localparam logic [15:0] MM_SEED   = 16'h6000; // 0x6000-0x6007 r0, 0x6008-0x600F r1
  localparam logic [15:0] MM_CTRL   = 16'h7000; // write: start; read: status
  localparam logic [15:0] MM_CFG    = 16'h7001; // [3:0] lg n, [7:4] modulus mode
  localparam logic [15:0] MM_Q      = 16'h7002;
  localparam logic [15:0] MM_M      = 16'h7003;
  localparam logic [15:0] MM_K      = 16'h7004;
  localparam logic [15:0] MM_REG    = 16'h7005; // read reg
  localparam logic [15:0] MM_TMP    = 16'h7006; // read tmp
  localparam logic [15:0] MM_CYCLES = 16'h7007; // read cycle count of last run
  localparam logic [15:0] MM_STAT   = 16'h7008; // 0x7008-0x700D event counters

  // one cache access port
  typedef struct packed {
    logic        en;
    logic        we;
    logic        bank;      // 0 left, 1 right
    logic [11:0] addr;      // linear address within the bank
    logic [23:0] wdata;
  } cache_req_t;

  function automatic logic [10:0] bitrev11(input logic [10:0] x, input logic [3:0] logn);
    logic [10:0] r;
    r = '0;
    for (int b = 0; b < 11; b++)
      if (b < int'(logn)) r[int'(logn) - 1 - b] = x[b];
    return r;
  endfunction

endpackage
