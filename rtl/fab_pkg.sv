// fab_pkg: constants and types shared by the FAB accelerator.
//
// Holds the default sizes of the design (54-bit RNS limbs, N = 2^16
// coefficients per limb, 256 functional-unit lanes, 32 moduli), the
// identifiers of the on-chip memories and the instruction word that the
// control logic executes. The sizes follow the paper's parameter set
// (log q = 54, N = 2^16, L = 23, dnum = 3, 256 functional units, 32 HBM
// AXI ports). The instruction encoding and memory identifiers are this
// design's own choice: the paper does not describe an instruction set.
package fab_pkg;

  localparam int unsigned LOGQ      = 54;     // limb width (Table 2)
  localparam int unsigned LOGN      = 16;     // N = 2^16 (Table 2)
  localparam int unsigned LANES     = 256;    // functional units
  localparam int unsigned NMOD      = 32;     // 24 original + 8 extension moduli
  localparam int unsigned SHIFTS    = 6;      // Algorithm 1, line 1
  localparam int unsigned MADD_N    = 63;     // 2^SHIFTS - 1 madd entries
  localparam int unsigned MUL_LAT   = 12;     // integer multiply latency
  localparam int unsigned RED_LAT   = 12;     // modular reduction latency
  localparam int unsigned ADD_LAT   = 7;      // modular add / sub latency
  // functional-unit lane: multiply+reduce, then add/sub
  localparam int unsigned FU_LAT    = MUL_LAT + RED_LAT + ADD_LAT;

  typedef logic [LOGQ-1:0] coef_t;

  // On-chip memories addressed by the control logic.
  typedef enum logic [3:0] {
    MEM_URAM_C0A  = 4'd0,  // URAM c0 bank-1 (limbs 0..15 of c0)
    MEM_URAM_C0B  = 4'd1,  // URAM c0 bank-2
    MEM_URAM_C1A  = 4'd2,  // URAM c1 bank-1
    MEM_URAM_C1B  = 4'd3,  // URAM c1 bank-2
    MEM_URAM_MISC = 4'd4,  // twiddles, keys, plaintexts
    MEM_BRAM_C0   = 4'd5,  // extension limbs (dual port)
    MEM_BRAM_C1   = 4'd6,
    MEM_BRAM_MISC = 4'd7,  // key blocks / temporaries
    MEM_RF        = 4'd8   // register-file polynomial slots
  } mem_id_e;

  localparam int unsigned NUM_BANKS = 8;  // memories 0..7; RF is separate

  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_ADD   = 4'd1,   // dst = A + B
    OP_SUB   = 4'd2,   // dst = A - B
    OP_MUL   = 4'd3,   // dst = A * B
    OP_MAC   = 4'd4,   // dst = dst + A * B
    OP_SMUL  = 4'd5,   // dst = A * s
    OP_SMAC  = 4'd6,   // dst = dst + A * s
    OP_NTT   = 4'd7,   // in-place transform of an RF slot (bit-reversed in)
    OP_PERM  = 4'd8,   // automorph / bit-reverse A into an RF slot
    OP_LOAD  = 4'd9,   // HBM -> bank
    OP_STORE = 4'd10,  // bank -> HBM
    OP_TX    = 4'd11,  // bank -> Ethernet
    OP_RX    = 4'd12,  // Ethernet -> bank
    OP_WAIT  = 4'd13,  // wait until a background load has finished
    OP_HALT  = 4'd15
  } op_e;

  // PERM modes (aux[7:6]); aux[5:0] selects the rotation entry.
  localparam logic [1:0] PERM_AUTO   = 2'd0;
  localparam logic [1:0] PERM_BITREV = 2'd1;
  localparam logic [1:0] PERM_BOTH   = 2'd2;

  typedef struct packed {
    op_e          op;
    logic         async;     // LOAD only: run in the background
    logic [3:0]   dst_mem;
    logic [4:0]   dst_poly;
    logic [3:0]   a_mem;
    logic [4:0]   a_poly;
    logic [3:0]   b_mem;
    logic [4:0]   b_poly;
    logic [4:0]   limb;      // modulus index
    logic [15:0]  sidx;      // scalar index in the register file
    logic [31:0]  aux;       // HBM row address, twiddle row, perm mode
  } instr_t;                 // 86 bits

  localparam int unsigned INSTR_W = $bits(instr_t);

endpackage
