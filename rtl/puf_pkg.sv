// puf_pkg -- constants and types shared by the RISecure-PUF functional unit.
//
// The unit adds two R-type instructions to a RISC-V core under the custom-1
// major opcode 0101011: inner_puf_init (funct3 001, funct7 0, rs2 field 0) and
// outer_puf_chal (funct3 010, funct7 0). These encodings and the meaning of the
// 2-bit output selector E (00: raw strong-PUF response R1, 01: error-corrected
// weak-PUF response R2, 10: hashed response R3) follow the paper. Everything
// else here is this design's choice: a 64-bit register width, the layout of
// the PUF index, challenge and E inside rs1, four PUFs, 32-bit challenges and
// a fuzzy extractor built from four BCH(15,7,t=2) codewords, which makes the
// raw response 60 bits (fits in one register as helper data) and the stable
// response 28 bits.
//
// rs1 layout (both instructions):
//   [CW-1:0]            challenge (C0 for inner_puf_init, C for outer_puf_chal)
//   [RS1_IDX_LSB +: 8]  PUF index; bits above IDXW must be zero
//   [63:62]             E[1:0] (outer_puf_chal only; ignored by inner_puf_init)
// rs2 (outer_puf_chal): helper data aux in bits [RW-1:0].
package puf_pkg;

  parameter int unsigned XLEN    = 64;
  parameter int unsigned CW      = 32;               // challenge width (C and C0)
  parameter int unsigned NUM_PUF = 4;                // PUF instances behind "sel"
  parameter int unsigned IDXW    = (NUM_PUF > 1) ? $clog2(NUM_PUF) : 1;

  // BCH(15,7) double-error-correcting code, generator g(x) = x^8+x^7+x^6+x^4+1
  parameter int unsigned BCH_N = 15;
  parameter int unsigned BCH_K = 7;
  parameter int unsigned BCH_P = BCH_N - BCH_K;      // parity bits
  parameter int unsigned BCH_T = 2;
  parameter logic [BCH_P:0] BCH_G = 9'b1_1101_0001;
  parameter int unsigned NBLK  = 4;                  // codewords per response
  parameter int unsigned RW    = NBLK * BCH_N;       // raw response / aux width (60)
  parameter int unsigned KW    = NBLK * BCH_K;       // stable response R2 width (28)

  // Instruction encoding (Table of the ISE)
  parameter logic [6:0] OPC_PUF  = 7'b0101011;
  parameter logic [2:0] F3_INIT  = 3'b001;
  parameter logic [2:0] F3_CHAL  = 3'b010;
  parameter logic [6:0] F7_PUF   = 7'b0000000;

  // rs1 field positions
  parameter int unsigned RS1_IDX_LSB = 32;
  parameter int unsigned RS1_IDX_W   = 8;
  parameter int unsigned RS1_E_LSB   = 62;

  typedef struct packed {
    logic [6:0] funct7;
    logic [4:0] rs2;
    logic [4:0] rs1;
    logic [2:0] funct3;
    logic [4:0] rd;
    logic [6:0] opcode;
  } rtype_t;

  typedef enum logic [1:0] {
    OP_NONE    = 2'd0,   // not a PUF instruction
    OP_INIT    = 2'd1,   // inner_puf_init
    OP_CHAL    = 2'd2,   // outer_puf_chal
    OP_ILLEGAL = 2'd3    // PUF opcode, bad funct3/funct7/rs2 field
  } puf_op_e;

  // Output selector E[1:0]
  typedef enum logic [1:0] {
    E_STRONG = 2'b00,    // R1: raw response to challenge C
    E_WEAK   = 2'b01,    // R2: corrected response, no challenge
    E_HASH   = 2'b10,    // R3 = Hash(R2 || C), PUF driven by C0
    E_RSVD   = 2'b11
  } puf_mode_e;

endpackage
