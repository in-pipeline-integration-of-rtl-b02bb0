// dimc_pkg: constants and types shared by the DIMC vector lane.
//
// The numbers below are the tile's organisation: four sub-arrays (P) of 32 rows (J)
// by 256 bitcells, forming 32 logical kernel rows of 1024 bits; a 1024-bit feature
// buffer in four 256-bit sectors; 24-bit partial sums; VLEN = 64-bit vector registers.
// The instruction layout follows the four custom instructions DL.I, DL.M, DC.P and
// DC.F (custom-0 opcode). The funct3 values and the meaning of the 3-bit width field
// (precision and signedness) are this design's own choice; the field positions are
// the published ones.
package dimc_pkg;

  // Tile organisation
  localparam int unsigned P       = 4;     // sub-arrays
  localparam int unsigned J       = 32;    // rows per sub-array = logical kernel rows
  localparam int unsigned COLS    = 256;   // bitcells per sub-array row
  localparam int unsigned ROW_W   = P * COLS;  // 1024-bit logical row
  localparam int unsigned PS_W    = 24;    // partial-sum width
  localparam int unsigned ROW_AW  = $clog2(J);
  localparam int unsigned SA_AW   = $clog2(P);
  localparam int unsigned MM_AW   = SA_AW + ROW_AW;   // memory-mapped address {sub-array,row}

  // Vector core
  localparam int unsigned VLEN    = 64;
  localparam int unsigned NVREGS  = 32;
  localparam int unsigned VR_AW   = 5;
  localparam int unsigned GRP     = COLS / VLEN;      // registers per 256-bit sector = 4

  // Encoding
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  typedef enum logic [2:0] {
    F3_DLI = 3'b000,
    F3_DLM = 3'b001,
    F3_DCP = 3'b010,
    F3_DCF = 3'b011
  } dimc_f3_e;

  typedef enum logic [1:0] {
    PREC_4B = 2'b00,
    PREC_2B = 2'b01,
    PREC_1B = 2'b10
  } prec_e;

  typedef enum logic [2:0] {
    OP_NONE = 3'd0,
    OP_DLI  = 3'd1,
    OP_DLM  = 3'd2,
    OP_DCP  = 3'd3,
    OP_DCF  = 3'd4
  } dimc_op_e;

  // Decoded custom instruction
  typedef struct packed {
    dimc_op_e          op;        // OP_NONE: not a DIMC instruction
    logic              illegal;   // custom-0 but malformed
    logic [2:0]        nvec;      // DL: number of source registers (1..4)
    logic [GRP-1:0]    mask;      // DL: valid-bit mask, one bit per register
    logic [VR_AW-1:0]  vs1;
    logic [VR_AW-1:0]  vd;        // DC only
    logic [1:0]        sec;       // DL: 256-bit sector
    logic [ROW_AW-1:0] m_row;     // DL.M, DC
    logic              src_half;  // DC: half of vs1 holding the partial-sum input
    logic              dst_half;  // DC: half of vd receiving the result
    logic [1:0]        bidx;      // DC.F: byte inside the half
    prec_e             prec;      // DC: precision
    logic              is_signed; // DC: signed operands
  } dimc_dec_t;

  // Valid source-register mask of a DL: register k is used when k < nvec and mask[k]
  function automatic logic [GRP-1:0] dl_chunk_mask(input logic [2:0] nvec,
                                                   input logic [GRP-1:0] mask);
    logic [GRP-1:0] m;
    for (int k = 0; k < GRP; k++) m[k] = (k < int'(nvec)) && mask[k];
    return m;
  endfunction

endpackage
