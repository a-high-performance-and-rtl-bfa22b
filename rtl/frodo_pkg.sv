// frodo_pkg: types and constants shared by the FrodoKEM processor.
//
// Holds the three parameter sets (n, D, B, CDF tables), the eight-instruction
// set (HIA, HOS, MBR, MBW, MUL, ENC, DEC, CMP), the 48-bit instruction word
// and the memory map of the two banks. The parameter-set numbers and the
// instruction names follow the FrodoKEM specification and the processor's
// instruction table; the bit encoding of the instruction, the field layout and
// the base addresses in the memory map are this design's own choices.
package frodo_pkg;

  // ---------------------------------------------------------------- levels
  typedef enum logic [1:0] {
    LVL_640  = 2'd0,
    LVL_976  = 2'd1,
    LVL_1344 = 2'd2
  } level_e;

  localparam int unsigned NBAR   = 8;     // fixed inner dimension
  localparam int unsigned N_MAX  = 1344;  // largest n
  localparam int unsigned CDF_LEN = 13;   // comparators per CDF datapath

  function automatic logic [10:0] level_n(level_e l);
    case (l)
      LVL_976:  return 11'd976;
      LVL_1344: return 11'd1344;
      default:  return 11'd640;
    endcase
  endfunction

  // log2(q)
  function automatic logic [4:0] level_d(level_e l);
    return (l == LVL_640) ? 5'd15 : 5'd16;
  endfunction

  // message bits per matrix entry
  function automatic logic [2:0] level_b(level_e l);
    case (l)
      LVL_976:  return 3'd3;
      LVL_1344: return 3'd4;
      default:  return 3'd2;
    endcase
  endfunction

  // SHAKE128 for level 1, SHAKE256 otherwise (Gen always uses SHAKE128)
  function automatic logic level_shake256(level_e l);
    return l != LVL_640;
  endfunction

  // CDF tables T_chi of the FrodoKEM specification, padded with 32767
  // (a comparison t > 32767 is never true for a 15-bit t).
  function automatic logic [14:0] cdf_entry(level_e l, int unsigned z);
    logic [14:0] t640  [CDF_LEN] = '{15'd4643, 15'd13363, 15'd20579, 15'd25843,
                                    15'd29227, 15'd31145, 15'd32103, 15'd32525,
                                    15'd32689, 15'd32745, 15'd32762, 15'd32766,
                                    15'd32767};
    logic [14:0] t976  [CDF_LEN] = '{15'd5638, 15'd15915, 15'd23689, 15'd28571,
                                    15'd31116, 15'd32217, 15'd32613, 15'd32731,
                                    15'd32760, 15'd32766, 15'd32767, 15'd32767,
                                    15'd32767};
    logic [14:0] t1344 [CDF_LEN] = '{15'd9142, 15'd23462, 15'd30338, 15'd32361,
                                    15'd32725, 15'd32765, 15'd32767, 15'd32767,
                                    15'd32767, 15'd32767, 15'd32767, 15'd32767,
                                    15'd32767};
    case (l)
      LVL_976:  return t976[z];
      LVL_1344: return t1344[z];
      default:  return t640[z];
    endcase
  endfunction

  // ----------------------------------------------------------- instructions
  typedef enum logic [2:0] {
    OP_HIA = 3'd0,  // hash input absorption
    OP_HOS = 3'd1,  // hash output squeezing
    OP_MBR = 3'd2,  // matrix block read (preload)
    OP_MBW = 3'd3,  // matrix block write (write-back)
    OP_MUL = 3'd4,  // one innermost-loop pass of the multiplier array
    OP_ENC = 3'd5,  // message encoding
    OP_DEC = 3'd6,  // message decoding
    OP_CMP = 3'd7   // ciphertext consistency check
  } opcode_e;

  // Flag bits, meaning depends on the opcode (see README):
  //  HIA: [0] first block (clear state)  [1] last word (pad)  [2] 2-byte row
  //       index prefix  [3] 1-byte 0x5F prefix  [4] packed matrix source
  //  HOS: [2:0] destination (hos_dst_e)  [3] transposed matrix / odd A row
  //  MBR/MUL/MBW: [0] MA mode  [1] subtract  [2] left operand transposed
  //       [3] left operand is an A buffer  [4] column block j / identity
  typedef logic [4:0] flags_t;

  typedef enum logic [2:0] {
    DST_RAW  = 3'd0,  // 64-bit words to the auxiliary area
    DST_A    = 3'd1,  // uniform 16-bit entries to an A-buffer row
    DST_S    = 3'd2,  // sampled, 8-bit, S^T / S' layout
    DST_E    = 3'd3,  // sampled, 16-bit, row-major matrix
    DST_ET   = 3'd4   // sampled, 16-bit, stored transposed (E')
  } hos_dst_e;

  typedef struct packed {
    opcode_e      op;     // 3
    flags_t       fl;     // 5
    logic [1:0]   part;   // A-buffer partition (two rows of A each)
    logic         bank;   // memory bank of the main operand
    logic [10:0]  base;   // base word address in that bank
    logic [11:0]  idx;    // block row index / row number / second address
    logic [13:0]  cnt;    // words, beats or elements to process
  } instr_t;              // 48 bits

  localparam int unsigned INSTR_W = $bits(instr_t);

  // Function units seen by the dispatch unit (six, Fig. 7 of the design notes)
  typedef enum logic [2:0] {
    FN_HASH = 3'd0, FN_MBR = 3'd1, FN_MUL = 3'd2,
    FN_MBW  = 3'd3, FN_EDU = 3'd4, FN_CMP = 3'd5
  } func_e;
  localparam int unsigned N_FUNC = 6;

  function automatic func_e op_func(opcode_e op);
    case (op)
      OP_HIA, OP_HOS: return FN_HASH;
      OP_MBR:         return FN_MBR;
      OP_MUL:         return FN_MUL;
      OP_MBW:         return FN_MBW;
      OP_ENC, OP_DEC: return FN_EDU;
      default:        return FN_CMP;
    endcase
  endfunction

  // ------------------------------------------------------------ memory map
  localparam int unsigned RAM_W      = 32;     // width of one RAM block
  localparam int unsigned BANK0_DEPTH = 2048;  // space E (1344) + space S (672) + aux
  localparam int unsigned BANK1_DEPTH = 1536;  // space E' (1344) + aux
  localparam int unsigned AW         = 11;
  localparam logic [10:0] S_BASE     = 11'd1344; // space S in bank 0
  localparam logic [10:0] AUX0_BASE  = 11'd2016; // small matrices in bank 0
  localparam logic [10:0] AUX1_BASE  = 11'd1344; // byte strings in bank 1

endpackage
