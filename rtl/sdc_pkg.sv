// sdc_pkg: constants, types and small helper functions shared by the
// statically compressed GPU register file.
//
// A thread register of 32 bits is split into eight 4-bit slices; slice i is
// bits [4i+3:4i], and bit i of a slice mask selects slice i (mask "01001100"
// printed most-significant bit first therefore names slices 2, 3 and 6). An
// operand lives in up to two physical registers: its low slices fill the set
// bits of m0 in r0 from the lowest upward, its remaining slices fill the set
// bits of m1 in r1. An indirection-table entry is 32 bits: r0, r1, m0, m1.
//
// Narrow floats follow the bit split of the paper's format table (sign,
// exponent, mantissa for 32/28/24/20/16/12/8 bits) with an IEEE-style bias of
// 2^(E-1)-1. The entry layout, the bias and the physical address mapping are
// choices of this design.
package sdc_pkg;

  localparam int unsigned SLICES     = 8;     // slices per thread register
  localparam int unsigned SLICE_W    = 4;     // bits per slice
  localparam int unsigned TREG_W     = 32;    // thread register width
  localparam int unsigned THREADS    = 32;    // threads per warp
  localparam int unsigned RF_BANKS   = 16;    // register file banks
  localparam int unsigned RF_ROWS    = 64;    // warp registers per bank
  localparam int unsigned NUM_CU     = 16;    // collector units
  localparam int unsigned SRC_OPS    = 3;     // source operands per instruction
  localparam int unsigned ARCH_REGS  = 256;   // architectural registers
  localparam int unsigned IT_BANKS   = 16;    // indirection table banks
  localparam int unsigned WB_WIDTH   = 3;     // writeback bus width (operands)
  localparam int unsigned ISSUE_W    = 2;     // instructions issued per cycle
  localparam int unsigned MAX_WARPS  = 48;    // warps per SM
  localparam int unsigned WID_W      = 6;     // warp id width
  localparam int unsigned PREG_W     = 10;    // physical warp register address
  localparam int unsigned TAG_W      = 32;    // opaque instruction payload

  typedef logic [7:0] reg_id_t;
  typedef logic [SLICES-1:0] slice_mask_t;

  // One indirection table entry (the paper's column order r0, r1, m0, m1).
  typedef struct packed {
    reg_id_t     r0;
    reg_id_t     r1;
    slice_mask_t m0;
    slice_mask_t m1;
  } it_entry_t;

  // A source operand as it arrives from dispatch.
  typedef struct packed {
    logic    valid;
    logic    is_signed;   // signed integer: sign-extend on extraction
    logic    is_float;    // float: may need conversion to single precision
    reg_id_t arch;        // architectural register
  } src_op_t;

  // A warp instruction as it arrives from the dispatch units.
  typedef struct packed {
    logic [WID_W-1:0]  wid;
    logic [PREG_W-1:0] wbase;   // first physical warp register of the warp
    logic [TAG_W-1:0]  tag;     // opcode, destination etc., carried through
    src_op_t [SRC_OPS-1:0] src;
  } instr_t;

  // Writeback destination, as it arrives on the writeback bus (data apart).
  typedef struct packed {
    logic [WID_W-1:0]  wid;
    logic [PREG_W-1:0] wbase;
    reg_id_t           dst;       // architectural destination register
    logic              is_float;
  } wb_hdr_t;

  // Per-read extraction control, carried with a bank read.
  typedef struct packed {
    slice_mask_t m0;
    slice_mask_t m1;
    logic        part;        // 0: reading r0, 1: reading r1
    logic        is_signed;
  } xinfo_t;

  function automatic logic [3:0] popcount8(input slice_mask_t m);
    logic [3:0] c;
    c = '0;
    for (int i = 0; i < SLICES; i++) c += 4'(m[i]);
    return c;
  endfunction

  // Number of set bits of m below position i.
  function automatic logic [3:0] rank_below(input slice_mask_t m, input int i);
    logic [3:0] c;
    c = '0;
    for (int j = 0; j < SLICES; j++) if (j < i) c += 4'(m[j]);
    return c;
  endfunction

  // Exponent bits of the narrow float that occupies n slices (n*4 bits).
  // Formats below 8 bits are not defined; they map to 0 (value read as zero).
  function automatic int unsigned fexp_bits(input logic [3:0] n);
    case (n)
      4'd8:    return 8;
      4'd7:    return 7;
      4'd6:    return 6;
      4'd5:    return 5;
      4'd4:    return 5;
      4'd3:    return 4;
      4'd2:    return 3;
      default: return 0;
    endcase
  endfunction

  function automatic int unsigned fman_bits(input logic [3:0] n);
    if (fexp_bits(n) == 0) return 0;
    return 4 * int'(n) - 1 - fexp_bits(n);
  endfunction

  // Physical warp register of register name r for a warp whose registers
  // start at wbase; bank = low 4 bits, row = upper bits.
  function automatic logic [PREG_W-1:0] preg_addr(input logic [PREG_W-1:0] wbase,
                                                  input reg_id_t r);
    return wbase + PREG_W'(r);
  endfunction

endpackage
