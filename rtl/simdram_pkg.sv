// simdram_pkg: types and constants shared by the SIMDRAM memory-controller blocks.
//
// SIMDRAM computes in DRAM by activating rows: activating one row and then a
// second one copies the first into the second (row copy), activating a
// reserved triple of rows leaves the bitwise majority of the three in all of
// them (MAJ), and a dual-contact cell written through its negated wordline
// stores the complement (NOT). Operands are stored vertically: bit i of every
// element of an operand lives in row base+i, one element per bitline (lane).
//
// This package fixes:
//  * the reserved row map of the compute region. The paper names MAJ, NOT and
//    row copy but not an address map; the B-group/C-group layout below is the
//    one of the Ambit substrate SIMDRAM builds on (designated rows T0..T3,
//    dual-contact rows DCC0/DCC1 with negated wordlines, constant rows C0/C1).
//  * the row-level request a control block hands to the command generator
//    (AAP, AP, column write, column read) and the DRAM command bus.
//  * the uOp format of a uProgram (this design's own encoding) and the
//    instruction format of the ISA extensions (this design's own encoding).
package simdram_pkg;

  // ------------------------------------------------------------------
  // DRAM geometry (assumed: one DDR4 rank, 64K rows, 8 KB row, 64-bit bus)
  // ------------------------------------------------------------------
  localparam int unsigned ROW_W  = 16;  // row address bits
  localparam int unsigned COL_W  = 10;  // column (64-bit word) address bits
  localparam int unsigned DQ_W   = 64;  // data bits per column access
  localparam int unsigned NBITS_W = 7;  // element width field, 1..64

  typedef logic [ROW_W-1:0] row_t;
  typedef logic [COL_W-1:0] col_t;
  typedef logic [DQ_W-1:0]  dq_t;

  // ------------------------------------------------------------------
  // Reserved compute rows (Ambit-style B-group and C-group addresses)
  // ------------------------------------------------------------------
  localparam row_t ROW_T0   = 16'd0;   // B0 : T0
  localparam row_t ROW_T1   = 16'd1;   // B1 : T1
  localparam row_t ROW_T2   = 16'd2;   // B2 : T2
  localparam row_t ROW_T3   = 16'd3;   // B3 : T3
  localparam row_t ROW_DCC0 = 16'd4;   // B4 : DCC0, true wordline
  localparam row_t ROW_NDCC0= 16'd5;   // B5 : DCC0, negated wordline
  localparam row_t ROW_DCC1 = 16'd6;   // B6 : DCC1, true wordline
  localparam row_t ROW_NDCC1= 16'd7;   // B7 : DCC1, negated wordline
  localparam row_t ROW_B8   = 16'd8;   // B8 : !DCC0, T0
  localparam row_t ROW_B9   = 16'd9;   // B9 : !DCC1, T1
  localparam row_t ROW_B10  = 16'd10;  // B10: T2, T3
  localparam row_t ROW_B11  = 16'd11;  // B11: T0, T3
  localparam row_t ROW_TRA012 = 16'd12;  // B12: T0, T1, T2     (MAJ)
  localparam row_t ROW_TRA123 = 16'd13;  // B13: T1, T2, T3     (MAJ)
  localparam row_t ROW_TRAD12 = 16'd14;  // B14: DCC0, T1, T2   (MAJ)
  localparam row_t ROW_TRAD03 = 16'd15;  // B15: DCC1, T0, T3   (MAJ)
  localparam row_t ROW_C0   = 16'd16;  // all-zero row
  localparam row_t ROW_C1   = 16'd17;  // all-one row
  localparam row_t ROW_DATA_FIRST = 16'd32;  // first row of the data region

  // ------------------------------------------------------------------
  // Row-level requests (control/transposition unit -> command generator)
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {
    REQ_AAP = 2'd0,   // ACT row_a, ACT row_b, PRE : copy / MAJ-and-copy
    REQ_AP  = 2'd1,   // ACT row_a, PRE            : in-place MAJ
    REQ_WR  = 2'd2,   // ACT row_a, WR col, PRE    : write one 64-bit word
    REQ_RD  = 2'd3    // ACT row_a, RD col, PRE    : read one 64-bit word
  } req_kind_e;

  typedef struct packed {
    req_kind_e kind;
    row_t      row_a;
    row_t      row_b;
    col_t      col;
    dq_t       wdata;
  } dram_req_t;

  // ------------------------------------------------------------------
  // DRAM command bus (one command per controller clock)
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e cmd;
    row_t      row;
    col_t      col;
    dq_t       wdata;
  } dram_cmd_t;

  // ------------------------------------------------------------------
  // uProgram format
  // ------------------------------------------------------------------
  // Operand slots of an operation: destination, up to three sources.
  localparam int unsigned N_OPND   = 4;
  localparam int unsigned UPC_W    = 10;   // uProgram memory address bits
  localparam int unsigned OPID_W   = 5;    // up to 32 operations

  typedef enum logic [2:0] {
    AM_ABS      = 3'd0,  // row = imm (reserved compute rows, constants)
    AM_BASE     = 3'd1,  // row = base[opnd] + imm
    AM_BIT      = 3'd2,  // row = base[opnd] + i + imm      (i = inner bit counter)
    AM_MSB      = 3'd3,  // row = base[opnd] + (n-1) - imm
    AM_J        = 3'd4,  // row = base[opnd] + j + imm      (j = outer bit counter)
    AM_IJ       = 3'd5,  // row = base[opnd] + i + j + imm
    AM_NJ       = 3'd6,  // row = base[opnd] + n + j + imm
    AM_RJ       = 3'd7   // row = base[opnd] + (n-1) - j + imm  (bits from the top down)
  } addr_mode_e;

  typedef struct packed {
    addr_mode_e  mode;
    logic [1:0]  opnd;
    row_t        imm;
  } uaddr_t;

  typedef enum logic [2:0] {
    UOP_AAP   = 3'd0,  // AAP(src, dst)
    UOP_AP    = 3'd1,  // AP(src)
    UOP_LOOP  = 3'd2,  // i++; if (i < n) jump to src.imm[UPC_W-1:0], else i = 0
    UOP_LOOPJ = 3'd3,  // j++; if (j < n) jump to src.imm[UPC_W-1:0], else j = 0
    UOP_DONE  = 3'd4   // end of uProgram
  } uop_kind_e;

  typedef struct packed {
    uop_kind_e kind;
    uaddr_t    src;
    uaddr_t    dst;
  } uop_t;

  localparam int unsigned UOP_W = $bits(uop_t);

  // ------------------------------------------------------------------
  // ISA extension instructions (host -> memory controller)
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {
    BB_NOP      = 3'd0,
    BB_UPROG_WR = 3'd1,  // write one uOp:  addr = col, uop = data
    BB_OPTAB_WR = 3'd2,  // map operation op_id to uProgram start address col
    BB_TRSP_WR  = 3'd3,  // transpose 64 host elements into rows row[0].., word col
    BB_TRSP_RD  = 3'd4,  // read rows row[0].., word col, transpose to 64 host elements
    BB_EXEC     = 3'd5   // run operation op_id on operands row[0..3], n-bit elements
  } bbop_e;

  typedef struct packed {
    bbop_e                   op;
    logic [OPID_W-1:0]       op_id;
    logic [NBITS_W-1:0]      nbits;
    row_t [N_OPND-1:0]       row;
    col_t                    col;
    logic [UOP_W-1:0]        data;
  } bbop_inst_t;

endpackage
