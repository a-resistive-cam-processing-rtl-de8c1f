// recam_pkg -- types and constants shared by the ReCAM processing-in-storage design.
//
// A ReCAM system is a very tall resistive CAM: every row is a bit-serial
// processing unit. A microcontroller broadcasts one array command per clock
// (compare, write, TAG shift, ...) with a KEY and a MASK to every IC; the ICs
// answer through an OR reduction network.
//
// Sizes that follow the paper: 32 ICs of 8M rows each (2^23), and rows of
// 256 bits (8 GB active storage / 256M rows = 32 bytes per row). 32-bit
// score fields and 2-bit DNA bases follow the paper. The row layout, the
// command set, the instruction set and the truth-table encoding are this
// design's own choices; the paper does not give them.
package recam_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned ROW_BITS    = 256;        // bits per ReCAM row
  localparam int unsigned ROWS_PER_IC = 8388608;    // 8M rows per IC
  localparam int unsigned N_ICS       = 32;         // ICs in the system
  localparam int unsigned ROW_AW      = 28;         // global row address (256M rows)
  localparam int unsigned WORD_W      = 32;         // score field width
  localparam int unsigned BASE_W      = 2;          // DNA base width

  // ------------------------------------------------------ row field layout
  // Bit position of the least significant bit of every field of a row.
  localparam int unsigned COL_SEQA  = 0;    // 2-bit base of sequence A
  localparam int unsigned COL_SEQB  = 2;    // 2-bit base of sequence B (shifted window)
  localparam int unsigned COL_BSTO  = 4;    // 2-bit base of sequence B (stored copy)
  localparam int unsigned COL_E     = 32;   // E antidiagonal (vertical gap, shifted)
  localparam int unsigned COL_F     = 64;   // F antidiagonal (horizontal gap)
  localparam int unsigned COL_AD0   = 96;   // H antidiagonal buffer 0
  localparam int unsigned COL_AD1   = 128;  // H antidiagonal buffer 1
  localparam int unsigned COL_AD2   = 160;  // H antidiagonal buffer 2
  localparam int unsigned COL_TMP   = 192;  // tmp field
  localparam int unsigned COL_FLAG0 = 224;  // carry / borrow / A>B / mismatch flag
  localparam int unsigned COL_FLAG1 = 225;  // A<B flag

  // ----------------------------------------------------- IC array commands
  typedef enum logic [3:0] {
    CMD_NOP       = 4'd0,
    CMD_CMP       = 4'd1,   // TAG <= match (and in range, unless cmp_all)
    CMD_CMP_TEST  = 4'd2,   // any <= OR(TAG & match); TAG unchanged
    CMD_CMP_CAND  = 4'd3,   // if global any: TAG <= TAG & match
    CMD_WRITE     = 4'd4,   // tagged rows: masked bits <= KEY
    CMD_WRITE_TAG = 4'd5,   // rows in range: masked bits <= own TAG bit
    CMD_SHIFT     = 4'd6,   // TAG moves one row down (shift select)
    CMD_TAG_ROW   = 4'd7,   // TAG <= (row == row_addr)
    CMD_READ      = 4'd8,   // rdata <= OR over tagged rows of (row & MASK)
    CMD_SET_RANGE = 4'd9    // active row range <= [lo, hi]
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e              op;
    logic                 cmp_all;  // compare ignores the active row range
    logic [ROW_BITS-1:0]  key;
    logic [ROW_BITS-1:0]  mask;
    logic [ROW_AW-1:0]    lo;       // SET_RANGE low row / TAG_ROW address
    logic [ROW_AW-1:0]    hi;       // SET_RANGE high row
  } recam_cmd_t;

  typedef struct packed {
    logic                 any;      // some row tagged by the last compare
    logic [ROW_BITS-1:0]  rdata;    // OR of the tagged rows' masked bits
  } recam_rsp_t;

  // ------------------------------------------------------- truth tables
  // A truth-table entry acts on one bit position of a field-wise operation.
  // Compare slots: [0] A bit, [1] B bit, [2] FLAG0, [3] FLAG1.
  // Write slots:   [0] D bit, [1] FLAG0, [2] FLAG1.
  typedef struct packed {
    logic [3:0] cmp_val;
    logic [3:0] cmp_care;
    logic [2:0] wr_val;
    logic [2:0] wr_en;     // all zero: entry is skipped (no cycles)
  } tt_entry_t;

  typedef struct packed {
    logic [5:0] first;       // index of the first entry in the entry store
    logic [3:0] count;       // number of entries
    logic       msb_first;   // bit order of the pass
    logic       signed_msb;  // invert A/B compare values at the sign bit
    logic       clear_flags; // clear FLAG0/FLAG1 of active rows first
  } tt_desc_t;

  localparam int unsigned TT_IDS     = 16;
  localparam int unsigned TT_ENTRIES = 64;

  typedef enum logic [3:0] {
    TT_ADD    = 4'd0,   // 8x2 Add  : D = A + B, FLAG0 carry
    TT_SUB    = 4'd1,   // 8x2 Sub  : D = A - B, FLAG0 borrow
    TT_NOT    = 4'd2,   // 2x1 NOT  : D = ~A
    TT_XOR    = 4'd3,   // 4x1 XOR
    TT_AND    = 4'd4,   // 4x1 AND
    TT_MAXCMP = 4'd5,   // 4x2 Max  : FLAG0 = A>B, FLAG1 = A<B (signed, MSB first)
    TT_NAND   = 4'd6,   // 4x1 NAND
    TT_NOR    = 4'd7,   // 4x1 NOR
    TT_MAXSEL = 4'd8,   // D = FLAG1 ? B : A
    TT_MATCH  = 4'd9    // user region: FLAG0 = (A != B) for DNA bases
  } tt_id_e;

  // ----------------------------------------------------- instruction set
  localparam int unsigned NREGS = 32;

  typedef enum logic [4:0] {
    I_NOP    = 5'd0,
    I_HALT   = 5'd1,
    I_LI     = 5'd2,   // rd <= imm
    I_ADDI   = 5'd3,   // rd <= ra + imm
    I_ADD    = 5'd4,   // rd <= ra + rb
    I_SUB    = 5'd5,   // rd <= ra - rb
    I_MAX    = 5'd6,   // rd <= max(ra, rb), signed
    I_MIN    = 5'd7,   // rd <= min(ra, rb), signed
    I_BLT    = 5'd8,   // if ra < rb (signed): pc <= imm
    I_JMP    = 5'd9,   // pc <= imm
    I_RANGE  = 5'd10,  // active rows <= [ra, rb]
    I_VTT    = 5'd11,  // field[rd] <= table imm[3:0] (field[ra], field[rb]), w bits
    I_VTTI   = 5'd12,  // same, B operand is the scalar imm[31:0] of register rb
    I_VSHIFT = 5'd13,  // field[ra] (w bits) moves one row down
    I_VSETF  = 5'd14,  // rows in range with FLAG0 == ra[0]-field: field[rd] <= imm
    I_VMAXS  = 5'd15,  // rd <= max over active rows of field[ra] (w bits, signed)
    I_VREAD  = 5'd16,  // rd <= field[ra] (w bits) of row reg[rb]
    I_VWRITE = 5'd17,  // field[ra] (w bits) of row reg[rb] <= reg[rd]
    I_VFILL  = 5'd18   // rows in range: field[rd] (w bits) <= imm
  } iop_e;

  // 64-bit instruction word. For vector instructions the registers named by
  // rd/ra/rb hold field bit positions (I_VTTI: rb holds the scalar operand).
  typedef struct packed {
    iop_e        op;     // 63:59
    logic [4:0]  rd;     // 58:54
    logic [4:0]  ra;     // 53:49
    logic [4:0]  rb;     // 48:44
    logic [5:0]  w;      // 43:38  field width in bits (1..32)
    logic [5:0]  pad;    // 37:32
    logic [31:0] imm;    // 31:0
  } instr_t;

  function automatic instr_t mk_instr(iop_e op, int rd, int ra, int rb, int w, int imm);
    instr_t i;
    i.op  = op;
    i.rd  = 5'(rd);
    i.ra  = 5'(ra);
    i.rb  = 5'(rb);
    i.w   = 6'(w);
    i.pad = '0;
    i.imm = 32'(imm);
    return i;
  endfunction

  // Array-sequence kinds handed from the microcontroller to the sequencer.
  typedef enum logic [3:0] {
    SQ_TT    = 4'd0,   // truth-table pass
    SQ_SHIFT = 4'd1,   // field shift down
    SQ_SETF  = 4'd2,   // conditional word write
    SQ_MAXS  = 4'd3,   // max scalar
    SQ_READ  = 4'd4,   // row read
    SQ_WRITE = 4'd5,   // row write
    SQ_FILL  = 4'd6,   // word write to all active rows
    SQ_RANGE = 4'd7    // set active range
  } seq_kind_e;

  typedef struct packed {
    seq_kind_e          kind;
    tt_id_e             tid;
    logic               b_imm;     // B operand is a scalar
    logic [7:0]         col_d;
    logic [7:0]         col_a;
    logic [7:0]         col_b;
    logic [5:0]         w;
    logic [31:0]        scalar;    // B scalar / fill value / write value / flag value
    logic [ROW_AW-1:0]  row;       // READ/WRITE row, SET_RANGE lo
    logic [ROW_AW-1:0]  row_hi;    // SET_RANGE hi
  } seq_req_t;

endpackage
