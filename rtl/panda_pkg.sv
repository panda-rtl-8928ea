// panda_pkg: types and constants shared by the PANDA processing-in-MRAM model.
//
// The chip is a hierarchy of computational sub-arrays (C-Sub) of SOT-MRAM whose
// reconfigurable sense amplifiers compute 2- and 3-input logic, a full-adder sum/carry
// and XNOR comparison directly on the bit-lines. This package holds:
//   * the sense-amplifier enable bits (C_AND3, C_MAJ, C_OR3, C_M) of the paper's Table I,
//   * the logic operations a sub-array can perform in one memory cycle,
//   * the micro-operation that the chip controller broadcasts to sub-arrays,
//   * the host instruction format (PANDA_Mem_insert, PANDA_Cmp, PANDA_Add plus the plain
//     read/write/logic accesses needed to load and inspect data),
//   * the placement of the reserved rows inside a sub-array.
// Row address width is fixed at 10 bits (1024 rows, the paper's sub-array height); a
// smaller ROWS parameter simply leaves the upper addresses unused.
package panda_pkg;

  localparam int unsigned ROW_AW = 10;        // row address width (1024 rows)
  localparam int unsigned SIZE_W = 6;         // instruction vector length, 1..63 rows/bits

  // Enable bits of the reconfigurable SA (paper Table I).
  typedef struct packed {
    logic c_and3;   // SA-III with R_AND3
    logic c_maj;    // SA-II  with R_MAJ
    logic c_or3;    // SA-I   with R_OR3
    logic c_m;      // SA-III with R_M (memory read)
  } sa_ctrl_t;

  // One-cycle sub-array logic operations (paper Table I rows).
  typedef enum logic [3:0] {
    LOP_READ  = 4'd0,
    LOP_AND3  = 4'd1,  LOP_NAND3 = 4'd2,
    LOP_AND2  = 4'd3,  LOP_NAND2 = 4'd4,
    LOP_OR3   = 4'd5,  LOP_NOR3  = 4'd6,
    LOP_OR2   = 4'd7,  LOP_NOR2  = 4'd8,
    LOP_XOR2  = 4'd9,  LOP_XNOR2 = 4'd10,
    LOP_MAJ   = 4'd11, LOP_MIN   = 4'd12,
    LOP_ADD   = 4'd13  // XOR3 (Sum) on SA_out1 and MAJ (Carry) on SA_out2
  } lop_e;

  // Source of the data written into a row (write driver multiplexer, Fig. 4b).
  typedef enum logic [1:0] {
    WSRC_INTRA = 2'd0,  // Din-Intra: the bank's row buffer (another mat of the same bank)
    WSRC_INTER = 2'd1,  // Din-Inter: data from the chip I/O
    WSRC_SA1   = 2'd2,  // SA_out1: result latched by this sub-array's SA
    WSRC_SA2   = 2'd3   // SA_out2: carry latched by this sub-array's SA
  } wsrc_e;

  // Micro-operation broadcast from the chip controller to the sub-arrays.
  typedef enum logic [1:0] {
    UOP_NOP   = 2'd0,
    UOP_SENSE = 2'd1,   // activate rows and latch a logic result in the SAs
    UOP_WRITE = 2'd2    // write one row from the selected source
  } uop_kind_e;

  typedef struct packed {
    uop_kind_e         kind;
    lop_e              lop;
    logic [ROW_AW-1:0] r1;      // first operand row
    logic [ROW_AW-1:0] r2;      // second operand row
    logic [ROW_AW-1:0] r3;      // third operand row (ignored by 1-/2-input ops)
    logic [ROW_AW-1:0] wrow;    // row written by UOP_WRITE
    wsrc_e             wsrc;
  } uop_t;

  // Host instructions.
  typedef enum logic [2:0] {
    I_WRITE      = 3'd0,  // row dst <- data (host write)
    I_READ       = 3'd1,  // return row src1 of one sub-array
    I_MEM_INSERT = 3'd2,  // PANDA_Mem_insert(dst, src1, size): copy size rows
    I_CMP        = 3'd3,  // PANDA_Cmp(src1, src2, size): bulk XNOR compare
    I_ADD        = 3'd4,  // PANDA_Add(src1, src2, size) -> dst: vertical bit-serial add
    I_LOGIC      = 3'd5   // dst <- lop(src1, src2, src3), any Table I function
  } iop_e;

  // Second operand of I_ADD.
  typedef enum logic [1:0] {
    BM_ROWS   = 2'd0,   // word stored in rows src2 .. src2+size-1
    BM_PLUS1  = 2'd1,   // constant +1 (ONE row for bit 0, ZERO row above)
    BM_MINUS1 = 2'd2    // constant -1 (ONE row for every bit, two's complement)
  } bmode_e;

  localparam int unsigned BANK_AW = 8;   // up to 256 banks (16x16)
  localparam int unsigned MAT_MAX = 16;  // up to 16 mats per bank (4x4)

  // One host instruction. The COLS-wide data word travels beside it: write data for
  // I_WRITE, column mask for I_CMP (1 = column takes part in the comparison).
  typedef struct packed {
    iop_e               op;
    lop_e               lop;        // I_LOGIC only
    bmode_e             bmode;      // I_ADD only
    logic               all_banks;  // broadcast to every bank (else only 'bank')
    logic [BANK_AW-1:0] bank;
    logic [MAT_MAX-1:0] mat_mask;   // mats of the selected bank(s) that execute
    logic [ROW_AW-1:0]  src1;
    logic [ROW_AW-1:0]  src2;
    logic [ROW_AW-1:0]  src3;
    logic [ROW_AW-1:0]  dst;
    logic [SIZE_W-1:0]  size;       // rows (Mem_insert, Cmp) or bits (Add); 0 acts as 1
  } inst_t;

  // Reserved-row placement inside a sub-array of 'rows' rows: the last 8 rows form the
  // compute region of Fig. 10a; four of them are the constant and carry rows.
  function automatic logic [ROW_AW-1:0] row_zero(int unsigned rows);
    return ROW_AW'(rows - 8);
  endfunction
  function automatic logic [ROW_AW-1:0] row_one(int unsigned rows);
    return ROW_AW'(rows - 7);
  endfunction
  function automatic logic [ROW_AW-1:0] row_carry(int unsigned rows, logic sel);
    return ROW_AW'(rows - 6 + int'(sel));
  endfunction

endpackage
