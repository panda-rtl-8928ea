// csub_ctrl: command decoder and timing control of one computational sub-array.
//
// It turns a micro-operation into the sub-array's control lines, following Table I of
// the paper: which read word-lines are raised, which SA enables (C_AND3, C_MAJ, C_OR3,
// C_M) are set, and whether one of the two constant rows is activated as the third
// operand ("Row Init."), which is how 2-input functions are made from 3-input ones:
//   AND2/NAND2  -> AND3 with the all-ones row,  OR2/NOR2 -> OR3 with the all-zeros row,
//   XOR2        -> XOR3 with the all-zeros row, XNOR2 -> XOR3 with the all-ones row.
// A read activates one row and uses the memory reference R_M.
// Interface: combinational decode of 'uop' when 'en' is high. Timing: every operation is
// one memory cycle (precharge while the clock is high, sense while it is low); the SA
// result is latched at the end of the cycle and a write lands at the same edge.
// Following the paper: the enable table and the use of constant rows. Own choices: the
// micro-operation encoding and the placement of the constant rows (end of the array).
module csub_ctrl
  import panda_pkg::*;
#(
  parameter int unsigned ROWS = 1024
) (
  input  logic              en,
  input  uop_t              uop,
  output logic              sense_en,
  output logic [2:0]        act,        // read word-line enables for ra[0..2]
  output logic [ROW_AW-1:0] ra [3],
  output sa_ctrl_t          sa_ctrl,
  output logic              inv,
  output logic              we,
  output logic [ROW_AW-1:0] wrow,
  output wsrc_e             wsrc
);

  localparam logic [ROW_AW-1:0] ZERO = row_zero(ROWS);
  localparam logic [ROW_AW-1:0] ONE  = row_one(ROWS);

  always_comb begin
    sense_en = en && (uop.kind == UOP_SENSE);
    we       = en && (uop.kind == UOP_WRITE);
    wrow     = uop.wrow;
    wsrc     = uop.wsrc;
    ra[0]    = uop.r1;
    ra[1]    = uop.r2;
    ra[2]    = uop.r3;
    act      = 3'b111;
    sa_ctrl  = '0;
    inv      = 1'b0;
    unique case (uop.lop)
      LOP_READ:  begin act = 3'b001; sa_ctrl.c_m = 1'b1; end
      LOP_AND3:  sa_ctrl.c_and3 = 1'b1;
      LOP_NAND3: begin sa_ctrl.c_and3 = 1'b1; inv = 1'b1; end
      LOP_AND2:  begin sa_ctrl.c_and3 = 1'b1; ra[2] = ONE; end
      LOP_NAND2: begin sa_ctrl.c_and3 = 1'b1; ra[2] = ONE; inv = 1'b1; end
      LOP_OR3:   sa_ctrl.c_or3 = 1'b1;
      LOP_NOR3:  begin sa_ctrl.c_or3 = 1'b1; inv = 1'b1; end
      LOP_OR2:   begin sa_ctrl.c_or3 = 1'b1; ra[2] = ZERO; end
      LOP_NOR2:  begin sa_ctrl.c_or3 = 1'b1; ra[2] = ZERO; inv = 1'b1; end
      LOP_XOR2:  begin sa_ctrl = '{c_and3: 1'b1, c_maj: 1'b1, c_or3: 1'b1, c_m: 1'b0}; ra[2] = ZERO; end
      LOP_XNOR2: begin sa_ctrl = '{c_and3: 1'b1, c_maj: 1'b1, c_or3: 1'b1, c_m: 1'b0}; ra[2] = ONE; end
      LOP_MAJ:   sa_ctrl.c_maj = 1'b1;
      LOP_MIN:   begin sa_ctrl.c_maj = 1'b1; inv = 1'b1; end
      LOP_ADD:   sa_ctrl = '{c_and3: 1'b1, c_maj: 1'b1, c_or3: 1'b1, c_m: 1'b0};
      default:   act = 3'b000;
    endcase
    if (!sense_en) act = 3'b000;
  end

endmodule
