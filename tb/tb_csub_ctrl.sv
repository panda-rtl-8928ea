// tb_csub_ctrl: checks the command decoder against the paper's Table I: SA enable bits per
// operation, the number of activated rows, the constant row added for 2-input functions
// ("Row Init."), the complement select, and that nothing is activated or written when
// the sub-array is not enabled.
module tb_csub_ctrl;
  import panda_pkg::*;
  localparam int unsigned R = 1024;
  logic en, sense_en, inv, we;
  uop_t uop;
  logic [2:0] act;
  logic [ROW_AW-1:0] ra [3];
  logic [ROW_AW-1:0] wrow;
  sa_ctrl_t sa_ctrl;
  wsrc_e wsrc;
  int checks = 0, failures = 0;
  csub_ctrl #(.ROWS(R)) dut (.*);

  // expected: {c_and3, c_maj, c_or3, c_m}, inv, act, third row (0 = r3, 1 = zero, 2 = one)
  typedef struct { logic [3:0] c; logic iv; logic [2:0] a; int third; } exp_t;
  function automatic exp_t expect_of(lop_e l);
    case (l)
      LOP_READ:  return '{4'b0001, 0, 3'b001, 0};
      LOP_AND3:  return '{4'b1000, 0, 3'b111, 0};
      LOP_NAND3: return '{4'b1000, 1, 3'b111, 0};
      LOP_AND2:  return '{4'b1000, 0, 3'b111, 2};
      LOP_NAND2: return '{4'b1000, 1, 3'b111, 2};
      LOP_OR3:   return '{4'b0010, 0, 3'b111, 0};
      LOP_NOR3:  return '{4'b0010, 1, 3'b111, 0};
      LOP_OR2:   return '{4'b0010, 0, 3'b111, 1};
      LOP_NOR2:  return '{4'b0010, 1, 3'b111, 1};
      LOP_XOR2:  return '{4'b1110, 0, 3'b111, 1};
      LOP_XNOR2: return '{4'b1110, 0, 3'b111, 2};
      LOP_MAJ:   return '{4'b0100, 0, 3'b111, 0};
      LOP_MIN:   return '{4'b0100, 1, 3'b111, 0};
      default:   return '{4'b1110, 0, 3'b111, 0};   // LOP_ADD
    endcase
  endfunction

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l <= 13; l++) begin
      exp_t e;
      e = expect_of(lop_e'(l));
      uop = '{kind: UOP_SENSE, lop: lop_e'(l), r1: 10'd5, r2: 10'd9, r3: 10'd33, wrow: 10'd7,
              wsrc: WSRC_SA1};
      en = 1; #1;
      chk($sformatf("ctrl lop %0d", l), sa_ctrl == e.c);
      chk($sformatf("inv lop %0d", l), inv == e.iv);
      chk($sformatf("act lop %0d", l), act == e.a);
      chk("rows", ra[0] == 10'd5 && ra[1] == 10'd9);
      if (e.a[2])
        chk($sformatf("third row lop %0d", l),
            ra[2] == ((e.third == 0) ? 10'd33 : (e.third == 1) ? 10'(R - 8) : 10'(R - 7)));
      chk("sense", sense_en && !we);
      en = 0; #1;
      chk("disabled", !sense_en && act == 3'b000 && !we);
    end
    uop.kind = UOP_WRITE; en = 1; #1;
    chk("write", we && !sense_en && act == 3'b000 && wrow == 10'd7 && wsrc == WSRC_SA1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
