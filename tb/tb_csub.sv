// tb_csub: a 32 x 16 computational sub-array driven with micro-operations. It keeps its
// own copy of the array, writes random rows, then for every Table I function senses
// random operand rows, writes the result back through SA_out1 and reads it back; it also
// checks the full-adder carry on SA_out2, masked column writes, the Din-Intra path, the
// one-cycle SA latency and that a disabled sub-array neither senses nor writes.
module tb_csub;
  import panda_pkg::*;
  localparam int unsigned R = 32, C = 16;
  localparam logic [ROW_AW-1:0] ZR = R - 8, ON = R - 7;
  logic clk = 0, rst_n = 0, en = 0, sa_valid;
  uop_t uop;
  logic [C-1:0] col_sel, din_intra, din_inter, sa_out1, sa_out2;
  logic [C-1:0] mdl [R];
  int checks = 0, failures = 0;

  csub #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string w, input logic [C-1:0] got, exp);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", w, got, exp); end
  endtask

  task automatic do_uop(input uop_t u, input logic e = 1);
    @(negedge clk); uop = u; en = e;
    @(negedge clk); en = 0; uop.kind = UOP_NOP;
  endtask

  task automatic wr(input int row, input logic [C-1:0] d, input logic [C-1:0] m = '1);
    din_inter = d; col_sel = m;
    do_uop('{kind: UOP_WRITE, lop: LOP_READ, r1: 0, r2: 0, r3: 0, wrow: ROW_AW'(row), wsrc: WSRC_INTER});
    mdl[row] = (mdl[row] & ~m) | (d & m);
  endtask

  task automatic sense(input lop_e l, input int a, b, c);
    do_uop('{kind: UOP_SENSE, lop: l, r1: ROW_AW'(a), r2: ROW_AW'(b), r3: ROW_AW'(c), wrow: 0, wsrc: WSRC_SA1});
    checks++; if (!sa_valid) begin failures++; $display("FAIL sa_valid"); end
  endtask

  function automatic logic [C-1:0] f(lop_e l, logic [C-1:0] a, b, c);
    case (l)
      LOP_READ:  return a;
      LOP_AND3:  return a & b & c;      LOP_NAND3: return ~(a & b & c);
      LOP_AND2:  return a & b;          LOP_NAND2: return ~(a & b);
      LOP_OR3:   return a | b | c;      LOP_NOR3:  return ~(a | b | c);
      LOP_OR2:   return a | b;          LOP_NOR2:  return ~(a | b);
      LOP_XOR2:  return a ^ b;          LOP_XNOR2: return ~(a ^ b);
      LOP_MAJ:   return (a&b)|(a&c)|(b&c);
      LOP_MIN:   return ~((a&b)|(a&c)|(b&c));
      default:   return a ^ b ^ c;
    endcase
  endfunction

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    uop = '0; col_sel = '1; din_intra = '0; din_inter = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 24; r++) wr(r, C'($urandom));
    wr(ZR, '0); wr(ON, '1); wr(R - 6, '0); wr(R - 5, '0);
    for (int t = 0; t < 60; t++) begin
      lop_e l; int a, b, c, d;
      l = lop_e'($urandom_range(0, 13));
      a = $urandom_range(0, 15); b = $urandom_range(0, 15); c = $urandom_range(0, 15);
      d = $urandom_range(16, 23);
      sense(l, a, b, c);
      begin
        logic [C-1:0] third;
        third = (l inside {LOP_AND2, LOP_NAND2, LOP_XNOR2}) ? '1 :
                (l inside {LOP_OR2, LOP_NOR2, LOP_XOR2}) ? '0 : mdl[c];
        chk($sformatf("lop %0d", l), sa_out1, f(l, mdl[a], mdl[b], third));
        if (l == LOP_ADD) chk("carry", sa_out2, f(LOP_MAJ, mdl[a], mdl[b], mdl[c]));
      end
      // write the result back (SA_out1) under a random column mask, then read it back
      col_sel = C'($urandom);
      do_uop('{kind: UOP_WRITE, lop: LOP_READ, r1: 0, r2: 0, r3: 0, wrow: ROW_AW'(d), wsrc: WSRC_SA1});
      mdl[d] = (mdl[d] & ~col_sel) | (sa_out1 & col_sel);
      sense(LOP_READ, d, 0, 0);
      chk("readback", sa_out1, mdl[d]);
    end
    // carry written through SA_out2
    sense(LOP_ADD, 1, 2, 3);
    col_sel = '1;
    do_uop('{kind: UOP_WRITE, lop: LOP_READ, r1: 0, r2: 0, r3: 0, wrow: 10'd20, wsrc: WSRC_SA2});
    mdl[20] = f(LOP_MAJ, mdl[1], mdl[2], mdl[3]);
    sense(LOP_READ, 20, 0, 0); chk("carry row", sa_out1, mdl[20]);
    // Din-Intra
    din_intra = 16'hA5C3;
    do_uop('{kind: UOP_WRITE, lop: LOP_READ, r1: 0, r2: 0, r3: 0, wrow: 10'd21, wsrc: WSRC_INTRA});
    mdl[21] = 16'hA5C3;
    sense(LOP_READ, 21, 0, 0); chk("din intra", sa_out1, mdl[21]);
    // disabled: no write, no sense
    din_inter = ~mdl[22];
    do_uop('{kind: UOP_WRITE, lop: LOP_READ, r1: 0, r2: 0, r3: 0, wrow: 10'd22, wsrc: WSRC_INTER}, 0);
    do_uop('{kind: UOP_SENSE, lop: LOP_READ, r1: 10'd22, r2: 0, r3: 0, wrow: 0, wsrc: WSRC_SA1}, 0);
    checks++; if (sa_valid) begin failures++; $display("FAIL disabled sense"); end
    sense(LOP_READ, 22, 0, 0); chk("disabled write", sa_out1, mdl[22]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
