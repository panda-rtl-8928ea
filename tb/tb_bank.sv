// tb_bank: a bank of 2x2 sub-arrays of 32 x 8. It writes different data into each mat
// through the per-mat enables, broadcasts XNOR comparisons to all mats and checks the
// per-mat DPU match bits (including a two-row comparison), reads a row into the row
// buffer from the lowest enabled mat, copies it into another mat through Din-Intra, and
// checks that micro-operations addressed to another bank change nothing.
module tb_bank;
  import panda_pkg::*;
  localparam int unsigned R = 32, C = 8, M = 4;
  logic clk = 0, rst_n = 0, valid = 0, all_banks = 0, rb_load = 0, dpu_clr = 0, dpu_acc = 0;
  logic [BANK_AW-1:0] bank_id = 8'd3, tgt_bank = 8'd3;
  uop_t uop;
  logic [MAT_MAX-1:0] mat_mask;
  logic [C-1:0] col_sel, din_inter, rb_data;
  logic [M-1:0] match;
  logic [C-1:0] mdl [M][R];
  int checks = 0, failures = 0;

  bank #(.ROWS(R), .COLS(C), .MAT_R(2), .MAT_C(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  task automatic step(input uop_t u);
    @(negedge clk); uop = u; valid = 1;
    @(negedge clk); uop.kind = UOP_NOP;
  endtask

  task automatic wr(input int m, input int row, input logic [C-1:0] d);
    mat_mask = MAT_MAX'(1) << m; din_inter = d; col_sel = '1;
    step('{kind: UOP_WRITE, lop: LOP_READ, r1: 0, r2: 0, r3: 0, wrow: ROW_AW'(row), wsrc: WSRC_INTER});
    if (tgt_bank == bank_id) mdl[m][row] = d;
  endtask

  // compare rows a.. and b.. (n rows) in all mats; pipelined like the chip controller
  task automatic cmp(input int a, input int b, input int n, input logic [C-1:0] msk);
    mat_mask = '1; col_sel = msk;
    @(negedge clk); dpu_clr = 1; valid = 1;
    uop = '{kind: UOP_SENSE, lop: LOP_XNOR2, r1: ROW_AW'(a), r2: ROW_AW'(b), r3: 0, wrow: 0, wsrc: WSRC_SA1};
    for (int i = 1; i < n; i++) begin
      @(negedge clk); dpu_clr = 0; dpu_acc = 1;
      uop.r1 = ROW_AW'(a + i); uop.r2 = ROW_AW'(b + i);
    end
    @(negedge clk); dpu_clr = 0; dpu_acc = 1; uop.kind = UOP_NOP;
    @(negedge clk); dpu_acc = 0;
    for (int m = 0; m < M; m++) begin
      logic e; e = 1;
      for (int i = 0; i < n; i++) e &= &(~(mdl[m][a+i] ^ mdl[m][b+i]) | ~msk);
      chk($sformatf("match mat %0d", m), match[m] == e);
    end
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    uop = '0; mat_mask = '0; col_sel = '1; din_inter = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < M; m++) begin
      wr(m, R - 8, '0); wr(m, R - 7, '1);
      for (int r = 0; r < 8; r++) wr(m, r, C'($urandom));
    end
    // make mat 1 and 3 hold equal rows 0/1, mats 0 and 2 differ
    wr(1, 1, mdl[1][0]); wr(3, 1, mdl[3][0]);
    wr(0, 1, ~mdl[0][0]); wr(2, 1, mdl[2][0] ^ 8'h10);
    cmp(0, 1, 1, '1);
    chk("some match", match == 4'b1010);
    cmp(0, 1, 1, 8'hEF);                  // mask out bit 4: mat 2 matches too
    chk("masked match", match == 4'b1110);
    for (int t = 0; t < 20; t++) cmp($urandom_range(0, 3), $urandom_range(0, 3), 2, C'($urandom));
    // row buffer: read row 5 from mats 1,2 -> mat 1 reaches the buffer
    mat_mask = 16'b0110;
    step('{kind: UOP_SENSE, lop: LOP_READ, r1: 10'd5, r2: 0, r3: 0, wrow: 0, wsrc: WSRC_SA1});
    rb_load = 1; @(negedge clk); rb_load = 0;
    chk("row buffer", rb_data == mdl[1][5]);
    // Din-Intra: copy into mat 3 row 6
    mat_mask = 16'b1000; col_sel = '1;
    step('{kind: UOP_WRITE, lop: LOP_READ, r1: 0, r2: 0, r3: 0, wrow: 10'd6, wsrc: WSRC_INTRA});
    mdl[3][6] = mdl[1][5];
    step('{kind: UOP_SENSE, lop: LOP_READ, r1: 10'd6, r2: 0, r3: 0, wrow: 0, wsrc: WSRC_SA1});
    rb_load = 1; @(negedge clk); rb_load = 0;
    chk("din intra copy", rb_data == mdl[1][5]);
    // other bank addressed: no write
    tgt_bank = 8'd4; wr(0, 2, ~mdl[0][2]); tgt_bank = 8'd3;
    mat_mask = 16'b0001;
    step('{kind: UOP_SENSE, lop: LOP_READ, r1: 10'd2, r2: 0, r3: 0, wrow: 0, wsrc: WSRC_SA1});
    rb_load = 1; @(negedge clk); rb_load = 0;
    chk("other bank untouched", rb_data == mdl[0][2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
