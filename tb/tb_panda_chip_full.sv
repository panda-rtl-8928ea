// tb_panda_chip_full: the PANDA chip at its default (paper) size: 16 x 16 banks of 4 x 4
// mats, each mat one 1024 x 256 sub-array, 4096 sub-arrays and 1 Gbit in all.
// The test stays short because every cycle touches 4096 sub-arrays:
//   * the reset initialisation of the constant and carry rows finishes in 4 cycles;
//   * writes to the first and the last sub-array of the chip read back unchanged, and a
//     read of the constant rows returns all zeros and all ones;
//   * a broadcast write of one 54-bit k-mer (2 bits per base, k = 27) to every sub-array,
//     then a broadcast PANDA_Cmp: all 4096 match bits are 1; after one sub-array's
//     copy is changed in a single base, exactly that bit drops to 0, and masking that
//     base's columns brings it back;
//   * PANDA_Add of two 32-bit vertical words in the last sub-array, the value-region
//     width of Fig. 10a, checked against integer addition, in 3n + 3 = 99 cycles;
//   * PANDA_Mem_insert of the k-mer to another row, read back.
// Cycle counts from the handshake to the response: write 3, read 4, compare n + 3,
// add 3n + 3, insert 2n + 2.
module tb_panda_chip_full;
  import panda_pkg::*;
  localparam int unsigned C = 256, NBM = 4096, R = 1024;

  logic clk = 0, rst_n = 0, inst_valid = 0, inst_ready, resp_valid, init_done;
  inst_t inst;
  logic [C-1:0] data, mask, resp_rdata;
  iop_e resp_op;
  logic [NBM-1:0] resp_match;

  panda_chip dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s (t=%0d)", w, cyc); end
  endtask

  function automatic inst_t mk(iop_e op, int bank, logic [MAT_MAX-1:0] mm, int s1, int s2,
                               int dst, int size, bmode_e bm = BM_ROWS, logic all = 0);
    inst_t i;
    i = '0; i.op = op; i.bank = BANK_AW'(bank); i.mat_mask = mm; i.all_banks = all;
    i.src1 = ROW_AW'(s1); i.src2 = ROW_AW'(s2); i.dst = ROW_AW'(dst);
    i.size = SIZE_W'(size); i.bmode = bm;
    return i;
  endfunction

  task automatic run(input inst_t i, input logic [C-1:0] d, input logic [C-1:0] mk_,
                     input int lat, output logic [NBM-1:0] gm, output logic [C-1:0] gr);
    int t0;
    @(negedge clk);
    inst = i; data = d; mask = mk_; inst_valid = 1;
    while (!inst_ready) @(negedge clk);
    @(negedge clk); t0 = cyc; inst_valid = 0;
    while (!resp_valid) @(negedge clk);
    chk($sformatf("latency op %0d: %0d, expected %0d", i.op, cyc - t0, lat), cyc - t0 == lat);
    chk("response op", resp_op == i.op);
    gm = resp_match; gr = resp_rdata;
  endtask

  logic [NBM-1:0] gm;
  logic [C-1:0]   gr, w0, w1, kmer, kmask;
  logic [31:0]    a, b;

  initial begin
    int t;
    data = '0; mask = '0; inst = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    t = cyc;
    while (!init_done) @(negedge clk);
    chk("init takes 4 cycles", cyc - t <= 5);

    // first and last sub-array
    w0 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    w1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    run(mk(I_WRITE, 0, 16'h0001, 0, 0, 10, 1), w0, '1, 3, gm, gr);
    run(mk(I_WRITE, 255, 16'h8000, 0, 0, 10, 1), w1, '1, 3, gm, gr);
    run(mk(I_READ, 0, 16'h0001, 10, 0, 0, 1), '0, '1, 4, gm, gr);
    chk("read bank 0 mat 0", gr == w0);
    run(mk(I_READ, 255, 16'h8000, 10, 0, 0, 1), '0, '1, 4, gm, gr);
    chk("read bank 255 mat 15", gr == w1);
    run(mk(I_READ, 17, 16'h0100, int'(row_zero(R)), 0, 0, 1), '0, '1, 4, gm, gr);
    chk("ZERO row", gr == '0);
    run(mk(I_READ, 200, 16'h0020, int'(row_one(R)), 0, 0, 1), '0, '1, 4, gm, gr);
    chk("ONE row", gr == '1);

    // broadcast k-mer compare over the whole chip
    kmer = '0;
    for (int j = 0; j < 27; j++) kmer[2*j +: 2] = 2'($urandom);
    kmask = '0; kmask[53:0] = '1;
    run(mk(I_WRITE, 0, '1, 0, 0, 0, 1, BM_ROWS, 1), kmer, '1, 3, gm, gr);
    run(mk(I_WRITE, 0, '1, 0, 0, 4, 1, BM_ROWS, 1), kmer, '1, 3, gm, gr);
    run(mk(I_CMP, 0, '1, 0, 4, 0, 1, BM_ROWS, 1), '0, kmask, 4, gm, gr);
    chk("all 4096 sub-arrays match", gm == '1);
    run(mk(I_WRITE, 77, 16'h0040, 0, 0, 4, 1), kmer ^ (C'(1) << 20), '1, 3, gm, gr);
    run(mk(I_CMP, 0, '1, 0, 4, 0, 1, BM_ROWS, 1), '0, kmask, 4, gm, gr);
    chk("one mismatch", gm == ~(NBM'(1) << (77 * 16 + 6)));
    run(mk(I_CMP, 0, '1, 0, 4, 0, 1, BM_ROWS, 1), '0, kmask & ~(C'(3) << 20), 4, gm, gr);
    chk("masked base matches", gm == '1);

    // 32-bit vertical addition in the value region of the last sub-array
    a = $urandom; b = $urandom;
    for (int k = 0; k < 32; k++) begin
      run(mk(I_WRITE, 255, 16'h8000, 0, 0, 984 + k, 1), {C{a[k]}}, '1, 3, gm, gr);
      run(mk(I_WRITE, 255, 16'h8000, 0, 0, 940 + k, 1), {C{b[k]}}, '1, 3, gm, gr);
    end
    run(mk(I_ADD, 255, 16'h8000, 984, 940, 984, 32), '0, '1, 99, gm, gr);
    begin
      logic [31:0] s, e;
      e = a + b;
      for (int k = 0; k < 32; k++) begin
        run(mk(I_READ, 255, 16'h8000, 984 + k, 0, 0, 1), '0, '1, 4, gm, gr);
        s[k] = gr[0];
        chk("sum row uniform", gr == {C{e[k]}});
      end
      chk($sformatf("add %h + %h = %h, got %h", a, b, e, s), s == e);
    end

    // copy a row inside a sub-array
    run(mk(I_MEM_INSERT, 3, 16'h0004, 0, 0, 5, 1), '0, '1, 4, gm, gr);
    run(mk(I_READ, 3, 16'h0004, 5, 0, 0, 1), '0, '1, 4, gm, gr);
    chk("inserted row", gr == kmer);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
