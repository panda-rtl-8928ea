// tb_panda_chip: end-to-end test of the PANDA chip at a reduced size (2 banks x 2 mats of
// 64 x 32 sub-arrays). A host model issues instructions through the I/O buffer and a
// reference model of every sub-array predicts each response and, at the end, every row.
// It runs:
//   1. the hash-table stage (k-mer counting, Algorithm 1) on the read CGTGCGTGCTT with
//      k = 5 in one sub-array: PANDA_Cmp against every stored k-mer, PANDA_Add(+1) on a
//      match, PANDA_Mem_insert plus a +1 on a miss; the result must be the hash table of
//      the paper's Fig. 11 (CGTGC twice, five other k-mers once);
//   2. the start-vertex search of Fig. 12, broadcast to all four sub-arrays: out-degrees
//      by in-memory addition of 4-bit vertical words, in-degree + 1, a per-vertex
//      comparison that must single out v3, and one Fleury edge removal (add -1);
//   3. random I_LOGIC instructions over every Table I function, random copies, adds and
//      compares with different data per sub-array, and a burst that fills the I/O buffer.
// It checks the cycle count of each instruction, and counts how often each mechanism
// happened (init, buffer full, each instruction, matches and mismatches, carries,
// constant rows, broadcast); one that never happened is a failure.
module tb_panda_chip;
  import panda_pkg::*;
  localparam int unsigned R = 64, C = 32, MR = 2, MC = 1, BR = 2, BC = 1;
  localparam int unsigned NB = BR * BC, M = MR * MC;
  localparam int unsigned ZR = R - 8, ON = R - 7;
  localparam int TEMP = 0, KMER0 = 4, VAL0 = 20, VBITS = 8;

  logic clk = 0, rst_n = 0, inst_valid = 0, inst_ready, resp_valid, init_done;
  inst_t inst;
  logic [C-1:0] data, mask, resp_rdata;
  iop_e resp_op;
  logic [NB*M-1:0] resp_match;

  panda_chip #(.ROWS(R), .COLS(C), .MAT_R(MR), .MAT_C(MC), .BANK_R(BR), .BANK_C(BC)) dut (.*);
  always #5 clk = ~clk;

  logic [C-1:0] mdl [NB][M][R];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;
  int n_resp = 0;
  always @(negedge clk) if (resp_valid) n_resp++;

  // mechanism counters
  int n_init = 0, n_full = 0, n_op [6], n_match = 0, n_mismatch = 0, n_carry = 0;
  int n_const_row = 0, n_bcast = 0, n_minus = 0, n_plus = 0;

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s (t=%0d)", w, cyc); end
  endtask

  function automatic logic sel(inst_t i, int b, int m);
    return (i.all_banks || int'(i.bank) == b) && i.mat_mask[m];
  endfunction

  function automatic int n_of(inst_t i);
    return (i.size == 0) ? 1 : int'(i.size);
  endfunction

  // reference model: apply one instruction, return expected match bits and read row
  task automatic model(input inst_t i, input logic [C-1:0] d, input logic [C-1:0] mk,
                       output logic [NB*M-1:0] em, output logic [C-1:0] er);
    int n; n = n_of(i);
    em = '0; er = '0;
    for (int b = 0; b < NB; b++) for (int m = 0; m < M; m++) if (sel(i, b, m)) begin
      case (i.op)
        I_WRITE: mdl[b][m][i.dst] = (mdl[b][m][i.dst] & ~mk) | (d & mk);
        I_MEM_INSERT: for (int r = 0; r < n; r++)
          mdl[b][m][i.dst + r] = (mdl[b][m][i.dst + r] & ~mk) | (mdl[b][m][i.src1 + r] & mk);
        I_LOGIC: begin
          logic [C-1:0] a, bb, c, y;
          a = mdl[b][m][i.src1]; bb = mdl[b][m][i.src2]; c = mdl[b][m][i.src3];
          case (i.lop)
            LOP_READ:  y = a;
            LOP_AND3:  y = a & bb & c;   LOP_NAND3: y = ~(a & bb & c);
            LOP_AND2:  y = a & bb;       LOP_NAND2: y = ~(a & bb);
            LOP_OR3:   y = a | bb | c;   LOP_NOR3:  y = ~(a | bb | c);
            LOP_OR2:   y = a | bb;       LOP_NOR2:  y = ~(a | bb);
            LOP_XOR2:  y = a ^ bb;       LOP_XNOR2: y = ~(a ^ bb);
            LOP_MAJ:   y = (a&bb)|(a&c)|(bb&c);
            LOP_MIN:   y = ~((a&bb)|(a&c)|(bb&c));
            default:   y = a ^ bb ^ c;
          endcase
          mdl[b][m][i.dst] = (mdl[b][m][i.dst] & ~mk) | (y & mk);
        end
        I_CMP: begin
          logic e; e = 1;
          for (int r = 0; r < n; r++) e &= &(~(mdl[b][m][i.src1 + r] ^ mdl[b][m][i.src2 + r]) | ~mk);
          em[b*M + m] = e;
        end
        I_ADD: for (int c = 0; c < C; c++) if (mk[c]) begin
          // bit-serial, LSB first, each Sum bit written before the next bit is read
          logic cy, a, bw, any;
          cy = 0; any = 0;
          for (int r = 0; r < n; r++) begin
            a = mdl[b][m][i.src1 + r][c];
            case (i.bmode)
              BM_PLUS1:  bw = (r == 0);
              BM_MINUS1: bw = 1'b1;
              default:   bw = mdl[b][m][i.src2 + r][c];
            endcase
            mdl[b][m][i.dst + r][c] = a ^ bw ^ cy;
            cy = (a & bw) | (a & cy) | (bw & cy);
            any |= cy;
          end
          if (any) n_carry++;
        end
        default: ;
      endcase
    end
    if (i.op == I_READ) begin
      int lm; lm = 0;
      for (int m = M - 1; m >= 0; m--) if (i.mat_mask[m]) lm = m;
      er = mdl[i.bank][lm][i.src1];
    end
  endtask

  function automatic int latency(inst_t i);
    int n; n = n_of(i);
    case (i.op)
      I_WRITE:      return 3;
      I_READ:       return 4;
      I_LOGIC:      return 4;
      I_MEM_INSERT: return 2 * n + 2;
      I_CMP:        return n + 3;
      default:      return 3 * n + 3;
    endcase
  endfunction

  // issue one instruction to an idle chip, wait for its response and check it
  task automatic run(input inst_t i, input logic [C-1:0] d, input logic [C-1:0] mk,
                     output logic [NB*M-1:0] got_m, output logic [C-1:0] got_r);
    logic [NB*M-1:0] em; logic [C-1:0] er; int t0;
    @(negedge clk);
    inst = i; data = d; mask = mk; inst_valid = 1;
    while (!inst_ready) @(negedge clk);
    @(negedge clk); t0 = cyc; inst_valid = 0;
    while (!resp_valid) @(negedge clk);
    chk($sformatf("latency op %0d: %0d", i.op, cyc - t0), cyc - t0 == latency(i));
    model(i, d, mk, em, er);
    chk($sformatf("resp op %0d", i.op), resp_op == i.op);
    if (i.op == I_CMP) begin
      chk("cmp match bits", resp_match == em);
      for (int k = 0; k < NB*M; k++) if (sel(i, k / M, k % M)) begin
        if (resp_match[k]) n_match++; else n_mismatch++;
      end
    end
    if (i.op == I_READ) chk("read data", resp_rdata == er);
    if ((i.all_banks ? NB : 1) * $countones(i.mat_mask[M-1:0]) > 1) n_bcast++;
    if (i.op == I_LOGIC && i.lop inside {LOP_AND2, LOP_NAND2, LOP_OR2, LOP_NOR2, LOP_XOR2, LOP_XNOR2}) n_const_row++;
    if (i.op == I_CMP) n_const_row++;
    if (i.op == I_ADD && i.bmode == BM_MINUS1) n_minus++;
    if (i.op == I_ADD && i.bmode == BM_PLUS1) n_plus++;
    n_op[i.op]++;
    got_m = resp_match; got_r = resp_rdata;
  endtask

  function automatic inst_t mk_inst(iop_e op, int bank, logic [MAT_MAX-1:0] mm, int s1, int s2, int s3,
                                    int dst, int size, lop_e l = LOP_READ, bmode_e bm = BM_ROWS,
                                    logic all = 0);
    inst_t i;
    i = '0; i.op = op; i.bank = BANK_AW'(bank); i.mat_mask = mm; i.all_banks = all;
    i.src1 = ROW_AW'(s1); i.src2 = ROW_AW'(s2); i.src3 = ROW_AW'(s3); i.dst = ROW_AW'(dst);
    i.size = SIZE_W'(size); i.lop = l; i.bmode = bm;
    return i;
  endfunction

  // encode a DNA string, 2 bits per base (A=00, T=01, C=10, G=11, Fig. 10b)
  function automatic logic [C-1:0] enc(string s);
    logic [C-1:0] v; v = '0;
    for (int p = 0; p < s.len(); p++) begin
      logic [1:0] code;
      case (s[p])
        "A": code = 2'b00; "T": code = 2'b01; "C": code = 2'b10; default: code = 2'b11;
      endcase
      v[2*p +: 2] = code;
    end
    return v;
  endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [NB*M-1:0] gm; logic [C-1:0] gr;

  initial begin
    inst = '0; data = '0; mask = '0;
    foreach (n_op[k]) n_op[k] = 0;
    // the model starts from the same random contents: filled below by host writes
    repeat (3) @(negedge clk); rst_n = 1;
    while (!init_done) @(negedge clk);
    n_init++;
    for (int b = 0; b < NB; b++) for (int m = 0; m < M; m++) begin
      for (int r = 0; r < R; r++) mdl[b][m][r] = '0;
      mdl[b][m][ZR] = '0; mdl[b][m][ON] = '1;
    end
    // clear the working rows of every sub-array with broadcast writes
    for (int r = 0; r < ZR; r++)
      run(mk_inst(I_WRITE, 0, '1, 0, 0, 0, r, 1, LOP_READ, BM_ROWS, 1), '0, '1, gm, gr);

    // ---- 1. hash table (Algorithm 1) in bank 0, mat 0 ----
    begin
      string rd; int k, nk; logic [C-1:0] kmask; string keys [$];
      rd = "CGTGCGTGCTT"; k = 5; nk = 0;
      kmask = (C'(1) << (2 * k)) - 1;
      for (int p = 0; p + k <= rd.len(); p++) begin
        string km; int hit;
        km = rd.substr(p, p + k - 1); hit = -1;
        run(mk_inst(I_WRITE, 0, 16'h1, 0, 0, 0, TEMP, 1), enc(km), '1, gm, gr);
        for (int j = 0; j < nk && hit < 0; j++) begin
          run(mk_inst(I_CMP, 0, 16'h1, TEMP, KMER0 + j, 0, 0, 1), '0, kmask, gm, gr);
          if (gm[0]) hit = j;
        end
        if (hit >= 0)
          run(mk_inst(I_ADD, 0, 16'h1, VAL0, 0, 0, VAL0, VBITS, LOP_READ, BM_PLUS1), '0,
              C'(1) << hit, gm, gr);
        else begin
          run(mk_inst(I_MEM_INSERT, 0, 16'h1, TEMP, 0, 0, KMER0 + nk, 1), '0, '1, gm, gr);
          run(mk_inst(I_ADD, 0, 16'h1, VAL0, 0, 0, VAL0, VBITS, LOP_READ, BM_PLUS1), '0,
              C'(1) << nk, gm, gr);
          keys.push_back(km); nk++;
        end
      end
      chk("hash table has 6 keys", nk == 6);
      // read the table back: keys and their vertical 8-bit counts
      begin
        logic [C-1:0] vrow [VBITS];
        for (int r = 0; r < VBITS; r++) begin
          run(mk_inst(I_READ, 0, 16'h1, VAL0 + r, 0, 0, 0, 1), '0, '1, gm, gr);
          vrow[r] = gr;
        end
        for (int j = 0; j < nk; j++) begin
          int cnt; cnt = 0;
          for (int r = 0; r < VBITS; r++) cnt |= int'(vrow[r][j]) << r;
          chk($sformatf("count of %s", keys[j]), cnt == ((keys[j] == "CGTGC") ? 2 : 1));
          run(mk_inst(I_READ, 0, 16'h1, KMER0 + j, 0, 0, 0, 1), '0, '1, gm, gr);
          chk($sformatf("key %s", keys[j]), (gr & kmask) == enc(keys[j]));
        end
      end
    end

    // ---- 2. start vertex (Fig. 12), broadcast to every sub-array ----
    begin
      // columns v1..v6 = 0..5; 4-bit words, LSB first
      int ea [6] = '{1, 1, 2, 1, 0, 1};     // first out-edge weight of each source
      int eb [6] = '{0, 0, 0, 1, 0, 0};     // second out-edge weight (v4 -> v6)
      int ia [6] = '{1, 1, 1, 2, 1, 1};     // in-degree contributions
      int od [6] = '{1, 1, 2, 2, 0, 1};
      localparam int A0 = 30, B0 = 34, O0 = 38, I0 = 42, P0 = 46;
      for (int r = 0; r < 4; r++) begin
        logic [C-1:0] wa, wb, wi;
        wa = '0; wb = '0; wi = '0;
        for (int v = 0; v < 6; v++) begin
          wa[v] = 1'((ea[v] >> r) & 1); wb[v] = 1'((eb[v] >> r) & 1); wi[v] = 1'((ia[v] >> r) & 1);
        end
        run(mk_inst(I_WRITE, 0, 16'h3, 0, 0, 0, A0 + r, 1, LOP_READ, BM_ROWS, 1), wa, '1, gm, gr);
        run(mk_inst(I_WRITE, 0, 16'h3, 0, 0, 0, B0 + r, 1, LOP_READ, BM_ROWS, 1), wb, '1, gm, gr);
        run(mk_inst(I_WRITE, 0, 16'h3, 0, 0, 0, I0 + r, 1, LOP_READ, BM_ROWS, 1), wi, '1, gm, gr);
      end
      // out_degree = A + B ; in_degree + 1
      run(mk_inst(I_ADD, 0, 16'h3, A0, B0, 0, O0, 4, LOP_READ, BM_ROWS, 1), '0, '1, gm, gr);
      run(mk_inst(I_ADD, 0, 16'h3, I0, 0, 0, P0, 4, LOP_READ, BM_PLUS1, 1), '0, '1, gm, gr);
      for (int v = 0; v < 6; v++) begin
        int o; o = 0;
        for (int r = 0; r < 4; r++) begin
          run(mk_inst(I_READ, 1, 16'h2, O0 + r, 0, 0, 0, 1), '0, '1, gm, gr);
          o |= int'(gr[v]) << r;
        end
        chk($sformatf("out_degree v%0d", v + 1), o == od[v]);
      end
      for (int v = 0; v < 6; v++) begin
        run(mk_inst(I_CMP, 0, 16'h3, O0, P0, 0, 0, 4, LOP_READ, BM_ROWS, 1), '0, C'(1) << v, gm, gr);
        chk($sformatf("start test v%0d", v + 1), gm == ((v == 2) ? '1 : '0));
      end
      // Fleury: remove one out-edge of the start vertex v3
      run(mk_inst(I_ADD, 0, 16'h3, O0, 0, 0, O0, 4, LOP_READ, BM_MINUS1, 1), '0, C'(1) << 2, gm, gr);
    end

    // ---- 3. random instructions with different data per sub-array ----
    for (int b = 0; b < NB; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < 6; r++)
        run(mk_inst(I_WRITE, b, MAT_MAX'(1) << m, 0, 0, 0, 50 + r, 1), C'($urandom), C'($urandom) | C'(1), gm, gr);
    for (int t = 0; t < 120; t++) begin
      inst_t i; logic all; int bk; logic [MAT_MAX-1:0] mm;
      all = 1'($urandom); bk = $urandom_range(0, NB - 1);
      mm = MAT_MAX'($urandom_range(1, (1 << M) - 1));
      case ($urandom_range(0, 4))
        0: i = mk_inst(I_LOGIC, bk, mm, $urandom_range(50, 55), $urandom_range(50, 55),
                       $urandom_range(50, 55), $urandom_range(50, 55), 1, lop_e'($urandom_range(0, 13)),
                       BM_ROWS, all);
        1: i = mk_inst(I_MEM_INSERT, bk, mm, $urandom_range(50, 52), 0, 0, $urandom_range(53, 54),
                       $urandom_range(0, 2), LOP_READ, BM_ROWS, all);
        2: i = mk_inst(I_ADD, bk, mm, 50, 52, 0, 53, 3, LOP_READ, bmode_e'($urandom_range(0, 2)), all);
        3: i = mk_inst(I_CMP, bk, mm, $urandom_range(50, 52), $urandom_range(50, 53), 0, 0,
                       $urandom_range(1, 2), LOP_READ, BM_ROWS, all);
        default: i = mk_inst(I_READ, bk, mm, $urandom_range(50, 55), 0, 0, 0, 1);
      endcase
      run(i, C'($urandom), ($urandom_range(0, 1)) ? '1 : C'($urandom), gm, gr);
    end

    // ---- burst: six writes back to back fill the four-entry I/O buffer ----
    begin
      int base;
      base = n_resp;
      for (int t = 0; t < 10; t++) begin
        @(negedge clk);
        inst = mk_inst(I_WRITE, 0, 16'h1, 0, 0, 0, 54, 1); data = C'(t); mask = '1; inst_valid = 1;
        while (!inst_ready) begin n_full++; @(negedge clk); end
        @(posedge clk);
      end
      @(negedge clk); inst_valid = 0;
      while (n_resp < base + 10) @(negedge clk);
      repeat (2) @(negedge clk);
      mdl[0][0][54] = C'(9);
      n_op[I_WRITE] += 10;
    end

    // ---- final: read every working row of every sub-array ----
    for (int b = 0; b < NB; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < ZR; r++)
        run(mk_inst(I_READ, b, MAT_MAX'(1) << m, r, 0, 0, 0, 1), '0, '1, gm, gr);

    $display("mechanisms: init=%0d full=%0d write=%0d read=%0d insert=%0d cmp=%0d add=%0d logic=%0d",
             n_init, n_full, n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_op[5]);
    $display("            match=%0d mismatch=%0d carry=%0d const_row=%0d bcast=%0d plus1=%0d minus1=%0d",
             n_match, n_mismatch, n_carry, n_const_row, n_bcast, n_plus, n_minus);
    chk("init happened", n_init > 0);
    chk("buffer full happened", n_full > 0);
    for (int k = 0; k < 6; k++) chk($sformatf("op %0d happened", k), n_op[k] > 0);
    chk("match happened", n_match > 0);
    chk("mismatch happened", n_mismatch > 0);
    chk("carry happened", n_carry > 0);
    chk("constant row used", n_const_row > 0);
    chk("broadcast happened", n_bcast > 0);
    chk("+1 happened", n_plus > 0);
    chk("-1 happened", n_minus > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
