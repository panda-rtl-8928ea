// tb_dpu: checks the DPU AND unit: per-lane accumulation across rows, clearing, the
// column mask, lanes that do not accumulate, and the match of the paper's Fig. 10b
// example (XNOR row 001100 -> k_i != k_j, 111111 -> k_i = k_j).
module tb_dpu;
  localparam int C = 6, L = 2;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [L-1:0] acc = '0, match;
  logic [C-1:0] mask;
  logic [L*C-1:0] din, col_eq;
  int checks = 0, failures = 0;
  dpu #(.COLS(C), .LANES(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mask = '1; din = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // Fig. 10b: lane 0 sees 001100 (mismatch), lane 1 sees 111111 (match)
    clr = 1; @(negedge clk); clr = 0;
    din = {6'b111111, 6'b001100}; acc = 2'b11; @(negedge clk); acc = 0;
    chk("fig10b mismatch", match[0] == 1'b0);
    chk("fig10b match", match[1] == 1'b1);
    // random multi-row accumulation with masks
    for (int t = 0; t < 50; t++) begin
      logic [L*C-1:0] e; int n;
      e = '1; n = $urandom_range(1, 4);
      mask = C'($urandom);
      clr = 1; @(negedge clk); clr = 0;
      for (int r = 0; r < n; r++) begin
        din = (L*C)'({$urandom, $urandom}) | (L*C)'({$urandom, $urandom});
        acc = L'($urandom_range(1, 3));
        for (int l = 0; l < L; l++) if (acc[l]) e[l*C +: C] &= din[l*C +: C];
        @(negedge clk); acc = 0;
      end
      chk("col_eq", col_eq == e);
      for (int l = 0; l < L; l++)
        chk("match", match[l] == &(e[l*C +: C] | ~mask));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
