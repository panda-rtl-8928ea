// tb_global_decoder: checks mat enables for the addressed bank, other banks, broadcast to
// all banks and an idle controller, and the lowest-index read mat.
module tb_global_decoder;
  import panda_pkg::*;
  localparam int M = 16;
  logic [BANK_AW-1:0] bank_id, tgt_bank;
  logic valid, all_banks, bank_hit;
  logic [MAT_MAX-1:0] mat_mask;
  logic [M-1:0] mat_en;
  logic [$clog2(M+1)-1:0] rd_mat;
  int checks = 0, failures = 0;
  global_decoder #(.MATS(M)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic hit; int low;
      bank_id = BANK_AW'($urandom); tgt_bank = ($urandom_range(0, 1)) ? bank_id : BANK_AW'($urandom);
      valid = ($urandom_range(0, 3) != 0); all_banks = ($urandom_range(0, 3) == 0);
      mat_mask = MAT_MAX'($urandom);
      #1;
      hit = valid && (all_banks || tgt_bank == bank_id);
      low = 0;
      for (int m = M - 1; m >= 0; m--) if (mat_mask[m]) low = m;
      checks++; if (bank_hit !== hit) begin failures++; $display("FAIL hit"); end
      checks++; if (mat_en !== (hit ? mat_mask[M-1:0] : '0)) begin failures++; $display("FAIL en"); end
      checks++; if (int'(rd_mat) != low) begin failures++; $display("FAIL rd_mat"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
