// global_decoder: bank-level decoder that turns the controller's target fields into the
// per-mat enables of the global word-lines (GWWL/GRWL in Fig. 4a of the paper) and picks
// the mat whose bit-lines drive the global read bit-lines into the row buffer.
// How: a mat is enabled when the bank is addressed (its own index, or a broadcast to all
// banks) and its bit in 'mat_mask' is set; broadcasting to several mats is how the
// parallelism degree P_d (sub-arrays working on the same operation at once) is set. The
// read mat is the lowest-numbered enabled one.
// Interface/timing: combinational.
// Following the paper: a global decoder feeding the sub-arrays of a bank. Own choices:
// the mask/broadcast addressing and the lowest-index read priority.
module global_decoder
  import panda_pkg::*;
#(
  parameter int unsigned MATS = 16
) (
  input  logic [BANK_AW-1:0]        bank_id,
  input  logic                      valid,
  input  logic                      all_banks,
  input  logic [BANK_AW-1:0]        tgt_bank,
  input  logic [MAT_MAX-1:0]        mat_mask,
  output logic [MATS-1:0]           mat_en,
  output logic                      bank_hit,
  output logic [$clog2(MATS+1)-1:0] rd_mat
);

  always_comb begin
    bank_hit = valid && (all_banks || (tgt_bank == bank_id));
    mat_en   = bank_hit ? mat_mask[MATS-1:0] : '0;
    rd_mat   = '0;
    for (int m = MATS - 1; m >= 0; m--)
      if (mat_mask[m]) rd_mat = ($clog2(MATS+1))'(m);
  end

endmodule
