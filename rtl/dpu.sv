// dpu: Digital Processing Unit shared by the computational sub-arrays of a bank.
//
// PANDA_Cmp leaves one row of XNOR results per compared row on the SA outputs of each
// sub-array; the DPU's AND unit (Fig. 10b of the paper) reduces them to a single
// match/mismatch decision that the controller uses to choose the next memory operation
// (insert a new k-mer with frequency 1, or increment the frequency of the match).
// How: one lane per attached sub-array. Each lane keeps a column accumulator that is set
// to all ones by 'clr' and ANDed with the lane's SA row on every 'acc' cycle, so a
// comparison that spans several rows (a long k-mer, or a vertical multi-bit word) is
// reduced across rows as well. 'match' is the AND over the columns selected by 'mask'.
// Interface: 'clr' and the per-lane 'acc' come from the controller and the lanes'
// sub-arrays; 'din' carries LANES rows.
// Timing: 'acc' takes effect at the rising edge; 'match' and 'col_eq' are combinational
// from the accumulator, valid the cycle after the last 'acc'.
// Following the paper: the AND reduction. Own choices: the row accumulator and masking,
// and two lanes per DPU (the paper only says DPUs are shared between sub-arrays).
module dpu #(
  parameter int unsigned COLS  = 256,
  parameter int unsigned LANES = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic [LANES-1:0]      acc,
  input  logic [COLS-1:0]       mask,
  input  logic [LANES*COLS-1:0] din,
  output logic [LANES*COLS-1:0] col_eq,
  output logic [LANES-1:0]      match
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      col_eq <= '1;
    else if (clr)
      col_eq <= '1;
    else
      for (int l = 0; l < LANES; l++)
        if (acc[l]) col_eq[l*COLS +: COLS] <= col_eq[l*COLS +: COLS] & din[l*COLS +: COLS];
  end

  always_comb
    for (int l = 0; l < LANES; l++)
      match[l] = &(col_eq[l*COLS +: COLS] | ~mask);

endmodule
