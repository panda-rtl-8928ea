// csub: PANDA computational sub-array (C-Sub), ROWS x COLS SOT-MRAM cells with their
// modified row decoder, column select, write driver, reconfigurable SAs and local Ctrl.
//
// What it does: in one memory cycle it either writes one row, or activates up to three
// rows at once and lets every bit-line's reconfigurable SA compute a function of the
// three cells of that column (read, (N)AND, (N)OR, X(N)OR, MAJ/MIN, or the full-adder
// Sum and Carry together). All COLS columns work in parallel, which is where the bulk
// bit-wise throughput of processing-in-memory comes from.
// How: csub_ctrl decodes the micro-operation (Table I); the modified row decoder reads
// the activated rows and counts, per bit-line, how many activated cells hold '1' (the
// digital stand-in for the parallel resistance seen by the sense current); reconfig_sa
// thresholds that count; write_driver picks the write data.
// Interface: 'en' selects this sub-array for the broadcast 'uop'; 'col_sel' is the column
// decoder output used by writes; 'din_intra' comes from the bank row buffer, 'din_inter'
// from the chip I/O. 'sa_out1'/'sa_out2' are the latched SA results (result, carry).
// Timing: one cycle per operation. A sensing result is visible on 'sa_out1/2' after the
// edge that ends the sensing cycle ('sa_valid' high for that one cycle); a write updates
// the array at the edge ending the write cycle, so a write of SA_out1 may directly follow
// the sensing cycle that produced it.
// Following the paper: 1024 x 256 geometry, multi-row activation, the SA and the write
// paths. Own choices: the cell array is an ordinary register array with no reset (the
// constant and carry rows are written by the chip controller after reset).
module csub
  import panda_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  uop_t            uop,
  input  logic [COLS-1:0] col_sel,
  input  logic [COLS-1:0] din_intra,
  input  logic [COLS-1:0] din_inter,
  output logic [COLS-1:0] sa_out1,
  output logic [COLS-1:0] sa_out2,
  output logic            sa_valid
);

  logic [COLS-1:0] mem [ROWS];

  logic              sense_en, inv, we;
  logic [2:0]        act;
  logic [ROW_AW-1:0] ra [3];
  logic [ROW_AW-1:0] wrow;
  sa_ctrl_t          sa_ctrl;
  wsrc_e             wsrc;

  csub_ctrl #(.ROWS(ROWS)) u_ctrl (
    .en, .uop, .sense_en, .act, .ra, .sa_ctrl, .inv, .we, .wrow, .wsrc
  );

  // Modified row decoder: up to three word-lines at once; each bit-line sums the cells.
  // The count of activated '1' cells per bit-line is formed as a thermometer code.
  logic [COLS-1:0] rd0, rd1, rd2, ge1, ge2, ge3;

  always_comb begin
    rd0 = (act[0] && (int'(ra[0]) < ROWS)) ? mem[ra[0]] : '0;
    rd1 = (act[1] && (int'(ra[1]) < ROWS)) ? mem[ra[1]] : '0;
    rd2 = (act[2] && (int'(ra[2]) < ROWS)) ? mem[ra[2]] : '0;
    ge1 = rd0 | rd1 | rd2;
    ge2 = (rd0 & rd1) | (rd0 & rd2) | (rd1 & rd2);
    ge3 = rd0 & rd1 & rd2;
  end

  reconfig_sa #(.WIDTH(COLS)) u_sa (
    .clk, .rst_n, .en(sense_en), .ctrl(sa_ctrl), .inv, .ge1, .ge2, .ge3,
    .out1(sa_out1), .out2(sa_out2), .valid(sa_valid)
  );

  logic [COLS-1:0] wdata, wen;

  write_driver #(.COLS(COLS)) u_wd (
    .we, .wsrc, .col_sel, .din_intra, .din_inter, .sa_out1, .sa_out2, .wdata, .wen
  );

  always_ff @(posedge clk) begin
    if (we && (int'(wrow) < ROWS))
      mem[wrow] <= (mem[wrow] & ~wen) | (wdata & wen);
  end

endmodule
