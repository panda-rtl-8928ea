// bank: one PANDA memory bank, a MAT_R x MAT_C matrix of computational sub-arrays with a
// global decoder, a row buffer and shared DPUs (Fig. 4a of the paper; 4x4 mats per bank in
// the evaluated configuration).
// How: the controller broadcasts one micro-operation per cycle to all banks; the global
// decoder enables the addressed mats, which execute it in lock step on their own data.
// The row buffer captures the first enabled mat's sensed row; DPUs, each shared by two
// neighbouring mats, AND-reduce comparison results into one match bit per mat.
// Interface: 'bank_id' is this bank's index; the target fields come from the current
// instruction and are held stable by the controller; 'match' is already masked with the
// mat enables of the instruction.
// Timing: as csub (one cycle per micro-operation); row buffer and DPU update at the edge
// after their control strobe.
// Following the paper: mats, global decoder, row buffer, shared DPUs. Own choices: the
// pairing of mats on DPUs and the H-tree modelled as a plain broadcast.
// Two output pins are left open on purpose: a sub-array's SA_out2 (the carry) is only ever
// written back into its own array, and a DPU's per-column result is not needed outside it.
module bank
  import panda_pkg::*;
#(
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned COLS  = 256,
  parameter int unsigned MAT_R = 4,
  parameter int unsigned MAT_C = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [BANK_AW-1:0] bank_id,
  input  logic               valid,
  input  uop_t               uop,
  input  logic               all_banks,
  input  logic [BANK_AW-1:0] tgt_bank,
  input  logic [MAT_MAX-1:0] mat_mask,
  input  logic [COLS-1:0]    col_sel,
  input  logic [COLS-1:0]    din_inter,
  input  logic               rb_load,
  input  logic               dpu_clr,
  input  logic               dpu_acc,
  output logic [MAT_R*MAT_C-1:0] match,
  output logic [COLS-1:0]    rb_data
);

  localparam int unsigned MATS  = MAT_R * MAT_C;
  localparam int unsigned NDPU  = (MATS + 1) / 2;
  localparam int unsigned SELW  = $clog2(MATS + 1);

  logic [MATS-1:0]      mat_en;
  logic                 bank_hit;
  logic [SELW-1:0]      rd_mat;
  logic [MATS*COLS-1:0] sa1_all;
  logic [MATS-1:0]      sa_valid;

  global_decoder #(.MATS(MATS)) u_gdec (
    .bank_id, .valid, .all_banks, .tgt_bank, .mat_mask, .mat_en, .bank_hit, .rd_mat
  );

  for (genvar m = 0; m < MATS; m++) begin : g_mat
    csub #(.ROWS(ROWS), .COLS(COLS)) u_csub (
      .clk, .rst_n,
      .en       (mat_en[m]),
      .uop,
      .col_sel,
      .din_intra(rb_data),
      .din_inter,
      .sa_out1  (sa1_all[m*COLS +: COLS]),
      .sa_out2  (),
      .sa_valid (sa_valid[m])
    );
  end

  row_buffer #(.COLS(COLS), .MATS(MATS)) u_rb (
    .clk, .rst_n, .load(rb_load && bank_hit), .sel(rd_mat), .rows(sa1_all), .data(rb_data)
  );

  logic [2*NDPU*COLS-1:0] dpu_din;
  logic [2*NDPU-1:0]      dpu_match;
  logic [2*NDPU-1:0]      dpu_acc_l;

  // a lane accumulates only when its sub-array has just latched a fresh SA row
  always_comb begin
    dpu_acc_l = '0;
    dpu_acc_l[MATS-1:0] = dpu_acc ? sa_valid : '0;
    dpu_din = '1;
    dpu_din[MATS*COLS-1:0] = sa1_all;
  end

  for (genvar d = 0; d < NDPU; d++) begin : g_dpu
    dpu #(.COLS(COLS), .LANES(2)) u_dpu (
      .clk, .rst_n,
      .clr   (dpu_clr),
      .acc   (dpu_acc_l[d*2 +: 2]),
      .mask  (col_sel),
      .din   (dpu_din[d*2*COLS +: 2*COLS]),
      .col_eq(),
      .match (dpu_match[d*2 +: 2])
    );
  end

  assign match = dpu_match[MATS-1:0] & mat_en;

endmodule
