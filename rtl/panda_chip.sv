// panda_chip: top level of the PANDA processing-in-MRAM DNA-assembly accelerator.
//
// A host streams instructions (PANDA_Mem_insert, PANDA_Cmp, PANDA_Add and plain
// read/write/logic accesses) into the I/O buffer. The controller executes them by
// broadcasting micro-operations to BANK_R x BANK_C banks, each a MAT_R x MAT_C matrix of
// ROWS x COLS computational sub-arrays. Every addressed sub-array performs the same
// operation on its own data in the same cycle, so one instruction works on all COLS
// columns of as many sub-arrays as the instruction's bank/mat fields select.
// Default size is the configuration evaluated in the paper: 1024 x 256 sub-arrays, 4x4
// mats per bank, 16x16 banks per chip (4096 sub-arrays, 1 Gbit).
// Interface: instruction valid/ready ('inst', with COLS-wide 'data' and 'mask'); a
// one-cycle 'resp_valid' per completed instruction with per-sub-array match bits (bank b,
// mat m at bit b*MATS+m) and the row read by I_READ; 'init_done' once the reserved rows
// have been written after reset.
// Timing: see panda_ctrl for cycles per instruction; the I/O buffer adds one cycle.
// Following the paper: the hierarchy and its sizes. Own choices: instruction encoding,
// the FIFO depth and the flat broadcast in place of the H-tree.
module panda_chip
  import panda_pkg::*;
#(
  parameter int unsigned ROWS       = 1024,
  parameter int unsigned COLS       = 256,
  parameter int unsigned MAT_R      = 4,
  parameter int unsigned MAT_C      = 4,
  parameter int unsigned BANK_R     = 16,
  parameter int unsigned BANK_C     = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned N_BANKS   = BANK_R * BANK_C,
  localparam int unsigned MATS      = MAT_R * MAT_C
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    inst_valid,
  output logic                    inst_ready,
  input  inst_t                   inst,
  input  logic [COLS-1:0]         data,
  input  logic [COLS-1:0]         mask,
  output logic                    resp_valid,
  output iop_e                    resp_op,
  output logic [N_BANKS*MATS-1:0] resp_match,
  output logic [COLS-1:0]         resp_rdata,
  output logic                    init_done
);

  localparam int unsigned IW = $bits(inst_t) + 2 * COLS;

  logic                    q_valid, q_ready;
  logic [IW-1:0]           q_data;
  inst_t                   q_inst;
  logic [COLS-1:0]         q_wdata, q_mask;

  io_buffer #(.WIDTH(IW), .DEPTH(FIFO_DEPTH)) u_io (
    .clk, .rst_n,
    .in_valid(inst_valid), .in_ready(inst_ready), .in_data({inst, data, mask}),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data)
  );
  assign {q_inst, q_wdata, q_mask} = q_data;

  logic                    b_valid, b_rb_load, b_dpu_clr, b_dpu_acc, b_all_banks;
  uop_t                    b_uop;
  logic [BANK_AW-1:0]      b_bank;
  logic [MAT_MAX-1:0]      b_mat_mask;
  logic [COLS-1:0]         b_col_sel, b_din;
  logic [N_BANKS*MATS-1:0] b_match;
  logic [N_BANKS*COLS-1:0] b_rb_data;

  panda_ctrl #(.ROWS(ROWS), .COLS(COLS), .N_BANKS(N_BANKS), .MATS(MATS)) u_ctrl (
    .clk, .rst_n,
    .in_valid(q_valid), .in_ready(q_ready), .in_inst(q_inst), .in_data(q_wdata),
    .in_mask(q_mask),
    .b_valid, .b_uop, .b_all_banks, .b_bank, .b_mat_mask, .b_col_sel, .b_din,
    .b_rb_load, .b_dpu_clr, .b_dpu_acc, .b_match, .b_rb_data,
    .resp_valid, .resp_op, .resp_match, .resp_rdata, .init_done
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    bank #(.ROWS(ROWS), .COLS(COLS), .MAT_R(MAT_R), .MAT_C(MAT_C)) u_bank (
      .clk, .rst_n,
      .bank_id  (BANK_AW'(b)),
      .valid    (b_valid),
      .uop      (b_uop),
      .all_banks(b_all_banks),
      .tgt_bank (b_bank),
      .mat_mask (b_mat_mask),
      .col_sel  (b_col_sel),
      .din_inter(b_din),
      .rb_load  (b_rb_load),
      .dpu_clr  (b_dpu_clr),
      .dpu_acc  (b_dpu_acc),
      .match    (b_match[b*MATS +: MATS]),
      .rb_data  (b_rb_data[b*COLS +: COLS])
    );
  end

endmodule
