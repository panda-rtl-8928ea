// panda_ctrl: chip controller of PANDA. It executes host instructions by broadcasting
// one micro-operation per cycle to the sub-arrays and sequencing the DPUs and row buffers.
//
// Instructions (panda_pkg::iop_e) and their micro-operation sequences, i = 0 .. n-1 with
// n = size (0 counts as 1):
//   I_WRITE       dst <- data via Din-Inter, columns selected by mask         1 cycle
//   I_READ        sense src1 (R_M reference); load the bank row buffer        2 cycles
//   I_MEM_INSERT  PANDA_Mem_insert: sense src1+i, write dst+i from SA_out1    2n cycles
//   I_LOGIC       dst <- lop(src1, src2, src3), any Table I function          2 cycles
//   I_CMP         PANDA_Cmp: XNOR2(src1+i, src2+i) on every column; the DPUs
//                 AND the rows and the columns selected by mask into one match
//                 bit per sub-array (pipelined, one row per cycle)            n+1 cycles
//   I_ADD         PANDA_Add: words stored vertically, LSB in the first row,
//                 one word per column. Clear the carry row, then per bit
//                 sense Sum/Carry of (src1+i, B_i, carry) in one cycle, write
//                 Sum to dst+i and Carry to the other carry row               1+3n cycles
//                 B_i is row src2+i, or the constant rows for +1 / -1 (bmode).
// After reset the controller first writes the reserved rows of every sub-array: the
// all-zeros and all-ones rows used by 2-input functions and the two carry rows (4 cycles).
// Interface: valid/ready instruction input; 'resp_valid' pulses for one cycle when an
// instruction completes, with the match bits of every sub-array (I_CMP; zero for
// sub-arrays not addressed) and the row read from the addressed bank (I_READ).
// Timing: the instruction is accepted in the cycle in_valid && in_ready; its first
// micro-operation is issued in the next cycle and resp_valid follows the last one.
// Following the paper: the three instructions, the single-cycle XNOR compare with the
// DPU AND, the single-cycle Sum/Carry per bit and the two carry rows. Own choices: the
// instruction encoding, the plain read/write/logic instructions, the ping-pong use of
// the two carry rows and the +1/-1 constant operands.
module panda_ctrl
  import panda_pkg::*;
#(
  parameter int unsigned ROWS    = 1024,
  parameter int unsigned COLS    = 256,
  parameter int unsigned N_BANKS = 256,
  parameter int unsigned MATS    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // instruction input (from the I/O buffer)
  input  logic                    in_valid,
  output logic                    in_ready,
  input  inst_t                   in_inst,
  input  logic [COLS-1:0]         in_data,
  input  logic [COLS-1:0]         in_mask,
  // broadcast to the banks
  output logic                    b_valid,
  output uop_t                    b_uop,
  output logic                    b_all_banks,
  output logic [BANK_AW-1:0]      b_bank,
  output logic [MAT_MAX-1:0]      b_mat_mask,
  output logic [COLS-1:0]         b_col_sel,
  output logic [COLS-1:0]         b_din,
  output logic                    b_rb_load,
  output logic                    b_dpu_clr,
  output logic                    b_dpu_acc,
  // returned by the banks
  input  logic [N_BANKS*MATS-1:0] b_match,
  input  logic [N_BANKS*COLS-1:0] b_rb_data,
  // completion
  output logic                    resp_valid,
  output iop_e                    resp_op,
  output logic [N_BANKS*MATS-1:0] resp_match,
  output logic [COLS-1:0]         resp_rdata,
  output logic                    init_done
);

  localparam logic [ROW_AW-1:0] ZERO = row_zero(ROWS);
  localparam logic [ROW_AW-1:0] ONE  = row_one(ROWS);
  localparam logic [ROW_AW-1:0] CR0  = row_carry(ROWS, 1'b0);
  localparam logic [ROW_AW-1:0] CR1  = row_carry(ROWS, 1'b1);

  typedef enum logic [1:0] { S_INIT, S_IDLE, S_EXEC, S_RESP } state_e;

  state_e            state;
  inst_t             cur;
  logic [COLS-1:0]   cur_data, cur_mask;
  logic [SIZE_W-1:0] idx;      // current row/bit
  logic [1:0]        ph;       // phase within a row/bit
  logic [1:0]        init_cnt;
  logic              last;     // current micro-operation is the instruction's last

  logic [SIZE_W-1:0] n_m1;
  assign n_m1 = (cur.size == '0) ? '0 : cur.size - 1'b1;

  assign in_ready  = (state == S_IDLE);
  assign init_done = (state != S_INIT);

  function automatic logic [ROW_AW-1:0] off(logic [ROW_AW-1:0] base, logic [SIZE_W-1:0] i);
    return base + ROW_AW'(i);
  endfunction

  // Micro-operation of the current cycle.
  always_comb begin
    b_uop       = '{kind: UOP_NOP, lop: LOP_READ, r1: '0, r2: '0, r3: '0, wrow: '0,
                    wsrc: WSRC_INTER};
    b_valid     = (state != S_IDLE);
    b_all_banks = cur.all_banks;
    b_bank      = cur.bank;
    b_mat_mask  = cur.mat_mask;
    b_col_sel   = cur_mask;
    b_din       = cur_data;
    b_rb_load   = 1'b0;
    b_dpu_clr   = 1'b0;
    b_dpu_acc   = 1'b0;
    last        = 1'b0;
    unique case (state)
      S_INIT: begin
        b_all_banks = 1'b1;
        b_mat_mask  = '1;
        b_col_sel   = '1;
        b_uop.kind  = UOP_WRITE;
        unique case (init_cnt)
          2'd0:    begin b_uop.wrow = ZERO; b_din = '0; end
          2'd1:    begin b_uop.wrow = ONE;  b_din = '1; end
          2'd2:    begin b_uop.wrow = CR0;  b_din = '0; end
          default: begin b_uop.wrow = CR1;  b_din = '0; end
        endcase
      end
      S_EXEC: begin
        unique case (cur.op)
          I_WRITE: begin
            b_uop.kind = UOP_WRITE;
            b_uop.wrow = cur.dst;
            b_uop.wsrc = WSRC_INTER;
            last       = 1'b1;
          end
          I_READ: begin
            if (ph == 2'd0) begin
              b_uop.kind = UOP_SENSE;
              b_uop.lop  = LOP_READ;
              b_uop.r1   = cur.src1;
            end else begin
              b_rb_load = 1'b1;
              last      = 1'b1;
            end
          end
          I_MEM_INSERT: begin
            if (ph == 2'd0) begin
              b_uop.kind = UOP_SENSE;
              b_uop.lop  = LOP_READ;
              b_uop.r1   = off(cur.src1, idx);
            end else begin
              b_uop.kind = UOP_WRITE;
              b_uop.wrow = off(cur.dst, idx);
              b_uop.wsrc = WSRC_SA1;
              last       = (idx == n_m1);
            end
          end
          I_LOGIC: begin
            if (ph == 2'd0) begin
              b_uop.kind = UOP_SENSE;
              b_uop.lop  = cur.lop;
              b_uop.r1   = cur.src1;
              b_uop.r2   = cur.src2;
              b_uop.r3   = cur.src3;
            end else begin
              b_uop.kind = UOP_WRITE;
              b_uop.wrow = cur.dst;
              b_uop.wsrc = WSRC_SA1;
              last       = 1'b1;
            end
          end
          I_CMP: begin
            // row idx is sensed while row idx-1 is accumulated; one extra cycle drains
            b_dpu_clr = (idx == '0) && (ph == 2'd0);
            b_dpu_acc = (idx != '0) || (ph != 2'd0);
            if (ph == 2'd0) begin
              b_uop.kind = UOP_SENSE;
              b_uop.lop  = LOP_XNOR2;
              b_uop.r1   = off(cur.src1, idx);
              b_uop.r2   = off(cur.src2, idx);
            end else begin
              last = 1'b1;
            end
          end
          I_ADD: begin
            if (ph == 2'd3) begin                 // clear carry row 0
              b_uop.kind = UOP_WRITE;
              b_uop.wrow = CR0;
              b_uop.wsrc = WSRC_INTER;
              b_din      = '0;
            end else if (ph == 2'd0) begin        // Sum and Carry in one cycle
              b_uop.kind = UOP_SENSE;
              b_uop.lop  = LOP_ADD;
              b_uop.r1   = off(cur.src1, idx);
              unique case (cur.bmode)
                BM_PLUS1:  b_uop.r2 = (idx == '0) ? ONE : ZERO;
                BM_MINUS1: b_uop.r2 = ONE;
                default:   b_uop.r2 = off(cur.src2, idx);
              endcase
              b_uop.r3   = idx[0] ? CR1 : CR0;
            end else if (ph == 2'd1) begin        // write Sum
              b_uop.kind = UOP_WRITE;
              b_uop.wrow = off(cur.dst, idx);
              b_uop.wsrc = WSRC_SA1;
            end else begin                        // write Carry to the other carry row
              b_uop.kind = UOP_WRITE;
              b_uop.wrow = idx[0] ? CR0 : CR1;
              b_uop.wsrc = WSRC_SA2;
              last       = (idx == n_m1);
            end
          end
          default: last = 1'b1;
        endcase
      end
      default: ;
    endcase
  end

  // Sequencing.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      init_cnt   <= '0;
      cur        <= '0;
      cur_data   <= '0;
      cur_mask   <= '0;
      idx        <= '0;
      ph         <= '0;
      resp_valid <= 1'b0;
      resp_op    <= I_WRITE;
      resp_match <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == 2'd3) state <= S_IDLE;
        end
        S_IDLE: begin
          if (in_valid) begin
            cur      <= in_inst;
            cur_data <= in_data;
            cur_mask <= in_mask;
            idx      <= '0;
            ph       <= (in_inst.op == I_ADD) ? 2'd3 : 2'd0;
            state    <= S_EXEC;
          end
        end
        S_EXEC: begin
          if (last) begin
            state <= S_RESP;
          end else begin
            unique case (cur.op)
              I_ADD: begin
                if (ph == 2'd2) begin
                  ph  <= 2'd0;
                  idx <= idx + 1'b1;
                end else begin
                  ph <= (ph == 2'd3) ? 2'd0 : ph + 1'b1;
                end
              end
              I_CMP: begin
                if (idx == n_m1) ph <= 2'd1;
                else             idx <= idx + 1'b1;
              end
              I_MEM_INSERT: begin
                if (ph == 2'd1) begin
                  ph  <= 2'd0;
                  idx <= idx + 1'b1;
                end else begin
                  ph <= 2'd1;
                end
              end
              default: ph <= ph + 1'b1;
            endcase
          end
        end
        default: begin  // S_RESP
          resp_valid <= 1'b1;
          resp_op    <= cur.op;
          resp_match <= (cur.op == I_CMP) ? b_match : '0;
          state      <= S_IDLE;
        end
      endcase
    end
  end

  // The row returned by I_READ comes from the addressed bank's row buffer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      resp_rdata <= '0;
    else if (state == S_RESP)
      resp_rdata <= (int'(cur.bank) < N_BANKS) ? b_rb_data[int'(cur.bank)*COLS +: COLS] : '0;
  end

endmodule
