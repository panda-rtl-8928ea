// reconfig_sa: one row of PANDA's reconfigurable sense amplifiers, one per bit-line.
//
// Each bit-line carries the parallel resistance of the cells whose read word-lines are
// active. In this digital model that analog quantity is the number of activated cells
// storing '1' (anti-parallel, high resistance), 0..3, carried as a thermometer code: ge1,
// ge2, ge3 say whether at least one, two or three activated cells hold '1' (equivalently
// whether V_sense lies above the OR3, MAJ or AND3 reference). Three sub-SAs compare it
// against programmable references, exactly as the paper's reference-selection scheme does:
//   SA-I   (C_OR3)        : level >= 1                 -> OR3  (complement NOR)
//   SA-II  (C_MAJ)        : level >= 2                 -> MAJ  (complement MIN), also Carry
//   SA-III (C_AND3 / C_M) : level >= 3 with R_AND3     -> AND3 (complement NAND)
//                           level >= 1 with R_M        -> memory read (one row active)
// Sub-SAs whose enable is low are power-gated and output 0. With all three of C_AND3,
// C_MAJ, C_OR3 set, the Add-box multiplexer forms Sum = Carry ? AND3 : OR3 (= XOR3), the
// paper's single-cycle full-adder formulation; Carry (MAJ) is always on out2.
//
// Interface: 'ge1/ge2/ge3' hold one bit per bit-line; 'ctrl' is the Table I enable set; 'inv'
// selects the complementary latch output (NAND/NOR/MIN) and is ignored for XOR3.
// Timing: the StrongARM latch is modelled as a register: when 'en' is high the comparison
// of the current cycle is captured at the rising clock edge and holds until the next
// sensing cycle ('valid' marks a fresh result for one cycle).
// Following the paper: the thresholds, the power gating and the Add-box mux. Own choices:
// the thermometer-coded count of '1' cells standing in for V_sense and the register model of the latch.
module reconfig_sa
  import panda_pkg::*;
#(
  parameter int unsigned WIDTH = 256
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  sa_ctrl_t         ctrl,
  input  logic             inv,
  input  logic [WIDTH-1:0] ge1,    // at least one activated cell holds '1'
  input  logic [WIDTH-1:0] ge2,    // at least two
  input  logic [WIDTH-1:0] ge3,    // all three
  output logic [WIDTH-1:0] out1,   // selected function result (SA_out1)
  output logic [WIDTH-1:0] out2,   // Carry = MAJ (SA_out2)
  output logic             valid
);

  logic [WIDTH-1:0] sa1, sa2, sa3, r1;
  logic             add_mode;

  assign add_mode = ctrl.c_and3 && ctrl.c_maj && ctrl.c_or3;

  always_comb begin
    // sub-SAs; a sub-SA whose enable is low is power-gated and reads 0
    sa1 = ctrl.c_or3 ? ge1 : '0;                                  // SA-I,   R_OR3
    sa2 = ctrl.c_maj ? ge2 : '0;                                  // SA-II,  R_MAJ
    sa3 = ctrl.c_m ? ge1 : (ctrl.c_and3 ? ge3 : '0);              // SA-III, R_M / R_AND3
    if (add_mode)                      r1 = (sa2 & sa3) | (~sa2 & sa1);   // Add-box mux
    else if (ctrl.c_and3 || ctrl.c_m)  r1 = inv ? ~sa3 : sa3;
    else if (ctrl.c_or3)               r1 = inv ? ~sa1 : sa1;
    else if (ctrl.c_maj)               r1 = inv ? ~sa2 : sa2;
    else                               r1 = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out1  <= '0;
      out2  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= en;
      if (en) begin
        out1 <= r1;
        out2 <= sa2;
      end
    end
  end

endmodule
