// row_buffer: bank row buffer on the global read bit-lines (GRBL in Fig. 4a of the paper).
// It captures one sub-array's sensed row so that the row can leave the bank (host read)
// or be written into another mat of the same bank (the write driver's Din-Intra input).
// How: a register loaded from the selected mat's SA output when 'load' is high.
// Interface: 'rows' packs the SA outputs of all MATS mats; 'sel' picks one.
// Timing: loads at the rising edge; 'data' holds until the next load; reset to zero.
// Following the paper: a row buffer fed by the global bit-lines. Own choices: its width
// equals one sub-array row and it is loaded explicitly by the controller.
module row_buffer #(
  parameter int unsigned COLS = 256,
  parameter int unsigned MATS = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,
  input  logic [$clog2(MATS+1)-1:0] sel,
  input  logic [MATS*COLS-1:0]      rows,
  output logic [COLS-1:0]           data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      data <= '0;
    else if (load && (int'(sel) < MATS))
      data <= rows[int'(sel)*COLS +: COLS];
  end

endmodule
