// io_buffer: the chip's I/O instruction buffer (the "buffer" beside I/O in Fig. 4a of the
// paper). It queues host instructions, each with its COLS-wide data and mask words, so
// that the host can keep issuing while the controller is busy with a multi-cycle
// operation, and pushes back (in_ready low) when full.
// How: a DEPTH-entry circular FIFO with valid/ready on both sides.
// Interface: a transfer happens on a side when valid and ready are both high.
// Timing: an entry written at an edge is visible at the output the cycle after; a full
// FIFO accepts nothing, even when it is read in the same cycle.
// Following the paper: an I/O buffer between host and controller. Own choices: the FIFO,
// its depth and the handshake.
module io_buffer #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] q [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      cnt;

  logic push, pop;
  assign in_ready  = (cnt < (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = q[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= nxt(wp);
      if (pop)  rp <= nxt(rp);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
      // handshake rules: the count never exceeds the depth and never underflows
      a_no_overflow:  assert (cnt <= (AW+1)'(DEPTH));
      a_no_underflow: assert (!(pop && cnt == '0));
    end
  end

  always_ff @(posedge clk)
    if (push) q[wp] <= in_data;

endmodule
