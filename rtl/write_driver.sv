// write_driver: data multiplexer and column enables in front of a sub-array's write
// bit-lines.
//
// Fig. 4b of the paper shows a multiplexer selecting the write data D from four sources,
// Din-Intra, Din-Inter, SA_out1 and SA_out2, driving each WBL to +Vwr or -Vwr through
// transistors gated by D and the write enable We. Digitally that is: choose the source,
// then enable each column whose column-decoder select is set. The enable per column is
// what the analog driver turns into a positive ('1', anti-parallel) or negative ('0',
// parallel) write current.
// Interface: purely combinational; 'wdata' and 'wen' are sampled by the array at the
// rising clock edge of the write cycle.
// Following the paper: the four data sources. Own choices: what Din-Intra and Din-Inter
// carry (the bank row buffer and the chip I/O respectively) and the per-column mask.
module write_driver
  import panda_pkg::*;
#(
  parameter int unsigned COLS = 256
) (
  input  logic            we,
  input  wsrc_e           wsrc,
  input  logic [COLS-1:0] col_sel,
  input  logic [COLS-1:0] din_intra,
  input  logic [COLS-1:0] din_inter,
  input  logic [COLS-1:0] sa_out1,
  input  logic [COLS-1:0] sa_out2,
  output logic [COLS-1:0] wdata,
  output logic [COLS-1:0] wen
);

  always_comb begin
    unique case (wsrc)
      WSRC_INTRA: wdata = din_intra;
      WSRC_INTER: wdata = din_inter;
      WSRC_SA1:   wdata = sa_out1;
      default:    wdata = sa_out2;
    endcase
    wen = we ? col_sel : '0;
  end

endmodule
