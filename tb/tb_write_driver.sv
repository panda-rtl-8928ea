// tb_write_driver: checks the write data multiplexer for each source and the masking of
// the column enables by the write enable and the column select.
module tb_write_driver;
  import panda_pkg::*;
  localparam int C = 32;
  logic we;
  wsrc_e wsrc;
  logic [C-1:0] col_sel, din_intra, din_inter, sa_out1, sa_out2, wdata, wen;
  int checks = 0, failures = 0;
  write_driver #(.COLS(C)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [C-1:0] exp;
      we = 1'($urandom); wsrc = wsrc_e'($urandom_range(0, 3));
      col_sel = $urandom; din_intra = $urandom; din_inter = $urandom;
      sa_out1 = $urandom; sa_out2 = $urandom;
      #1;
      case (wsrc)
        WSRC_INTRA: exp = din_intra;
        WSRC_INTER: exp = din_inter;
        WSRC_SA1:   exp = sa_out1;
        default:    exp = sa_out2;
      endcase
      checks++; if (wdata !== exp) begin failures++; $display("FAIL data src %0d", wsrc); end
      checks++; if (wen !== (we ? col_sel : '0)) begin failures++; $display("FAIL wen"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
