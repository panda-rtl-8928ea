// tb_row_buffer: checks that the row buffer loads the selected mat's row on 'load', holds
// it otherwise and resets to zero.
module tb_row_buffer;
  localparam int C = 16, M = 4;
  logic clk = 0, rst_n = 0, load = 0;
  logic [$clog2(M+1)-1:0] sel;
  logic [M*C-1:0] rows;
  logic [C-1:0] data, exp;
  int checks = 0, failures = 0;
  row_buffer #(.COLS(C), .MATS(M)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sel = 0; rows = '0;
    repeat (2) @(negedge clk);
    checks++; if (data !== '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1; exp = '0;
    for (int t = 0; t < 100; t++) begin
      rows = {$urandom, $urandom}; sel = ($clog2(M+1))'($urandom_range(0, M - 1));
      load = 1'($urandom);
      if (load) exp = rows[int'(sel)*C +: C];
      @(negedge clk); load = 0;
      checks++; if (data !== exp) begin failures++; $display("FAIL data"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
