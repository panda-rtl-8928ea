// tb_reconfig_sa: checks every Table I enable combination of the reconfigurable SA on
// random bit-line contents against Boolean reference functions of the three cells, the
// power gating of unused sub-SAs and the one-cycle latch timing.
module tb_reconfig_sa;
  import panda_pkg::*;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, en = 0, inv = 0, valid;
  sa_ctrl_t ctrl;
  logic [W-1:0] a, b, c, ge1, ge2, ge3, out1, out2;
  int checks = 0, failures = 0;

  reconfig_sa #(.WIDTH(W)) dut (.*);
  always #5 clk = ~clk;

  assign ge1 = a | b | c;
  assign ge2 = (a & b) | (a & c) | (b & c);
  assign ge3 = a & b & c;

  task automatic chk(input string what, input logic [W-1:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  task automatic sense(input sa_ctrl_t cc, input logic iv);
    @(negedge clk); ctrl = cc; inv = iv; en = 1;
    @(negedge clk); en = 0;
    checks++; if (!valid) begin failures++; $display("FAIL valid"); end
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ctrl = '0; a = 0; b = 0; c = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      a = W'($urandom); b = W'($urandom); c = W'($urandom);
      // read: one row active (b, c not activated)
      begin logic [W-1:0] sb, sc; sb = b; sc = c; b = '0; c = '0;
        sense('{c_and3:0, c_maj:0, c_or3:0, c_m:1}, 0); chk("read", out1, a);
        b = sb; c = sc; end
      sense('{c_and3:1, c_maj:0, c_or3:0, c_m:0}, 0); chk("and3", out1, a & b & c);
      chk("gated carry", out2, '0);
      sense('{c_and3:1, c_maj:0, c_or3:0, c_m:0}, 1); chk("nand3", out1, ~(a & b & c));
      sense('{c_and3:0, c_maj:0, c_or3:1, c_m:0}, 0); chk("or3", out1, a | b | c);
      sense('{c_and3:0, c_maj:0, c_or3:1, c_m:0}, 1); chk("nor3", out1, ~(a | b | c));
      sense('{c_and3:0, c_maj:1, c_or3:0, c_m:0}, 0); chk("maj", out1, (a&b)|(a&c)|(b&c));
      sense('{c_and3:0, c_maj:1, c_or3:0, c_m:0}, 1); chk("min", out1, ~((a&b)|(a&c)|(b&c)));
      sense('{c_and3:1, c_maj:1, c_or3:1, c_m:0}, 0); chk("sum", out1, a ^ b ^ c);
      chk("carry", out2, (a&b)|(a&c)|(b&c));
      // latch holds while not sensing
      a = ~a; @(negedge clk); chk("hold", out1, ~a ^ b ^ c);
      checks++; if (valid) begin failures++; $display("FAIL valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
