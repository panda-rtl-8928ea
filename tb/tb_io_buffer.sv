// tb_io_buffer: pushes and pops random traffic through the FIFO and checks order, that a
// full buffer refuses entries (backpressure), and that an empty one reports no data.
module tb_io_buffer;
  localparam int W = 12, D = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data, out_data;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, full_seen = 0;
  io_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      in_valid = ($urandom_range(0, 2) != 0); in_data = W'($urandom);
      out_ready = ($urandom_range(0, 2) == 0) || (t > 300);
      #1;
      checks++;
      if (in_ready !== (q.size() < D)) begin failures++; $display("FAIL ready"); end
      if (!in_ready) full_seen++;
      checks++;
      if (out_valid !== (q.size() > 0)) begin failures++; $display("FAIL valid"); end
      if (out_valid && out_ready) begin
        logic [W-1:0] e; e = q.pop_front();
        checks++; if (out_data !== e) begin failures++; $display("FAIL order"); end
      end
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    checks++; if (full_seen == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
