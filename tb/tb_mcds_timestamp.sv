// Testbench of mcds_timestamp: after reset the counter must equal the
// number of rising clock edges seen, including across a wrap of a narrow
// (8-bit) counter.
module tb_mcds_timestamp;
  logic clk = 0, rst_n = 0;
  logic [7:0] ts;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mcds_timestamp #(.TS_W(8)) dut (.clk, .rst_n, .ts_o(ts));

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (3) @(posedge clk);
    #1 checks++; if (ts !== 8'd0) begin failures++; $display("FAIL ts not 0 in reset"); end
    rst_n = 1;
    n = 0;
    repeat (600) begin
      @(posedge clk); n++;
      #1 checks++;
      if (ts !== 8'(n)) begin failures++; $display("FAIL ts=%0d expected %0d", ts, 8'(n)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
