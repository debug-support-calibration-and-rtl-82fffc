// Testbench of mcds_msg_fifo: random pushes and pops, with phases that
// fill the FIFO, against a queue model. Checks the output data and valid,
// that pushes into a full FIFO are dropped and raise the sticky overflow
// flag, and that clr_i clears it.
module tb_mcds_msg_fifo;
  logic clk = 0, rst_n = 0, clr = 0;
  logic wv = 0, rv, rr = 0, ovf;
  logic [15:0] wd, rd;
  int checks = 0, failures = 0, n_drop = 0;
  logic [15:0] q[$];
  bit e_ovf = 0;
  always #5 clk = ~clk;

  mcds_msg_fifo #(.T(logic [15:0]), .DEPTH(4)) dut (
    .clk, .rst_n, .clr_i(clr), .wr_valid(wv), .wr_data(wd),
    .rd_valid(rv), .rd_ready(rr), .rd_data(rd), .overflow(ovf));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // check the outputs of the current state
      chk(rv == (q.size() != 0), "rd_valid");
      if (q.size() != 0) chk(rd == q[0], "rd_data");
      chk(ovf == e_ovf, "overflow flag");
      clr = (i % 500 == 499);
      wv  = $urandom_range(0, 1);
      wd  = $urandom;
      rr  = ((i / 200) % 2) ? ($urandom_range(0, 3) == 0) : $urandom_range(0, 1);
      @(posedge clk);
      // model
      begin
        bit pop, push;
        int sz;
        sz   = q.size();
        pop  = rr && sz != 0;
        push = wv && (sz < 4 || pop);
        if (pop) void'(q.pop_front());
        if (push) q.push_back(wd);
        else if (wv) n_drop++;
        if (clr) e_ovf = 0;
        else if (wv && !push) e_ovf = 1;
      end
    end
    chk(n_drop > 50, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
