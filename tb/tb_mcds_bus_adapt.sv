// Testbench of mcds_bus_adapt: a pipelined multi-master bus with random
// address phases, random wait states (ready low) and back-to-back
// transfers. A reference model pairs each data phase with its address
// phase; every observation must carry the master number, direction,
// address, the write or read data of its data phase and the time stamp of
// its address phase, one cycle after the data phase, and nothing else may
// appear.
module tb_mcds_bus_adapt;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [TS_W-1:0] ts = 0;
  logic b_valid = 0, b_ready = 0, b_write = 0;
  logic [MST_W-1:0] b_master = '0;
  logic [31:0] b_addr = 0, b_wdata = 0, b_rdata = 0;
  data_obs_t obs;
  int checks = 0, failures = 0;
  int n_obs = 0, n_wait = 0, n_b2b = 0, n_rd = 0, n_wr = 0;
  always #5 clk = ~clk;
  always @(posedge clk) ts <= ts + 1;

  mcds_bus_adapt dut (.clk, .rst_n, .ts_i(ts), .b_valid, .b_ready, .b_master, .b_write, .b_addr,
                      .b_wdata, .b_rdata, .data_o(obs));

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

  data_obs_t e_next;                 // expected observation after this edge
  initial begin
    bit av, dp, dw;
    logic [MST_W-1:0] dm;
    logic [31:0] da, dts;
    av = 0; dp = 0; dw = 0; dm = '0; da = 0; dts = 0; e_next = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      chk(obs.valid == e_next.valid, "observation valid");
      if (obs.valid && e_next.valid) begin
        n_obs++;
        chk(obs == e_next, $sformatf("observation contents %p expected %p", obs, e_next));
      end
      e_next = '0;
      b_ready = $urandom_range(0, 3) != 0;
      if (!av && $urandom_range(0, 2) != 0) begin
        av = 1;
        b_master = MST_W'($urandom_range(0, 15));
        b_write  = $urandom_range(0, 1);
        b_addr   = $urandom;
      end
      b_valid = av;
      b_wdata = $urandom; b_rdata = $urandom;
      if (av && !b_ready) n_wait++;
      if (b_ready) begin
        if (dp) begin
          e_next.valid = 1; e_next.write = dw; e_next.mst = dm; e_next.addr = da;
          e_next.data = dw ? b_wdata : b_rdata; e_next.ts = dts;
          if (dw) n_wr++; else n_rd++;
          if (av) n_b2b++;
        end
        dp = av;
        if (av) begin dw = b_write; dm = b_master; da = b_addr; dts = ts; av = 0; end
      end
    end
    chk(n_obs > 100, "observations seen");
    chk(n_wait > 0, "wait states");
    chk(n_b2b > 0, "back-to-back transfers");
    chk(n_rd > 0 && n_wr > 0, "reads and writes");
    $display("obs=%0d wait=%0d b2b=%0d rd=%0d wr=%0d", n_obs, n_wait, n_b2b, n_rd, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
