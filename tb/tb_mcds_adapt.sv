// Testbench of mcds_adapt: retired instructions, writes and split-phase
// reads (data phase 1 to 3 cycles after the address phase) are driven at
// random; every observation must appear one cycle after its completing
// event with the address, data, length and the time stamp of its address
// phase.
module tb_mcds_adapt;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [TS_W-1:0] ts = 0;
  logic pc_retire = 0; logic [31:0] pc = 0; logic [2:0] pc_len = 0;
  logic d_rd = 0, d_wr = 0, d_rvalid = 0;
  logic [31:0] d_addr = 0, d_wdata = 0, d_rdata = 0;
  prog_obs_t po; data_obs_t dobs;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  always @(posedge clk) ts <= ts + 1;

  mcds_adapt dut (.clk, .rst_n, .ts_i(ts), .pc_retire, .pc, .pc_len, .d_rd, .d_wr,
                  .d_addr, .d_wdata, .d_rvalid, .d_rdata, .prog_o(po), .data_o(dobs));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // expected observations, built from the stimulus
  typedef struct { bit w; logic [31:0] a, d, t; } exp_t;
  exp_t dq[$];
  logic [31:0] p_pc, p_ts; logic [2:0] p_len; bit p_exp = 0;

  // compare one cycle after each event
  always @(posedge clk) if (rst_n) begin
    #2;
    if (p_exp) begin
      chk(po.valid && po.pc == p_pc && po.len == p_len && po.ts == p_ts, $sformatf("program observation %h %h %0d %0d exp %h %0d", po.pc, po.ts, po.valid, p_exp, p_pc, p_ts));
    end else chk(!po.valid, "no program observation");
    if (dq.size() > 0) begin
      exp_t e;
      e = dq.pop_front();
      chk(dobs.valid && dobs.write == e.w && dobs.addr == e.a && dobs.data == e.d && dobs.ts == e.t,
          $sformatf("data observation got %0d %0d %h %h %h exp %0d %h %h %h", dobs.valid, dobs.write, dobs.addr, dobs.data, dobs.ts, e.w, e.a, e.d, e.t));
    end else chk(!dobs.valid, "no data observation");
  end

  initial begin
    logic [31:0] ra, rt, cur_ts; int wait_n; bit pend = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (400) begin
      @(negedge clk);
      cur_ts = ts;
      pc_retire = $urandom_range(0, 1);
      pc = $urandom; pc_len = $urandom_range(0, 1) ? 3'd2 : 3'd4;
      d_rd = 0; d_wr = 0; d_rvalid = 0;
      if (pend) begin
        if (wait_n == 0) begin
          d_rvalid = 1; d_rdata = $urandom; pend = 0;
        end else wait_n--;
      end else if ($urandom_range(0, 2) == 0) begin
        d_wr = 1; d_addr = $urandom; d_wdata = $urandom;
      end else if ($urandom_range(0, 1) == 0) begin
        d_rd = 1; d_addr = $urandom; ra = d_addr; rt = ts; pend = 1; wait_n = $urandom_range(0, 2);
      end
      // expectations for the next cycle
      @(posedge clk);
      p_exp = pc_retire; p_pc = pc; p_len = pc_len; p_ts = cur_ts;
      if (d_rvalid) dq.push_back('{0, ra, d_rdata, rt});
      else if (d_wr) dq.push_back('{1, d_addr, d_wdata, cur_ts});
    end
    @(negedge clk); pc_retire = 0; d_rd = 0; d_wr = 0; d_rvalid = 0; p_exp = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
