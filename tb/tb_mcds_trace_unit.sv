// Testbench of mcds_trace_unit: a core model runs a random instruction
// stream (random branches) and random reads and writes (read data 1 to 3
// cycles after the address phase). The testbench predicts the program-flow
// and data messages independently and checks that the unit's output
// carries exactly those messages, in time-stamp order. The PC comparator
// trigger line is counted against the model. Finally the output is blocked
// to check that the FIFO overflow flag rises.
module tb_mcds_trace_unit;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [TS_W-1:0] ts = 0;
  unit_cfg_t cfg;
  logic pc_retire = 0, d_rd = 0, d_wr = 0, d_rvalid = 0;
  logic [31:0] pc = 0, d_addr = 0, d_wdata = 0, d_rdata = 0;
  logic [2:0] pc_len = 0;
  logic [2*NCMP-1:0] trig;
  logic mv, mr = 1, ovf, hold;
  trace_msg_t m;
  int checks = 0, failures = 0, n_trig0 = 0, e_trig0 = 0, n_hold = 0;
  always #5 clk = ~clk;
  always @(posedge clk) ts <= ts + 1;

  mcds_trace_unit #(.SRC_ID(2'd1), .FIFO_DEPTH(8), .HOLD(8)) dut (
    .clk, .rst_n, .ts_i(ts), .cfg_i(cfg), .trace_en_i(1'b1), .clr_i(1'b0),
    .pc_retire, .pc, .pc_len, .d_rd, .d_wr, .d_addr, .d_wdata, .d_rvalid, .d_rdata,
    .trig_o(trig), .msg_valid_o(mv), .msg_ready_i(mr), .msg_o(m), .ovf_o(ovf), .hold_o(hold));

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  trace_msg_t exp_l[$];
  logic [TS_W-1:0] last_ts = 0;
  bit checking = 1;

  always @(posedge clk) if (rst_n) begin
    if (trig[0]) n_trig0++;
    if (hold) n_hold++;
    if (mv && mr && checking) begin
      int f;
      f = -1;
      foreach (exp_l[i]) if (f < 0 && exp_l[i] == m) f = i;
      chk(f >= 0, $sformatf("unexpected message kind %0d addr %h ts %0d", m.kind, m.addr, m.ts));
      if (f >= 0) exp_l.delete(f);
      chk(m.ts >= last_ts, "time order");
      last_ts = m.ts;
    end
  end

  function automatic trace_msg_t mk(msg_kind_e k, logic [31:0] a, logic [31:0] d, logic [31:0] t);
    trace_msg_t x;
    x.ts = t; x.src = 2'd1; x.kind = k; x.addr = a; x.data = d;
    return x;
  endfunction

  initial begin
    logic [31:0] pcv, next_pc, cnt, ra, rt, cur;
    bit synced, pend;
    int wait_n;
    cfg = '0;
    cfg.prog.trace_en = 1; cfg.data.trace_en = 1;
    cfg.prog.cmp[0] = '{1'b1, 32'ha000_0000, 32'ha000_000f};
    pcv = 32'ha000_0000; synced = 0; cnt = 0; pend = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      cur = ts;
      pc_retire = ($urandom_range(0, 2) == 0);
      d_rd = 0; d_wr = 0; d_rvalid = 0;
      if (pc_retire) begin
        pc = pcv; pc_len = $urandom_range(0, 1) ? 3'd2 : 3'd4;
        if (pc >= 32'ha000_0000 && pc <= 32'ha000_000f) e_trig0++;
        if (!synced || pc != next_pc) begin
          exp_l.push_back(mk(MSG_PROG, pc, cnt, cur)); cnt = 1;
        end else cnt++;
        synced = 1; next_pc = pc + pc_len;
        pcv = ($urandom_range(0, 5) == 0) ? 32'ha000_0000 + ($urandom_range(0, 255) << 1) : pcv + pc_len;
      end
      if (pend) begin
        if (wait_n == 0) begin
          d_rvalid = 1; d_rdata = $urandom; pend = 0;
          exp_l.push_back(mk(MSG_RD, ra, d_rdata, rt));
        end else wait_n--;
      end else if ($urandom_range(0, 3) == 0) begin
        d_wr = 1; d_addr = $urandom; d_wdata = $urandom;
        exp_l.push_back(mk(MSG_WR, d_addr, d_wdata, cur));
      end else if ($urandom_range(0, 3) == 0) begin
        d_rd = 1; d_addr = $urandom; ra = d_addr; rt = cur; pend = 1; wait_n = $urandom_range(0, 2);
      end
    end
    @(negedge clk); pc_retire = 0; d_rd = 0; d_wr = 0;
    if (pend) begin
      d_rvalid = 1; d_rdata = 0; exp_l.push_back(mk(MSG_RD, ra, 0, rt));
      @(negedge clk); d_rvalid = 0;
    end
    repeat (40) @(posedge clk);
    chk(exp_l.size() == 0, $sformatf("%0d messages missing", exp_l.size()));
    chk(!ovf, "no overflow at this rate");
    chk(n_trig0 == e_trig0 && e_trig0 > 10, $sformatf("PC trigger count %0d expected %0d", n_trig0, e_trig0));
    chk(n_hold > 0, "sorter hold-off used");
    // block the output: the FIFOs must overflow
    checking = 0;
    @(negedge clk); mr = 0;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      d_wr = 1; d_addr = i; d_wdata = i;
    end
    @(negedge clk); d_wr = 0;
    @(posedge clk); #1;
    chk(ovf, "overflow flag raised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
