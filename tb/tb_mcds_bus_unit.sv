// Testbench of mcds_bus_unit: random multi-master bus traffic with wait
// states; comparator 0 qualifies the trace to one address range and
// comparator 1 is a data-value watchpoint. The messages leaving the FIFO
// (random back-pressure) must be exactly the qualified transfers, in bus
// order, with master number, direction, address, data, address-phase time
// stamp and the unit's source number; the number of pulses on each
// trigger line must match the comparator hits. With the output stalled
// the FIFO overflows, the flag is sticky and clr_i clears it.
module tb_mcds_bus_unit;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [TS_W-1:0] ts = 0;
  logic b_valid = 0, b_ready = 0, b_write = 0;
  logic [MST_W-1:0] b_master = '0;
  logic [31:0] b_addr = 0, b_wdata = 0, b_rdata = 0;
  data_cfg_t cfg;
  logic [NCMP-1:0] trig;
  logic mv, mr = 0, ovf;
  trace_msg_t m;
  int checks = 0, failures = 0;
  int n_msg = 0, n_filt = 0, n_t0 = 0, n_t1 = 0, e_t0 = 0, e_t1 = 0, n_bp = 0;
  bit gen = 1;
  trace_msg_t exp_q[$];
  always #5 clk = ~clk;
  always @(posedge clk) ts <= ts + 1;

  mcds_bus_unit dut (.clk, .rst_n, .ts_i(ts), .cfg_i(cfg), .clr_i(clr),
                     .b_valid, .b_ready, .b_master, .b_write, .b_addr, .b_wdata, .b_rdata,
                     .trig_o(trig), .msg_valid_o(mv), .msg_ready_i(mr), .msg_o(m), .ovf_o(ovf));

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

  // consumer
  always @(posedge clk) if (rst_n) begin
    if (trig[0]) n_t0++;
    if (trig[1]) n_t1++;
    if (mv && mr) begin
      trace_msg_t e;
      n_msg++;
      if (exp_q.size() == 0) chk(0, "unexpected message");
      else begin
        e = exp_q.pop_front();
        chk(m == e, $sformatf("message %p expected %p", m, e));
      end
    end
    if (mv && !mr) n_bp++;
  end

  // bus driver and reference model
  initial begin
    bit av, dp, dw;
    logic [MST_W-1:0] dm;
    logic [31:0] da, dts;
    av = 0; dp = 0; dw = 0; dm = '0; da = 0; dts = 0;
    cfg = '0;
    cfg.trace_en = 1; cfg.qualify = 1; cfg.val_en = 1;
    cfg.cmp[0] = '{1'b1, 32'he000_0000, 32'he000_00ff};
    cfg.cmp[1] = '{1'b1, 32'he000_0000, 32'he000_ffff};
    cfg.value = 32'h0000_5a00; cfg.vmask = 32'h0000_ff00;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      mr = $urandom_range(0, 3) != 0;
      b_ready = $urandom_range(0, 3) != 0;
      if (!av && i < 5900 && $urandom_range(0, 4) == 0) begin
        av = 1;
        b_master = MST_W'($urandom_range(0, 15));
        b_write  = $urandom_range(0, 1);
        b_addr   = ($urandom_range(0, 1) ? 32'he000_0000 : 32'he000_8000) + ($urandom_range(0, 63) << 2);
      end
      b_valid = av;
      b_wdata = $urandom_range(0, 1) ? {16'h0, 8'h5a, 8'($urandom)} : $urandom;
      b_rdata = $urandom_range(0, 1) ? {16'h0, 8'h5a, 8'($urandom)} : $urandom;
      if (b_ready) begin
        if (dp) begin
          logic [31:0] d; bit h0, h1;
          d = dw ? b_wdata : b_rdata;
          h0 = da <= 32'he000_00ff;
          h1 = (d & cfg.vmask) == (cfg.value & cfg.vmask);
          if (h0) e_t0++;
          if (h1) e_t1++;
          if (h0) begin
            trace_msg_t e;
            e = '0; e.ts = dts; e.src = SRC_W'(NCORE); e.kind = dw ? MSG_WR : MSG_RD;
            e.mst = dm; e.addr = da; e.data = d;
            exp_q.push_back(e);
          end else n_filt++;
        end
        dp = av;
        if (av) begin dw = b_write; dm = b_master; da = b_addr; dts = ts; av = 0; end
      end
    end
    b_valid = 0; b_ready = 1; mr = 1;
    repeat (40) @(negedge clk);
    chk(exp_q.size() == 0, $sformatf("%0d expected messages missing", exp_q.size()));
    chk(n_t0 == e_t0 && n_t1 == e_t1, $sformatf("trigger pulses %0d/%0d expected %0d/%0d", n_t0, n_t1, e_t0, e_t1));
    chk(!ovf, "no overflow under normal load");
    // overflow with the output stalled
    mr = 0; cfg.qualify = 0;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk); b_valid = 1; b_addr = 32'he000_8000; b_write = 1;
    end
    b_valid = 0;
    repeat (4) @(negedge clk);
    chk(ovf, "overflow flagged");
    repeat (4) @(negedge clk);
    chk(ovf, "overflow sticky");
    clr = 1; @(negedge clk); clr = 0;
    chk(!ovf, "overflow cleared");
    chk(n_msg > 100 && n_filt > 0 && n_bp > 0 && e_t1 > 0, "traffic, filtering, back-pressure, value hits");
    $display("msg=%0d filt=%0d bp=%0d t0=%0d t1=%0d", n_msg, n_filt, n_bp, n_t0, n_t1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
