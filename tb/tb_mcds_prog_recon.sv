// Testbench of mcds_prog_recon: a random instruction stream with 2- and
// 4-byte instructions, random branches and idle cycles, with tracing
// switched on and off. A reference model in the testbench predicts, for
// every cycle, whether a program-flow message must appear (first
// instruction after tracing starts, or an address that is not the previous
// one plus its length), its target and sequential count, and the two PC
// comparator trigger lines. Outputs are compared one cycle after the
// observation.
module tb_mcds_prog_recon;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0;
  prog_obs_t obs;
  prog_cfg_t cfg;
  logic en;
  logic [NCMP-1:0] trig;
  logic mv;
  trace_msg_t m;
  int checks = 0, failures = 0, n_msgs = 0;
  always #5 clk = ~clk;

  mcds_prog_recon #(.SRC_ID(2'd1)) dut (.clk, .rst_n, .obs_i(obs), .cfg_i(cfg), .en_i(en),
                                        .trig_o(trig), .msg_valid_o(mv), .msg_o(m));

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

  // reference model
  bit          r_sync = 0;
  logic [31:0] r_next, r_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    bit e_msg; logic [31:0] e_addr, e_cnt, e_ts; logic [NCMP-1:0] e_trig;
    e_msg = 0;
    for (int k = 0; k < NCMP; k++)
      e_trig[k] = obs.valid && cfg.cmp[k].en && obs.pc >= cfg.cmp[k].lo && obs.pc <= cfg.cmp[k].hi;
    if (!(cfg.trace_en && en)) begin
      r_sync = 0; r_cnt = 0;
    end else if (obs.valid) begin
      if (!r_sync || obs.pc != r_next) begin
        e_msg = 1; e_addr = obs.pc; e_cnt = r_cnt; e_ts = obs.ts; r_cnt = 1;
      end else r_cnt++;
      r_next = obs.pc + obs.len; r_sync = 1;
    end
    #2;
    chk(trig == e_trig, "trigger lines");
    chk(mv == e_msg, "message valid");
    if (e_msg && mv) begin
      n_msgs++;
      chk(m.addr == e_addr && m.data == e_cnt && m.ts == e_ts && m.kind == MSG_PROG && m.src == 2'd1,
          $sformatf("message %h/%0d expected %h/%0d", m.addr, m.data, e_addr, e_cnt));
    end
  end

  initial begin
    logic [31:0] pcv;
    obs = '0; en = 1;
    cfg = '0;
    cfg.trace_en = 1;
    cfg.cmp[0] = '{1'b1, 32'h8000_0100, 32'h8000_01ff};
    cfg.cmp[1] = '{1'b1, 32'h8000_0000, 32'h8000_0003};
    pcv = 32'h8000_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (i % 700 == 650) en = 0;
      if (i % 700 == 680) en = 1;
      if (i == 1500) cfg.trace_en = 0;
      if (i == 1550) cfg.trace_en = 1;
      obs.valid = ($urandom_range(0, 3) != 0);
      obs.ts    = i;
      if (obs.valid) begin
        obs.pc  = pcv;
        obs.len = $urandom_range(0, 1) ? 3'd2 : 3'd4;
        if ($urandom_range(0, 9) == 0) pcv = 32'h8000_0000 + ($urandom_range(0, 511) << 1);
        else pcv = pcv + obs.len;
      end
    end
    @(negedge clk); obs.valid = 0;
    repeat (3) @(posedge clk);
    chk(n_msgs > 100, "enough branch messages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
