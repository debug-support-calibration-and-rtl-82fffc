// Testbench of mcds_data_recon: random reads and writes over a small
// address window, with the qualification range, a data-value watchpoint
// and the cross-trigger enable changed during the run. A reference model
// predicts the message (kind, address, data, time stamp) and the two
// trigger lines for every access.
module tb_mcds_data_recon;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0;
  data_obs_t obs;
  data_cfg_t cfg;
  logic en;
  logic [NCMP-1:0] trig;
  logic mv;
  trace_msg_t m;
  int checks = 0, failures = 0, n_msgs = 0, n_filtered = 0, n_vhit = 0;
  always #5 clk = ~clk;

  mcds_data_recon #(.SRC_ID(2'd2)) dut (.clk, .rst_n, .obs_i(obs), .cfg_i(cfg), .en_i(en),
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

  always @(posedge clk) if (rst_n) begin
    bit e_msg, h0, h1;
    data_obs_t o;
    o  = obs;
    h0 = o.valid && cfg.cmp[0].en && o.addr >= cfg.cmp[0].lo && o.addr <= cfg.cmp[0].hi;
    h1 = o.valid && cfg.cmp[1].en && o.addr >= cfg.cmp[1].lo && o.addr <= cfg.cmp[1].hi &&
         (!cfg.val_en || ((o.data & cfg.vmask) == (cfg.value & cfg.vmask)));
    e_msg = o.valid && cfg.trace_en && en && (!cfg.qualify || h0);
    if (o.valid && cfg.trace_en && en && cfg.qualify && !h0) n_filtered++;
    if (h1 && cfg.val_en) n_vhit++;
    #2;
    chk(trig == {h1, h0}, "trigger lines");
    chk(mv == e_msg, "message valid");
    if (mv && e_msg) begin
      n_msgs++;
      chk(m.addr == o.addr && m.data == o.data && m.ts == o.ts && m.src == 2'd2 && m.mst == o.mst &&
          m.kind == (o.write ? MSG_WR : MSG_RD), "message contents");
    end
  end

  initial begin
    obs = '0; en = 1; cfg = '0;
    cfg.trace_en = 1;
    cfg.cmp[0] = '{1'b1, 32'hd000_0040, 32'hd000_007f};
    cfg.cmp[1] = '{1'b1, 32'hd000_0000, 32'hd000_00ff};
    cfg.value = 32'h0000_00a5; cfg.vmask = 32'h0000_00ff;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      case (i)
        500:  cfg.qualify = 1;
        1000: cfg.val_en = 1;
        1500: en = 0;
        1700: en = 1;
        2000: cfg.trace_en = 0;
        2200: begin cfg.trace_en = 1; cfg.qualify = 0; end
        default: ;
      endcase
      obs.valid = $urandom_range(0, 1);
      obs.write = $urandom_range(0, 1);
      obs.addr  = 32'hd000_0000 + ($urandom_range(0, 127) << 2);
      obs.data  = $urandom_range(0, 3) == 0 ? {$urandom_range(0, 255), 8'ha5} : $urandom;
      obs.ts    = i;
      obs.mst   = 4'($urandom_range(0, 15));
    end
    @(negedge clk); obs.valid = 0;
    repeat (3) @(posedge clk);
    chk(n_msgs > 500 && n_filtered > 100 && n_vhit > 20, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
