// Testbench of mcds_xtrig: random trigger lines under a series of random
// configurations (AND and OR masks including the fed-back complex trigger,
// latched Enables, central AND, counter limits and central OR selects),
// against a cycle model of the per-core AND/OR terms, the central AND, the
// counter and the registered complex trigger. Also checks directed cases:
// a two-core AND condition, and a counter that fires on every third
// coincidence.
module tb_mcds_xtrig;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  xtrig_cfg_t cfg;
  logic [NCORE-1:0][NXT-1:0] trig;
  logic [NCORE-1:0] ct, en;
  logic ctrig, hit;
  int checks = 0, failures = 0, n_ctrig = 0, n_hit = 0, n_fb = 0;
  always #5 clk = ~clk;

  mcds_xtrig dut (.clk, .rst_n, .clr_i(clr), .cfg_i(cfg), .trig_i(trig),
                  .core_trig_o(ct), .enable_o(en), .ctrig_o(ctrig), .cnt_hit_o(hit));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // model state
  bit m_ctrig = 0;
  bit m_lat[NCORE];
  int m_cnt = 0;

  // check combinational outputs in mid-cycle, update the model at the edge
  task automatic model_step();
    bit e_ct[NCORE], e_en[NCORE], c_and, e_hit, c_or, any_and;
    for (int c = 0; c < NCORE; c++) begin
      bit a, o; logic [NXT:0] v;
      v = {m_ctrig, trig[c]};
      a = cfg.core[c].and_mask != 0;
      for (int b = 0; b <= NXT; b++) if (cfg.core[c].and_mask[b] && !v[b]) a = 0;
      o = a;
      for (int b = 0; b <= NXT; b++) if (cfg.core[c].or_mask[b] && v[b]) o = 1;
      if (m_ctrig && (cfg.core[c].and_mask[NXT] || cfg.core[c].or_mask[NXT]) && o) n_fb++;
      e_ct[c] = o;
      e_en[c] = o || (cfg.core[c].latch && m_lat[c]);
      chk(ct[c] == e_ct[c] && en[c] == e_en[c], $sformatf("core %0d trigger/enable", c));
    end
    c_and = cfg.c_and_mask != 0;
    for (int c = 0; c < NCORE; c++) if (cfg.c_and_mask[c] && !e_ct[c]) c_and = 0;
    e_hit = c_and && cfg.cnt_limit != 0 && (m_cnt + 1 == int'(cfg.cnt_limit));
    chk(hit == e_hit, "counter hit");
    c_or = 0;
    for (int c = 0; c < NCORE; c++) if (cfg.c_or_mask[c] && e_ct[c]) c_or = 1;
    if (cfg.and2or && c_and) c_or = 1;
    if (cfg.cnt2or && e_hit) c_or = 1;
    chk(ctrig == m_ctrig, "complex trigger");
    if (e_hit) n_hit++;
    if (m_ctrig) n_ctrig++;
    @(posedge clk);
    m_ctrig = c_or;
    if (clr) begin
      for (int c = 0; c < NCORE; c++) m_lat[c] = 0;
      m_cnt = 0;
    end else begin
      for (int c = 0; c < NCORE; c++) m_lat[c] = m_lat[c] | e_ct[c];
      if (e_hit) m_cnt = 0; else if (c_and) m_cnt = (m_cnt + 1) % 65536;
    end
  endtask

  initial begin
    cfg = '0; trig = '0;
    for (int c = 0; c < NCORE; c++) m_lat[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: core 0 fires when lines 0 and 1 coincide; core 1 on line 2;
    // central AND of both, counter limit 3 into the OR
    @(negedge clk);
    cfg.core[0].and_mask = 6'b000011;
    cfg.core[1].or_mask  = 6'b000100;
    cfg.c_and_mask = 2'b11; cfg.cnt_limit = 3; cfg.cnt2or = 1;
    for (int i = 0; i < 60; i++) begin
      trig[0] = (i % 2 == 0) ? 5'b00011 : 5'b00001;
      trig[1] = (i % 4 < 2) ? 5'b00100 : 5'b0;
      clr = 0;
      #1 model_step();
      @(negedge clk);
    end
    // random configurations
    for (int r = 0; r < 40; r++) begin
      cfg = '0;
      for (int c = 0; c < NCORE; c++) begin
        cfg.core[c].and_mask = ($urandom_range(0, 3) == 0) ? '0 : (NXT+1)'($urandom);
        cfg.core[c].or_mask  = (NXT+1)'($urandom) & (NXT+1)'($urandom);
        cfg.core[c].latch    = $urandom_range(0, 1);
      end
      cfg.c_and_mask = NCORE'($urandom);
      cfg.c_or_mask  = NCORE'($urandom);
      cfg.and2or     = $urandom_range(0, 1);
      cfg.cnt2or     = $urandom_range(0, 1);
      cfg.cnt_limit  = $urandom_range(0, 5);
      for (int i = 0; i < 150; i++) begin
        for (int c = 0; c < NCORE; c++) trig[c] = NXT'($urandom) | NXT'($urandom);
        clr = (i == 0);
        #1 model_step();
        @(negedge clk);
      end
    end
    chk(n_hit > 20 && n_ctrig > 100 && n_fb > 10, "counter, complex trigger and feedback exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
