// Testbench of dbg_regs: writes random values to every configuration
// register and checks, from the documented register map, the decoded
// fields of the core and bus trace units, cross trigger, break routes, overlay ranges,
// page, wait states and trace buffer; reads every register back (status,
// pointer and time stamp from their inputs); checks the command pulses.
module tb_dbg_regs;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, re = 0, rv;
  logic [6:0] a = 0;
  logic [31:0] wd = 0, rd, status = 32'h1234_5678, wptr = 32'h0000_0abc;
  logic [TS_W-1:0] ts = 32'h0bad_cafe;
  unit_cfg_t [NCORE-1:0] unit;
  data_cfg_t bus;
  xtrig_cfg_t xt;
  brk_route_t [NBSRC-1:0] route;
  ovl_cfg_t ovl;
  logic [NBLK-1:0] tblk;
  trc_cfg_t trc;
  logic rel, xclr, arm, fclr;
  int checks = 0, failures = 0;
  logic [31:0] v [128];
  always #5 clk = ~clk;

  dbg_regs dut (.clk, .rst_n, .we_i(we), .re_i(re), .addr_i(a), .wdata_i(wd),
                .rvalid_o(rv), .rdata_o(rd), .status_i(status), .wptr_i(wptr), .ts_i(ts),
                .unit_o(unit), .bus_o(bus), .xtrig_o(xt), .route_o(route), .ovl_o(ovl), .trace_blk_o(tblk),
                .trc_o(trc), .release_o(rel), .xclr_o(xclr), .arm_o(arm), .flag_clr_o(fclr));

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

  task automatic wr(int idx, logic [31:0] val);
    @(negedge clk); we = 1; a = 7'(idx); wd = val;
    @(negedge clk); we = 0;
  endtask

  function automatic bit route_ok(brk_route_t r, logic [31:0] x);
    return r.halt == x[1:0] && r.susp == x[11:8] && r.ext == x[17:16];
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 5; rep++) begin
      for (int i = 0; i < 128; i++) begin
        if (i == 'h25) continue;
        v[i] = $urandom;
        wr(i, v[i]);
      end
      for (int c = 0; c < NCORE; c++) begin
        logic [31:0] ctl; ctl = v[16*c + 10];
        chk(unit[c].prog.trace_en == ctl[0] && unit[c].data.trace_en == ctl[1] &&
            unit[c].prog.cmp[0].en == ctl[2] && unit[c].prog.cmp[1].en == ctl[3] &&
            unit[c].data.cmp[0].en == ctl[4] && unit[c].data.cmp[1].en == ctl[5] &&
            unit[c].data.qualify == ctl[6] && unit[c].data.val_en == ctl[7] && unit[c].gate == ctl[8],
            "unit control bits");
        chk(unit[c].prog.cmp[0].lo == v[16*c] && unit[c].prog.cmp[0].hi == v[16*c+1] &&
            unit[c].prog.cmp[1].lo == v[16*c+2] && unit[c].prog.cmp[1].hi == v[16*c+3] &&
            unit[c].data.cmp[0].lo == v[16*c+4] && unit[c].data.cmp[0].hi == v[16*c+5] &&
            unit[c].data.cmp[1].lo == v[16*c+6] && unit[c].data.cmp[1].hi == v[16*c+7] &&
            unit[c].data.value == v[16*c+8] && unit[c].data.vmask == v[16*c+9], "comparators");
        chk(xt.core[c].and_mask == v[16*c+11][5:0] && xt.core[c].or_mask == v[16*c+11][13:8] &&
            xt.core[c].latch == v[16*c+11][16], "cross trigger core masks");
        chk(route_ok(route[c], v[16*c+12]), "core break route");
      end
      chk(bus.trace_en == v['h39][1] && bus.cmp[0].en == v['h39][4] && bus.cmp[1].en == v['h39][5] &&
          bus.qualify == v['h39][6] && bus.val_en == v['h39][7] &&
          bus.cmp[0].lo == v['h33] && bus.cmp[0].hi == v['h34] && bus.cmp[1].lo == v['h35] &&
          bus.cmp[1].hi == v['h36] && bus.value == v['h37] && bus.vmask == v['h38], "bus trace unit");
      chk(xt.c_and_mask == v['h20][1:0] && xt.c_or_mask == v['h20][9:8] && xt.and2or == v['h20][16] &&
          xt.cnt2or == v['h20][17] && xt.cnt_limit == v['h21][15:0], "central cross trigger");
      chk(route_ok(route[NCORE], v['h22]) && route_ok(route[NCORE+1], v['h23]) &&
          route_ok(route[NCORE+2], v['h24]), "other break routes");
      chk(ovl.page == v['h26][0] && ovl.page_stride == v['h27][18:0] && ovl.ws == v['h28][3:0] &&
          tblk == v['h29][7:0], "overlay and emulation RAM control");
      chk(trc.base == v['h2A][16:0] && trc.limit == v['h2B][16:0] && trc.post == v['h2C][15:0], "trace buffer");
      for (int g = 0; g < NRANGE; g++)
        chk(ovl.rng[g].base == {v['h40+2*g][31:10], 10'b0} && ovl.rng[g].size == v['h40+2*g][3:1] &&
            ovl.rng[g].en == v['h40+2*g][0] && ovl.rng[g].offs == v['h41+2*g][18:0], "overlay range");
      // read back
      for (int i = 0; i < 128; i++) begin
        logic [31:0] e;
        if (i == 'h25) continue;
        e = (i == 'h30) ? status : (i == 'h31) ? wptr : (i == 'h32) ? ts : v[i];
        @(negedge clk); re = 1; a = 7'(i);
        @(negedge clk); re = 0;
        chk(rv && rd == e, $sformatf("read back %h", i));
      end
    end
    // command pulses
    for (int b = 0; b < 4; b++) begin
      @(negedge clk); we = 1; a = 7'h25; wd = 32'(1 << b);
      #1 chk({fclr, arm, xclr, rel} == 4'(1 << b), "command pulse");
      @(negedge clk); we = 0;
      #1 chk({fclr, arm, xclr, rel} == 4'b0, "pulse lasts one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
