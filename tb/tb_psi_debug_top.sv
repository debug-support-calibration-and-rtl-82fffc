// End-to-end testbench of psi_debug_top at its default parameters.
//
// Phase 1, overlay: the host writes two pages of calibration data into
// overlay blocks of the emulation RAM and maps one 4 KB flash range onto
// them. A core model reads from flash and from the overlaid range; every
// read must return the right word, from flash or from the current page,
// ws+1 cycles after the request (the flash model answers after the same
// number of cycles). One register write swaps pages. Host reads of the
// same block during the fetches are held off.
// Phase 2, trace and break: two core models run loops with branches,
// reads and writes of a shared variable area (traced) and of private data
// (filtered out), while a bus model issues pipelined transfers of
// several masters on the system bus, those to one address range being
// traced with their master number. Core B is traced only after its loop has been entered
// (latched cross-trigger Enable). Core A writing the value 0xDEAD to the
// shared variable fires a data watchpoint routed to an external trigger
// output. The counter in the cross trigger counts core B's loop
// instructions and raises the complex trigger, which halts both cores in
// the same cycle, asserts a suspend line and stops the trace buffer after
// two more messages. After release the cores run on until the buffer
// stops. The buffer (a small circular region in trace blocks) is read
// through the host port and every stored message is checked against the
// messages predicted from the core stimulus, in time order with
// consecutive sequence numbers.
// Each mechanism is counted, and one that never happened is a failure.
module tb_psi_debug_top;
  import mcds_pkg::*;
  localparam int WS = 2, FLASH_LAT = WS + 1;
  localparam int TBASE = 6 * 16384, TMSG = 32, TLIMIT = TBASE + 4 * TMSG;
  localparam int REG = 1 << 20;

  logic clk = 0, rst_n = 0;
  logic [NCORE-1:0] pc_retire = '0, d_rd = '0, d_wr = '0, d_rvalid = '0, trig_pin = '0;
  logic [NCORE-1:0][31:0] pc = '0, d_addr = '0, d_wdata = '0, d_rdata = '0;
  logic [NCORE-1:0][2:0] pc_len = '0;
  logic [NEXT-1:0] ext_i = '0, ext_o;
  logic [NCORE-1:0] halt;
  logic [NSUSP-1:0] susp;
  logic ctrig;
  logic f_req = 0, f_rdy, f_rv, fl_req, fl_rv = 0;
  logic [31:0] f_addr = 0, f_rdata, fl_addr, fl_rdata;
  logic h_req = 0, h_we = 0, h_rdy, h_rv;
  logic [31:0] h_addr = 0, h_wdata = 0, h_rdata;
  logic b_valid = 0, b_ready = 0, b_write = 0;
  logic [MST_W-1:0] b_master = '0;
  logic [31:0] b_addr = 0, b_wdata = 0, b_rdata = 0;

  psi_debug_top dut (
    .clk, .rst_n, .pc_retire, .pc, .pc_len, .d_rd, .d_wr, .d_addr, .d_wdata, .d_rvalid, .d_rdata,
    .trig_pin_i(trig_pin),
    .bus_valid(b_valid), .bus_ready(b_ready), .bus_master(b_master), .bus_write(b_write),
    .bus_addr(b_addr), .bus_wdata(b_wdata), .bus_rdata(b_rdata), .ext_trig_i(ext_i), .ext_trig_o(ext_o), .halt_o(halt), .susp_o(susp),
    .ctrig_o(ctrig),
    .fetch_req_i(f_req), .fetch_addr_i(f_addr), .fetch_ready_o(f_rdy), .fetch_rvalid_o(f_rv),
    .fetch_rdata_o(f_rdata), .flash_req_o(fl_req), .flash_addr_o(fl_addr), .flash_rvalid_i(fl_rv),
    .flash_rdata_i(fl_rdata),
    .host_req_i(h_req), .host_we_i(h_we), .host_addr_i(h_addr), .host_wdata_i(h_wdata),
    .host_ready_o(h_rdy), .host_rvalid_o(h_rv), .host_rdata_o(h_rdata));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int tcount = 0;                         // cycles since reset release = time stamp
  always @(posedge clk) if (rst_n) tcount <= tcount + 1;

  // mechanism counters
  int n_ovl_hit = 0, n_flash = 0, n_page_swap = 0, n_host_stall = 0, n_filtered = 0,
      n_compressed = 0, n_sort_hold = 0, n_gated = 0, n_watch = 0, n_counter = 0,
      n_ctrig = 0, n_halt_sync = 0, n_susp = 0, n_ext_in = 0, n_wrap = 0, n_stop = 0,
      n_bus_wait = 0, n_bus_filtered = 0, n_bus_stored = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- flash model -----------------------------------------
  function automatic logic [31:0] flash_word(logic [31:0] a); return a ^ 32'hf1a5_0000; endfunction
  int fl_cnt = 0; logic [31:0] fl_a = 0;
  always @(posedge clk) begin
    fl_rv <= 0;
    if (fl_req) begin fl_cnt <= FLASH_LAT - 1; fl_a <= fl_addr; end
    else if (fl_cnt > 0) begin
      fl_cnt <= fl_cnt - 1;
      if (fl_cnt == 1) fl_rv <= 1;
    end
  end
  assign fl_rdata = flash_word(fl_a);

  // ---------------- host bus --------------------------------------------
  semaphore host_lock = new(1);
  task automatic host_wr(logic [31:0] a, logic [31:0] v);
    host_lock.get();
    @(negedge clk); h_req = 1; h_we = 1; h_addr = a; h_wdata = v;
    #1; while (!h_rdy) begin n_host_stall++; @(negedge clk); #1; end
    @(negedge clk); h_req = 0; h_we = 0;
    host_lock.put();
  endtask
  task automatic host_rd(logic [31:0] a, output logic [31:0] v);
    host_lock.get();
    @(negedge clk); h_req = 1; h_we = 0; h_addr = a;
    #1; while (!h_rdy) begin n_host_stall++; @(negedge clk); #1; end
    @(negedge clk); h_req = 0;
    chk(h_rv, "host read data valid");
    v = h_rdata;
    host_lock.put();
  endtask
  task automatic reg_wr(int idx, logic [31:0] v); host_wr(REG | (idx << 2), v); endtask
  task automatic reg_rd(int idx, output logic [31:0] v); host_rd(REG | (idx << 2), v); endtask

  // ---------------- core models -----------------------------------------
  trace_msg_t exp_l[$];
  bit running = 0;
  int b_en_from = -1;                       // first completion cycle traced for core B
  int cmp1_lo_b = 32'hb000_0000, cmp1_hi_b = 32'hb000_00ff;
  bit dead_write = 0;
  int run_start = 0;
  logic [31:0] pc_at_halt [NCORE];

  function automatic trace_msg_t mk(int src, msg_kind_e k, logic [31:0] a, logic [31:0] d, int t);
    trace_msg_t x;
    x = '0;
    x.ts = t; x.src = SRC_W'(src); x.kind = k; x.addr = a; x.data = d;
    return x;
  endfunction

  function automatic bit traced(int c, int t);
    return c == 0 || (b_en_from >= 0 && t >= b_en_from);
  endfunction

  for (genvar c = 0; c < NCORE; c++) begin : g_core
    initial begin
      logic [31:0] pcv, next_pc, cnt, ra, rt;
      bit synced, pend, was_traced;
      int wait_n, nins;
      pcv = (c == 0) ? 32'ha000_0000 : 32'hb000_1000;
      synced = 0; cnt = 0; pend = 0; nins = 0; was_traced = 0;
      wait (running);
      forever begin
        int cur;
        @(negedge clk);
        cur = tcount;
        pc_retire[c] = 0; d_rd[c] = 0; d_wr[c] = 0; d_rvalid[c] = 0;
        if (!running) continue;
        if (!halt[c] && $urandom_range(0, 2) == 0) begin
          pc_retire[c] = 1; pc[c] = pcv; pc_len[c] = $urandom_range(0, 1) ? 3'd2 : 3'd4;
          if (c == 1 && b_en_from < 0 && pcv >= cmp1_lo_b && pcv <= cmp1_hi_b) b_en_from = cur + 1;
          if (traced(c, cur)) begin
            if (!synced || pcv != next_pc) begin
              exp_l.push_back(mk(c, MSG_PROG, pcv, cnt, cur)); cnt = 1;
            end else begin cnt++; n_compressed++; end
            synced = 1; next_pc = pcv + pc_len[c];
          end else n_gated++;
          nins++;
          if (c == 1 && pcv < 32'hb000_0000 + 0) ;
          if (c == 1 && nins == 20) pcv = 32'hb000_0000;
          else if (nins % 8 == 0) pcv = (c == 0 ? 32'ha000_0000 : 32'hb000_0000) + ($urandom_range(0, 3) << 5);
          else pcv = pcv + pc_len[c];
        end
        if (pend) begin
          if (wait_n == 0) begin
            d_rvalid[c] = 1; d_rdata[c] = $urandom; pend = 0;
            if (ra < 32'hd000_0100 && traced(c, cur)) exp_l.push_back(mk(c, MSG_RD, ra, d_rdata[c], rt));
          end else wait_n--;
        end else if (!halt[c] && $urandom_range(0, 15) == 0) begin
          d_wr[c] = 1;
          d_addr[c] = $urandom_range(0, 1) ? 32'hd000_0000 + ($urandom_range(0, 63) << 2)
                                           : 32'hd000_1000 + ($urandom_range(0, 63) << 2);
          d_wdata[c] = $urandom_range(0, 32'hffff);
          if (c == 0 && !dead_write && cur >= run_start + 100) begin
            d_addr[c] = 32'hd000_0010; d_wdata[c] = 32'h0000_dead; dead_write = 1;
          end else if (d_wdata[c] == 32'h0000_dead) d_wdata[c] = 0;
          if (d_addr[c] < 32'hd000_0100) begin
            if (traced(c, cur)) exp_l.push_back(mk(c, MSG_WR, d_addr[c], d_wdata[c], cur));
          end else n_filtered++;
        end else if (!halt[c] && $urandom_range(0, 15) == 0) begin
          d_rd[c] = 1;
          d_addr[c] = $urandom_range(0, 1) ? 32'hd000_0000 + ($urandom_range(0, 63) << 2)
                                           : 32'hd000_1000 + ($urandom_range(0, 63) << 2);
          ra = d_addr[c]; rt = cur; pend = 1; wait_n = $urandom_range(0, 2);
          if (ra >= 32'hd000_0100) n_filtered++;
        end
      end
    end
  end

  // ---------------- system bus model -----------------------------------
  // Pipelined bus: an address phase is taken with b_ready, its data phase
  // is the next cycle with b_ready. Transfers to 0xE000_0000..0xE000_00FF
  // are traced. At most four wait cycles in a row, so that a data phase
  // ends within the ordering window of the system sorter.
  initial begin
    int nlow;
    bit av, dp, dw;
    logic [MST_W-1:0] dm;
    logic [31:0] da;
    int dts;
    av = 0; dp = 0; dw = 0; dm = '0; da = 0; dts = 0; nlow = 0;
    wait (running);
    forever begin
      int cur;
      @(negedge clk);
      cur = tcount;
      b_ready = nlow >= 4 || $urandom_range(0, 3) != 0;
      nlow = b_ready ? 0 : nlow + 1;
      if (!av && running && $urandom_range(0, 11) == 0) begin
        av = 1;
        b_master = MST_W'($urandom_range(1, 15));
        b_write  = $urandom_range(0, 1);
        b_addr   = ($urandom_range(0, 1) ? 32'he000_0000 : 32'he000_4000) + ($urandom_range(0, 63) << 2);
      end
      b_valid = av;
      b_wdata = $urandom; b_rdata = $urandom;
      if (av && !b_ready) n_bus_wait++;
      if (b_ready) begin
        if (dp) begin
          if (da < 32'he000_0100) begin
            trace_msg_t x;
            x = mk(NCORE, dw ? MSG_WR : MSG_RD, da, dw ? b_wdata : b_rdata, dts);
            x.mst = dm;
            exp_l.push_back(x);
          end else n_bus_filtered++;
        end
        dp = av;
        if (av) begin dw = b_write; dm = b_master; da = b_addr; dts = cur; av = 0; end
      end
    end
  end

  // ---------------- monitors --------------------------------------------
  logic [NCORE-1:0] halt_q = '0;
  logic [NSUSP-1:0] susp_q = '0;
  logic ext_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.s_hold || (|dut.u_hold)) n_sort_hold++;
    if (dut.cnt_hit) n_counter++;
    if (ctrig) n_ctrig++;
    halt_q <= halt; susp_q <= susp; ext_q <= ext_o[0];
    if (halt != halt_q && halt_q == '0) begin
      chk(halt == '1, "both cores halt in the same cycle");
      if (halt == '1) n_halt_sync++;
    end
    if (susp[0] && !susp_q[0]) n_susp++;
    if (ext_o[0] && !ext_q) n_watch++;
    if (dut.t_we && dut.t_addr == TLIMIT - 1) n_wrap++;
  end

  // ---------------- test sequence ---------------------------------------
  initial begin
    logic [31:0] v, st;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;

    // ===== phase 1: overlay =====
    reg_wr('h29, 32'hc0);                           // blocks 6 and 7 hold trace
    for (int i = 0; i < 1024; i++) begin
      host_wr(i << 2, 32'h1000_0000 + i);           // page 0 at byte 0 (block 0)
      host_wr(32'h4_0000 + (i << 2), 32'h2000_0000 + i);  // page 1 at block 4
    end
    reg_wr('h27, 32'h4_0000);                        // page stride
    reg_wr('h28, WS);                                // flash wait states
    reg_wr('h40, 32'h8010_0000 | (2 << 1) | 1);      // range 0: 4 KB at 0x8010_0000
    reg_wr('h41, 0);
    fork
      begin : fetcher
        for (int i = 0; i < 400; i++) begin
          int lat; bit inr; logic [31:0] e;
          if (i == 200) begin reg_wr('h26, 1); n_page_swap++; end
          @(negedge clk);
          f_addr = ($urandom_range(0, 1) ? 32'h8010_0000 : 32'h8010_0800) + ($urandom_range(0, 1023) << 2);
          inr = f_addr < 32'h8010_1000;
          e = inr ? ((i >= 200 ? 32'h2000_0000 : 32'h1000_0000) + ((f_addr - 32'h8010_0000) >> 2))
                  : flash_word(f_addr);
          f_req = 1;
          #1 chk(f_rdy, "fetch ready");
          @(negedge clk); f_req = 0; lat = 1;
          while (!f_rv && lat < 20) begin lat++; @(negedge clk); end
          chk(f_rv && f_rdata == e, $sformatf("fetch %h data %h expected %h", f_addr, f_rdata, e));
          chk(lat == WS + 1, $sformatf("fetch latency %0d", lat));
          if (inr) n_ovl_hit++; else n_flash++;
        end
      end
      begin : host_reader
        for (int i = 0; i < 150; i++) begin
          int w; logic [31:0] hv;
          w = $urandom_range(0, 1023);
          host_rd(w << 2, hv);
          chk(hv == 32'h1000_0000 + w, "host read of page 0 during fetches");
        end
      end
    join

    // ===== phase 2: trace and break =====
    // external trigger pin 1 raises suspend line 2, then release
    reg_wr('h24, 32'h0000_0400);
    @(negedge clk); ext_i[1] = 1; @(negedge clk); ext_i[1] = 0;
    @(negedge clk); chk(susp == 4'b0100, "external trigger reaches its suspend line");
    if (susp[2]) n_ext_in++;
    reg_wr('h25, 1);                                 // release
    chk(susp == '0, "released");

    for (int c = 0; c < NCORE; c++) begin
      reg_wr(16*c + 4, 32'hd000_0000); reg_wr(16*c + 5, 32'hd000_00ff);   // qualification range
    end
    // core A: watchpoint on 0xDEAD written to 0xD000_0010
    reg_wr(6, 32'hd000_0010); reg_wr(7, 32'hd000_0010); reg_wr(8, 32'h0000_dead); reg_wr(9, 32'h0000_ffff);
    reg_wr(10, 32'b0_1111_0011);                     // prog+data trace, cmp enables, qualify, value match
    reg_wr(11, 32'h0000_0800);                       // OR: data comparator 1 (line 3)
    reg_wr(12, 32'h0001_0000);                       // core A trigger -> external output 0
    // core B: PC comparator 1 on the loop; Enable latched from it; gated trace
    reg_wr(16 + 2, cmp1_lo_b); reg_wr(16 + 3, cmp1_hi_b);
    reg_wr(16 + 10, 32'b1_0101_1011);                // gate, qualify, data cmp0, pc cmp1, prog+data
    reg_wr(16 + 11, 32'h0001_0200);                  // OR: PC comparator 1 (line 1), latch
    // central: core B into AND, counter into OR, limit 60
    reg_wr('h20, 32'h0002_0002);
    reg_wr('h21, 60);
    reg_wr('h22, 32'h0000_0103);                     // complex trigger halts both, suspend 0
    // system bus: trace data transfers in the range of comparator 0
    reg_wr('h33, 32'he000_0000); reg_wr('h34, 32'he000_00ff); reg_wr('h39, 32'h52);
    reg_wr('h2A, TBASE); reg_wr('h2B, TLIMIT); reg_wr('h2C, 2);
    reg_wr('h25, 32'h4);                             // arm the trace buffer
    @(negedge clk); run_start = tcount; running = 1;

    // wait for the break
    wait (halt != '0);
    repeat (20) @(negedge clk);
    chk(pc_retire == '0, "halted cores retire nothing");
    reg_rd('h30, st);
    chk(st[1:0] == 2'b11 && st[4] == 1'b1, $sformatf("status shows halt and complex trigger cause %h", st));
    reg_wr('h20, 32'h0000_0002);                     // counter no longer into the OR
    reg_wr('h25, 1);                                 // release
    chk(halt == '0, "cores released");
    // run until the buffer has stopped
    begin
      int guard; guard = 0;
      do begin repeat (50) @(negedge clk); reg_rd('h30, st); guard++; end while (!st[11] && guard < 100);
    end
    chk(st[11] && st[10] && st[9], $sformatf("trace stopped after trigger, buffer wrapped (status %h)", st));
    if (st[11]) n_stop++;
    chk(!st[12] && !st[13] && !st[14], $sformatf("no FIFO overflow and no emulation RAM error (status %h)", st));
    chk(dead_write, "watchpoint write issued");
    running = 0;
    repeat (30) @(negedge clk);

    // ===== read the trace buffer =====
    begin
      logic [31:0] wp, w[4];
      int start, nmsg, last_seq;
      logic [31:0] last_ts;
      reg_rd('h31, wp);
      start = int'(wp); nmsg = TMSG; last_seq = -1; last_ts = 0;
      for (int k = 0; k < nmsg; k++) begin
        trace_msg_t m; int f;
        for (int j = 0; j < 4; j++) host_rd(((TBASE + (start - TBASE + 4 * k + j) % (4 * TMSG)) << 2), w[j]);
        m = '0;
        m.kind = msg_kind_e'(w[0][31:30]); m.src = w[0][29:28]; m.mst = w[0][27:24];
        m.ts = w[1]; m.addr = w[2]; m.data = w[3];
        if (last_seq >= 0) chk(int'(w[0][23:0]) == last_seq + 1, "consecutive sequence numbers");
        last_seq = int'(w[0][23:0]);
        if (m.src == SRC_W'(NCORE)) n_bus_stored++;
        if (k > 0) chk(m.ts >= last_ts, "stored messages in time order");
        last_ts = m.ts;
        f = -1;
        foreach (exp_l[i]) if (f < 0 && exp_l[i] == m) f = i;
        chk(f >= 0, $sformatf("stored message src %0d mst %0d kind %0d addr %h data %h ts %0d was predicted",
                              m.src, m.mst, m.kind, m.addr, m.data, m.ts));
        if (f >= 0) exp_l.delete(f);
      end
    end

    // ===== every mechanism must have happened =====
    chk(n_ovl_hit > 0,    "overlay redirection");
    chk(n_flash > 0,      "flash access outside the overlay");
    chk(n_page_swap > 0,  "page swap");
    chk(n_host_stall > 0, "host held off by a bank conflict");
    chk(n_filtered > 0,   "data trace qualification filtered accesses");
    chk(n_compressed > 0, "sequential instructions compressed");
    chk(n_sort_hold > 0,  "sorter hold-off");
    chk(n_gated > 0,      "trace gated by cross-trigger Enable");
    chk(n_watch > 0,      "data watchpoint to external trigger output");
    chk(n_counter > 0,    "cross-trigger counter fired");
    chk(n_ctrig > 0,      "complex trigger");
    chk(n_halt_sync > 0,  "synchronous halt of both cores");
    chk(n_susp > 0,       "suspend output");
    chk(n_ext_in > 0,     "external trigger input");
    chk(n_wrap > 0,       "trace buffer wrap");
    chk(n_stop > 0,       "trace stop after trigger");
    chk(n_bus_wait > 0,     "bus address phase held by wait states");
    chk(n_bus_filtered > 0, "bus transfers outside the traced range filtered");
    chk(n_bus_stored > 0,   "bus transfers with master number in the trace");
    $display("mechanisms: ovl=%0d flash=%0d swap=%0d stall=%0d filt=%0d comp=%0d hold=%0d gated=%0d watch=%0d cnt=%0d ctrig=%0d halt=%0d susp=%0d ext=%0d wrap=%0d stop=%0d bus_wait=%0d bus_filt=%0d bus_stored=%0d",
             n_ovl_hit, n_flash, n_page_swap, n_host_stall, n_filtered, n_compressed, n_sort_hold,
             n_gated, n_watch, n_counter, n_ctrig, n_halt_sync, n_susp, n_ext_in, n_wrap, n_stop,
             n_bus_wait, n_bus_filtered, n_bus_stored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
