// Testbench of emem: the host first fills all 512 KB; then the overlay
// port reads, the trace port writes and the host reads and writes at
// random, all three in the same cycles, against a shadow copy of the
// memory. Blocks 6 and 7 are trace blocks. Checks read data, that the
// host is held off (host_ready_o = 0) exactly when the overlay or trace
// port uses its block, and that accesses of the wrong kind are refused and
// flagged.
module tb_emem;
  import mcds_pkg::*;
  localparam int WORDS = EMEM_BYTES / 4, BWORDS = BLK_BYTES / 4;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [NBLK-1:0] is_trc = 8'b1100_0000;
  logic o_req = 0, t_we = 0, h_req = 0, h_we = 0, h_rdy, h_rv, o_err, t_err;
  logic [EMEM_WAW-1:0] o_a = 0, t_a = 0, h_a = 0;
  logic [31:0] o_rd, t_wd = 0, h_wd = 0, h_rd;
  int checks = 0, failures = 0, n_stall = 0, n_oerr = 0, n_terr = 0;
  logic [31:0] sh [WORDS];
  always #5 clk = ~clk;

  emem dut (.clk, .rst_n, .blk_is_trace_i(is_trc), .clr_i(clr),
            .ovl_req_i(o_req), .ovl_addr_i(o_a), .ovl_rdata_o(o_rd), .ovl_err_o(o_err),
            .trc_we_i(t_we), .trc_addr_i(t_a), .trc_wdata_i(t_wd), .trc_err_o(t_err),
            .host_req_i(h_req), .host_we_i(h_we), .host_addr_i(h_a), .host_wdata_i(h_wd),
            .host_ready_o(h_rdy), .host_rvalid_o(h_rv), .host_rdata_o(h_rd));

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int blk(logic [EMEM_WAW-1:0] a); return int'(a) / BWORDS; endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      h_req = 1; h_we = 1; h_a = EMEM_WAW'(i); h_wd = $urandom; sh[i] = h_wd;
    end
    @(negedge clk); h_req = 0;
    // random traffic
    for (int i = 0; i < 20000; i++) begin
      bit o_ok, t_ok, busy;
      logic [31:0] e_o, e_h;
      bit exp_o, exp_h;
      @(negedge clk);
      clr = (i % 1000 == 999);
      o_req = $urandom_range(0, 1);
      o_a   = ($urandom_range(0, 30) == 0) ? EMEM_WAW'(6 * BWORDS + $urandom_range(0, 2 * BWORDS - 1))
                                           : EMEM_WAW'($urandom_range(0, 6 * BWORDS - 1));
      t_we  = $urandom_range(0, 1);
      t_a   = ($urandom_range(0, 30) == 0) ? EMEM_WAW'($urandom_range(0, 6 * BWORDS - 1))
                                           : EMEM_WAW'(6 * BWORDS + $urandom_range(0, 2 * BWORDS - 1));
      t_wd  = $urandom;
      h_req = $urandom_range(0, 1);
      h_we  = $urandom_range(0, 1);
      h_a   = EMEM_WAW'($urandom_range(0, WORDS - 1));
      h_wd  = $urandom;
      #1;
      o_ok = o_req && !is_trc[blk(o_a)];
      t_ok = t_we && is_trc[blk(t_a)];
      busy = (o_ok && blk(o_a) == blk(h_a)) || (t_ok && blk(t_a) == blk(h_a));
      chk(h_rdy == (h_req && !busy), "host ready");
      if (h_req && busy) n_stall++;
      exp_o = o_ok; e_o = sh[o_a];
      exp_h = h_req && !busy && !h_we; e_h = sh[h_a];
      if (o_req && !o_ok) n_oerr++;
      if (t_we && !t_ok) n_terr++;
      @(posedge clk);
      if (t_ok) sh[t_a] = t_wd;
      if (h_req && !busy && h_we) sh[h_a] = h_wd;
      #1;
      if (exp_o) chk(o_rd == e_o, "overlay read data");
      chk(h_rv == exp_h, "host rvalid");
      if (exp_h) chk(h_rd == e_h, "host read data");
      if (!clr && o_req && !o_ok) chk(o_err, "overlay error flag");
      if (!clr && t_we && !t_ok) chk(t_err, "trace error flag");
      if (clr) chk(!o_err && !t_err, "flags cleared");
    end
    // trace blocks hold what the trace port wrote, overlay blocks what the host wrote
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      o_req = 0; t_we = 0; h_req = 1; h_we = 0; h_a = EMEM_WAW'($urandom_range(0, WORDS - 1));
      @(negedge clk); h_req = 0;
      chk(h_rv && h_rd == sh[h_a], "final read-back");
    end
    chk(n_stall > 100 && n_oerr > 50 && n_terr > 50, "stalls and errors exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
