// Testbench of trace_wr: random messages into a 40-word (ten-message)
// circular buffer starting at word 16. A memory model collects the writes.
// Checks that each accepted message lands as header, time stamp, address
// and data in four consecutive words, that the pointer wraps to the base,
// that at most one message is taken per four cycles, and that after the
// trigger exactly the programmed number of messages (5) is stored before
// recording stops. Re-arming restarts the buffer.
module tb_trace_wr;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0, arm = 0, trig = 0;
  trc_cfg_t cfg;
  logic mv = 0, mr, we, armed, wrapped, trgd, stopped;
  trace_msg_t m;
  logic [EMEM_WAW-1:0] wa, wptr;
  logic [31:0] wd;
  int checks = 0, failures = 0, n_acc = 0, n_wrap = 0, n_stop_chk = 0;
  logic [31:0] mem [64];
  always #5 clk = ~clk;

  trace_wr dut (.clk, .rst_n, .cfg_i(cfg), .arm_i(arm), .trig_i(trig),
                .msg_valid_i(mv), .msg_ready_o(mr), .msg_i(m),
                .we_o(we), .waddr_o(wa), .wdata_o(wd), .wptr_o(wptr),
                .armed_o(armed), .wrapped_o(wrapped), .triggered_o(trgd), .stopped_o(stopped));

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

  always @(posedge clk) if (rst_n && we) begin
    if (wa < 16 || wa >= 56) begin failures++; $display("FAIL write outside buffer %0d", wa); end
    else mem[wa] = wd;
  end

  initial begin
    int e_ptr, last_acc, post_cnt;
    trace_msg_t q[$];
    cfg.base = 16; cfg.limit = 56; cfg.post = 5;
    m = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    chk(armed && wptr == 16, "armed at base");
    e_ptr = 16; last_acc = -10; post_cnt = -1;
    for (int i = 0; i < 400; i++) begin
      bit acc, fire;
      mv = ($urandom_range(0, 2) != 0);
      m.ts = $urandom; m.src = $urandom; m.kind = msg_kind_e'($urandom_range(0, 2));
      m.addr = $urandom; m.data = $urandom;
      trig = (i >= 300 && !trgd);
      #1;
      acc = mv && mr && armed && !stopped;
      fire = trig && !trgd;
      @(posedge clk);
      if (acc) begin
        chk(i - last_acc >= 4, "one message per four cycles at most");
        last_acc = i;
        q.push_back(m);
        n_acc++;
        if (post_cnt > 0) post_cnt--;
      end
      if (fire) post_cnt = 5;
      @(negedge clk);
      // every message whose four words are complete is checked
      if (acc) begin
        repeat (3) @(negedge clk);
        chk(mem[e_ptr] == {q[$].kind, q[$].src, 28'(n_acc - 1)} && mem[e_ptr + 1] == q[$].ts &&
            mem[e_ptr + 2] == q[$].addr && mem[e_ptr + 3] == q[$].data, "message words");
        e_ptr += 4; if (e_ptr >= 56) begin e_ptr = 16; n_wrap++; end
        chk(wptr == EMEM_WAW'(e_ptr), "write pointer");
        i += 3;
      end
      if (post_cnt == 0) begin
        chk(stopped, "stopped after the post-trigger messages");
        n_stop_chk++;
        post_cnt = -1;
      end
    end
    chk(trgd && stopped && wrapped && n_wrap > 3 && n_stop_chk == 1, $sformatf("trigger, stop and wrap exercised %0d %0d %0d %0d", trgd, stopped, wrapped, n_wrap));
    // nothing more is written after the stop
    begin
      int p; p = wptr;
      repeat (40) begin @(negedge clk); mv = 1; end
      chk(wptr == EMEM_WAW'(p), "no writes after stop");
    end
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    chk(!stopped && !trgd && !wrapped && wptr == 16, "re-armed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
