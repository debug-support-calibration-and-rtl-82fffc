// Testbench of mcds_msg_sorter with three inputs and HOLD = 6. Each input
// carries messages with rising time stamps that reach the sorter 1 to HOLD
// cycles after their stamp, so an empty input may still receive an older
// message. The output must deliver every message exactly once, in the
// order of a global sort by time stamp, and keep each input's own order;
// the sink applies random back-pressure. The hold-off must have been used.
module tb_mcds_msg_sorter;
  import mcds_pkg::*;
  localparam int N = 3, HOLD = 6;
  logic clk = 0, rst_n = 0;
  logic [TS_W-1:0] now = 0;
  logic [N-1:0] iv, ir;
  trace_msg_t [N-1:0] im;
  logic ov, ordy = 0, hold;
  trace_msg_t om;
  int checks = 0, failures = 0, n_hold = 0, n_out = 0;
  always #5 clk = ~clk;

  mcds_msg_sorter #(.N(N), .HOLD(HOLD)) dut (
    .clk, .rst_n, .now_i(now), .in_valid(iv), .in_ready(ir), .in_msg(im),
    .out_valid(ov), .out_ready(ordy), .out_msg(om), .hold_o(hold));

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

  // per-input message lists: time stamp and arrival cycle
  int ts_l[N][$], arr_l[N][$];
  int all_ts[$];
  int rd_idx[N];
  int exp_seq[N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      iv[i] = 0; im[i] = '0;
      if (rd_idx[i] < ts_l[i].size() && arr_l[i][rd_idx[i]] <= int'(now)) begin
        iv[i] = 1;
        im[i].ts = TS_W'(ts_l[i][rd_idx[i]]);
        im[i].src = SRC_W'(i);
        im[i].data = DATA_W'(rd_idx[i]);
      end
    end
  end

  initial begin
    int total;
    // build the streams
    for (int i = 0; i < N; i++) begin
      int t, last_arr;
      t = 10; last_arr = 0;
      rd_idx[i] = 0; exp_seq[i] = 0;
      repeat (300) begin
        int a;
        t += $urandom_range(1, 12);
        a = t + $urandom_range(1, HOLD);
        if (a < last_arr) a = last_arr;
        last_arr = a;
        ts_l[i].push_back(t); arr_l[i].push_back(a); all_ts.push_back(t);
      end
    end
    all_ts.sort();
    total = all_ts.size();
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_out < total) begin
      @(negedge clk);
      ordy = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (hold) n_hold++;
      if (ov && ordy) begin
        int s;
        s = int'(om.src);
        chk(int'(om.ts) == all_ts[n_out], $sformatf("order: got ts %0d expected %0d", om.ts, all_ts[n_out]));
        chk(int'(om.data) == exp_seq[s], "per-input order");
        chk(ir[s] && $countones(ir) == 1, "in_ready of the chosen input only");
        exp_seq[s]++;
        rd_idx[s]++;
        n_out++;
      end else chk(ir == '0, "no in_ready without transfer");
      now <= now + 1;
    end
    chk(n_hold > 10, "hold-off used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
