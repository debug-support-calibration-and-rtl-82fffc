// Workload testbench of psi_debug_top (default parameters): the flash
// overlay at the sizes the emulation RAM is built for.
//
// Workload 1: all 16 ranges at the largest size, 32 KB each, mapped onto the
// whole 512 KB emulation RAM (every block used for overlay), one page.
// Workload 2: 16 ranges of 16 KB spread over the flash with 48 KB gaps, on
// two pages 256 KB apart that together fill the RAM, swapped by one
// register write while the core keeps reading.
// The host first fills all 131072 RAM words with a pattern made from the
// word address. A core model then reads random flash addresses; every read
// must return the RAM word the map selects (or the flash word outside the
// ranges) exactly ws+1 cycles after the request. Every range of both
// workloads, both pages and the flash gaps must be hit.
module tb_overlay_workloads;
  import mcds_pkg::*;
  localparam int WS = 3, FLASH_LAT = WS + 1;
  localparam int REG = 1 << 20;
  localparam logic [31:0] FBASE = 32'h8000_0000;

  logic clk = 0, rst_n = 0;
  logic [NCORE-1:0] zero_n = '0;
  logic [NCORE-1:0][31:0] zero_w = '0;
  logic [NCORE-1:0][2:0] zero_l = '0;
  logic [NEXT-1:0] ext_o;
  logic [NCORE-1:0] halt;
  logic [NSUSP-1:0] susp;
  logic ctrig;
  logic f_req = 0, f_rdy, f_rv, fl_req, fl_rv = 0;
  logic [31:0] f_addr = 0, f_rdata, fl_addr, fl_rdata;
  logic h_req = 0, h_we = 0, h_rdy, h_rv;
  logic [31:0] h_addr = 0, h_wdata = 0, h_rdata;

  psi_debug_top dut (
    .clk, .rst_n, .pc_retire(zero_n), .pc(zero_w), .pc_len(zero_l), .d_rd(zero_n), .d_wr(zero_n),
    .d_addr(zero_w), .d_wdata(zero_w), .d_rvalid(zero_n), .d_rdata(zero_w), .trig_pin_i(zero_n),
    .bus_valid(1'b0), .bus_ready(1'b1), .bus_master('0), .bus_write(1'b0), .bus_addr('0),
    .bus_wdata('0), .bus_rdata('0),
    .ext_trig_i('0), .ext_trig_o(ext_o), .halt_o(halt), .susp_o(susp), .ctrig_o(ctrig),
    .fetch_req_i(f_req), .fetch_addr_i(f_addr), .fetch_ready_o(f_rdy), .fetch_rvalid_o(f_rv),
    .fetch_rdata_o(f_rdata), .flash_req_o(fl_req), .flash_addr_o(fl_addr), .flash_rvalid_i(fl_rv),
    .flash_rdata_i(fl_rdata),
    .host_req_i(h_req), .host_we_i(h_we), .host_addr_i(h_addr), .host_wdata_i(h_wdata),
    .host_ready_o(h_rdy), .host_rvalid_o(h_rv), .host_rdata_o(h_rdata));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_flash = 0, n_swap = 0;
  int hits1 [16], hits2 [2][16];

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [31:0] flash_word(logic [31:0] a); return a ^ 32'hf1a5_0000; endfunction
  function automatic logic [31:0] ram_word(int widx); return 32'h5a00_0000 | 32'(widx); endfunction

  // flash model: answers FLASH_LAT cycles after the request
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

  task automatic host_wr(logic [31:0] a, logic [31:0] v);
    @(negedge clk); h_req = 1; h_we = 1; h_addr = a; h_wdata = v;
    #1; while (!h_rdy) begin @(negedge clk); #1; end
    @(negedge clk); h_req = 0; h_we = 0;
  endtask
  task automatic reg_wr(int idx, logic [31:0] v); host_wr(REG | (idx << 2), v); endtask

  // one core read with data and timing check
  task automatic fetch(logic [31:0] a, logic [31:0] e);
    int lat;
    @(negedge clk); f_addr = a; f_req = 1;
    #1 chk(f_rdy, "fetch accepted");
    @(negedge clk); f_req = 0; lat = 1;
    while (!f_rv && lat < 20) begin lat++; @(negedge clk); end
    chk(f_rv && f_rdata == e, $sformatf("fetch %h data %h expected %h", a, f_rdata, e));
    chk(lat == WS + 1, $sformatf("fetch %h latency %0d", a, lat));
  endtask

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // fill the whole emulation RAM through the host port
    for (int w = 0; w < EMEM_BYTES / 4; w++) host_wr(w << 2, ram_word(w));
    reg_wr('h28, WS);

    // ===== workload 1: 16 x 32 KB, one page =====
    for (int r = 0; r < 16; r++) begin
      reg_wr('h40 + 2*r, (FBASE + r * 32'h8000) | (5 << 1) | 1);
      reg_wr('h41 + 2*r, r * 32'h8000);
    end
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] off, a;
      off = $urandom_range(0, 1) ? ($urandom_range(0, EMEM_BYTES / 4 - 1) << 2)
                                 : (32'h8_0000 + ($urandom_range(0, 4095) << 2));
      a = FBASE + off;
      if (off < EMEM_BYTES) begin
        fetch(a, ram_word(int'(off >> 2)));
        hits1[off >> 15]++;
      end else begin
        fetch(a, flash_word(a)); n_flash++;
      end
    end

    // ===== workload 2: 2 pages x 16 ranges x 16 KB =====
    reg_wr('h27, 32'h4_0000);                               // page stride 256 KB
    for (int r = 0; r < 16; r++) begin
      reg_wr('h40 + 2*r, (FBASE + r * 32'h1_0000) | (4 << 1) | 1);
      reg_wr('h41 + 2*r, r * 32'h4000);
    end
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] off, a;
      int r, p;
      if (i == 1500) begin reg_wr('h26, 1); n_swap++; end   // swap to page 1
      p = (i >= 1500);
      r = $urandom_range(0, 15);
      off = r * 32'h1_0000 + ($urandom_range(0, 3) == 0 ? 32'h4000 + ($urandom_range(0, 12287) << 2)
                                                        : ($urandom_range(0, 4095) << 2));
      a = FBASE + off;
      if (off[15:0] < 16'h4000) begin
        fetch(a, ram_word(int'((p * 32'h4_0000 + r * 32'h4000 + off[13:0]) >> 2)));
        hits2[p][r]++;
      end else begin
        fetch(a, flash_word(a)); n_flash++;
      end
    end

    for (int r = 0; r < 16; r++) begin
      chk(hits1[r] > 0, $sformatf("workload 1 range %0d used", r));
      chk(hits2[0][r] > 0 && hits2[1][r] > 0, $sformatf("workload 2 range %0d used on both pages", r));
    end
    chk(n_flash > 0, "flash reads outside the ranges");
    chk(n_swap > 0, "page swap");
    $display("flash=%0d swap=%0d", n_flash, n_swap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
