// Testbench of ovl_access with models of the flash (fixed latency of
// FLASH_LAT cycles) and of the emulation RAM (one-cycle read, contents are
// a function of the address). One 4 KB range is overlaid. For each read
// the testbench checks the data, whether it came from overlay or flash,
// and that an overlay read answers exactly ws+1 cycles after the request,
// which here equals the flash latency. A page swap between two reads
// changes the overlay data source.
module tb_ovl_access;
  import mcds_pkg::*;
  localparam int WS = 3, FLASH_LAT = WS + 1;
  logic clk = 0, rst_n = 0;
  ovl_cfg_t cfg;
  logic req = 0, rdy, rv, hit, f_req, f_rv = 0, e_req;
  logic [31:0] addr = 0, rdata, f_addr, f_rdata, e_rdata = 0;
  logic [EMEM_WAW-1:0] e_addr;
  int checks = 0, failures = 0, n_ovl = 0, n_flash = 0, n_page = 0;
  always #5 clk = ~clk;

  ovl_access dut (.clk, .rst_n, .cfg_i(cfg), .req_i(req), .addr_i(addr), .ready_o(rdy),
                  .rvalid_o(rv), .rdata_o(rdata), .hit_o(hit),
                  .flash_req_o(f_req), .flash_addr_o(f_addr), .flash_rvalid_i(f_rv), .flash_rdata_i(f_rdata),
                  .emem_req_o(e_req), .emem_addr_o(e_addr), .emem_rdata_i(e_rdata));

  function automatic logic [31:0] flash_word(logic [31:0] a); return a ^ 32'hf1a5_0000; endfunction
  function automatic logic [31:0] emem_word(logic [31:0] wa); return wa * 32'h0001_0003 + 7; endfunction

  // emulation RAM model
  always @(posedge clk) if (e_req) e_rdata <= emem_word(32'(e_addr));
  // flash model: answers FLASH_LAT cycles after the request
  int f_cnt = 0; logic [31:0] f_a = 0;
  always @(posedge clk) begin
    f_rv <= 0;
    if (f_req) begin f_cnt <= FLASH_LAT - 1; f_a <= f_addr; end
    else if (f_cnt > 0) begin
      f_cnt <= f_cnt - 1;
      if (f_cnt == 1) f_rv <= 1;
    end
  end
  assign f_rdata = flash_word(f_a);

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

  initial begin
    cfg = '0;
    cfg.ws = WS;
    cfg.rng[5] = '{en: 1'b1, size: 3'd2, base: 32'h8001_0000, offs: 19'h1_0000};
    cfg.page_stride = 19'h4_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int lat; bit in_r; logic [31:0] exp;
      @(negedge clk);
      if (i % 50 == 25) begin cfg.page = !cfg.page; end
      addr = ($urandom_range(0, 1) ? 32'h8001_0000 : 32'h8001_0800) + ($urandom_range(0, 1023) << 2);
      in_r = addr < 32'h8001_1000;
      req = 1;
      chk(rdy, "ready when idle");
      #1 chk(hit == in_r && f_req == !in_r, "routing");
      exp = in_r ? emem_word(32'((19'h1_0000 + (cfg.page ? 19'h4_0000 : 0) + (addr - 32'h8001_0000)) >> 2))
                 : flash_word(addr);
      lat = 0;
      @(negedge clk); req = 0;
      while (!rv && lat < 20) begin lat++; @(negedge clk); end
      lat++;
      chk(rv && rdata == exp, $sformatf("data %h expected %h", rdata, exp));
      chk(lat == WS + 1, $sformatf("latency %0d expected %0d", lat, WS + 1));
      if (in_r) begin n_ovl++; if (cfg.page) n_page++; end else n_flash++;
    end
    chk(n_ovl > 100 && n_flash > 100 && n_page > 50, "both paths and pages used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
