// Testbench of ovl_addr_map: all 16 ranges programmed with random sizes
// (1 KB to 32 KB), aligned bases and offsets; random addresses, half of
// them inside some range, are checked against a model of the first
// matching range, the offset inside the block and the page stride. The
// page bit is toggled between accesses.
module tb_ovl_addr_map;
  import mcds_pkg::*;
  ovl_cfg_t cfg;
  logic [31:0] addr;
  logic hit;
  logic [3:0] idx;
  logic [EMEM_AW-1:0] ea;
  int checks = 0, failures = 0, n_hit = 0, n_page = 0;

  ovl_addr_map dut (.cfg_i(cfg), .addr_i(addr), .hit_o(hit), .idx_o(idx), .emem_addr_o(ea));

  initial begin : watchdog
    #1000000;
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
    for (int rep = 0; rep < 20; rep++) begin
      for (int r = 0; r < NRANGE; r++) begin
        int sz;
        cfg.rng[r].en   = ($urandom_range(0, 7) != 0);
        cfg.rng[r].size = $urandom_range(0, 5);
        sz = 1024 << cfg.rng[r].size;
        cfg.rng[r].base = 32'h8000_0000 + ($urandom_range(0, 63) * 32768) + ($urandom_range(0, 31) * sz) % 32768;
        cfg.rng[r].offs = EMEM_AW'($urandom_range(0, 7) * 32768);
      end
      cfg.page_stride = EMEM_AW'(32'h4_0000);
      for (int i = 0; i < 500; i++) begin
        bit e_hit; int e_idx; logic [EMEM_AW-1:0] e_ea;
        cfg.page = $urandom_range(0, 1);
        if ($urandom_range(0, 1)) begin
          int r;
          r = $urandom_range(0, NRANGE - 1);
          addr = cfg.rng[r].base + $urandom_range(0, (1024 << cfg.rng[r].size) - 1);
        end else addr = 32'h8000_0000 + $urandom_range(0, 32'h1f_ffff);
        e_hit = 0; e_idx = 0; e_ea = 0;
        for (int r = 0; r < NRANGE && !e_hit; r++) begin
          int sz;
          sz = 1024 << cfg.rng[r].size;
          if (cfg.rng[r].en && addr >= cfg.rng[r].base && addr < cfg.rng[r].base + sz) begin
            e_hit = 1; e_idx = r;
            e_ea = EMEM_AW'(cfg.rng[r].offs + (addr - cfg.rng[r].base) + (cfg.page ? 32'h4_0000 : 0));
          end
        end
        #1;
        chk(hit == e_hit, "hit");
        if (e_hit) begin
          n_hit++; if (cfg.page) n_page++;
          chk(idx == 4'(e_idx) && ea == e_ea, $sformatf("range %0d/%0d address %h expected %h", idx, e_idx, ea, e_ea));
        end
      end
    end
    chk(n_hit > 1000 && n_page > 400, "hits on both pages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
