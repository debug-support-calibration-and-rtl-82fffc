// Overlay address map: redirects flash accesses into the emulation RAM.
//
// NRANGE (16) ranges are compared with the flash address at once. Range r
// covers MIN_BLK << size bytes (1, 2, 4, 8, 16 or 32 KB; larger codes are
// taken as 32 KB) starting at rng[r].base, which is aligned to that size.
// On a hit the offset inside the block is added to the range's emulation
// RAM offset, and when the page bit is 1 the page stride as well, so one
// register write moves every range from page 0 to page 1 (for instance from
// working to reference calibration data) in the same clock cycle; no access
// ever sees a mix of the two pages. With overlapping ranges the lowest
// numbered one wins. Range count and the 1 KB to 32 KB block sizes follow
// the published implementation; the size coding, the alignment rule and the
// page stride are this design's.
// Timing: purely combinational.
module ovl_addr_map
  import mcds_pkg::*;
(
  input  ovl_cfg_t            cfg_i,
  input  logic [ADDR_W-1:0]   addr_i,
  output logic                hit_o,
  output logic [$clog2(NRANGE)-1:0] idx_o,
  output logic [EMEM_AW-1:0]  emem_addr_o
);
  function automatic logic [ADDR_W-1:0] blk_mask(logic [2:0] size);
    logic [2:0] s;
    s = (size > 3'(NSIZE - 1)) ? 3'(NSIZE - 1) : size;
    return (ADDR_W'(MIN_BLK) << s) - 1'b1;
  endfunction

  always_comb begin
    logic [ADDR_W-1:0] m;
    hit_o       = 1'b0;
    idx_o       = '0;
    emem_addr_o = '0;
    for (int r = NRANGE - 1; r >= 0; r--) begin
      m = blk_mask(cfg_i.rng[r].size);
      if (cfg_i.rng[r].en && (((addr_i ^ cfg_i.rng[r].base) & ~m) == '0)) begin
        hit_o       = 1'b1;
        idx_o       = ($clog2(NRANGE))'(r);
        emem_addr_o = cfg_i.rng[r].offs + EMEM_AW'(addr_i & m) +
                      (cfg_i.page ? cfg_i.page_stride : '0);
      end
    end
  end
endmodule
