// Debug register file: the configuration and status registers through which
// the debug host programs the trace, trigger, break and overlay resources.
//
// The host (the debugger through the device's debug interface, or the
// on-package debug core serving USB or CAN calibration tools) reaches the
// registers with single-cycle word writes and reads; read data is returned
// one cycle after the read. Register map (word index):
//   core c at 16*c:  +0..+3 PC comparator 0 lo, hi, 1 lo, hi
//                    +4..+7 data comparator 0 lo, hi, 1 lo, hi
//                    +8 data value, +9 data value mask
//                    +10 control: [0] program trace, [1] data trace,
//                        [2],[3] PC comparator 0/1 on, [4],[5] data
//                        comparator 0/1 on, [6] qualify data trace by
//                        comparator 0, [7] comparator 1 needs data match,
//                        [8] trace only while cross-trigger Enable
//                    +11 cross trigger: [5:0] AND mask, [13:8] OR mask,
//                        [16] latch Enable
//                    +12 break route of the core's trigger
//   0x20  central cross trigger: [1:0] cores into AND, [9:8] cores into
//         OR, [16] AND into OR, [17] counter into OR
//   0x21  counter limit [15:0]
//   0x22  break route of the complex trigger; 0x23, 0x24 external pins 0, 1
//         (route: [1:0] halt cores, [11:8] suspend lines, [17:16] trigger
//         outputs)
//   0x25  command, write-only pulses: [0] release break, [1] clear cross
//         trigger latches and counter, [2] arm trace buffer, [3] clear
//         sticky error and overflow flags
//   0x26  overlay page select [0]; 0x27 page stride (bytes);
//   0x28  flash wait states [3:0]; 0x29 trace blocks of the emulation RAM
//   0x2A  trace buffer base word, 0x2B limit word, 0x2C post-trigger count
//   0x30  status (read-only): [1:0] halted cores, [6:2] break cause,
//         [8] armed, [9] wrapped, [10] triggered, [11] stopped,
//         [12] FIFO overflow, [13] overlay error, [14] trace error
//   0x31  trace write pointer (read-only), 0x32 time stamp (read-only)
//   0x33..0x36 system bus data comparator 0 lo, hi, 1 lo, hi; 0x37 bus
//         data value, 0x38 bus value mask, 0x39 bus control (bits as in a
//         core's control: [1] trace, [4],[5] comparators on, [6] qualify,
//         [7] comparator 1 needs data match)
//   0x40+2r  overlay range r: [31:10] flash base, [3:1] size, [0] enable
//   0x41+2r  overlay range r: emulation RAM byte offset
// The overlay page select is one register, so a single write swaps all
// ranges between the two pages at once. The map is this design's own.
module dbg_regs
  import mcds_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we_i,
  input  logic                     re_i,
  input  logic [6:0]               addr_i,     // word index
  input  logic [31:0]              wdata_i,
  output logic                     rvalid_o,
  output logic [31:0]              rdata_o,
  // status
  input  logic [31:0]              status_i,
  input  logic [31:0]              wptr_i,
  input  logic [TS_W-1:0]          ts_i,
  // configuration
  output unit_cfg_t [NCORE-1:0]    unit_o,
  output data_cfg_t                bus_o,
  output xtrig_cfg_t               xtrig_o,
  output brk_route_t [NBSRC-1:0]   route_o,
  output ovl_cfg_t                 ovl_o,
  output logic [NBLK-1:0]          trace_blk_o,
  output trc_cfg_t                 trc_o,
  // command pulses
  output logic                     release_o,
  output logic                     xclr_o,
  output logic                     arm_o,
  output logic                     flag_clr_o
);
  localparam int unsigned NREG = 128;
  localparam logic [6:0] A_CMD = 7'h25;

  logic [31:0] r [NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) r[i] <= '0;
      rvalid_o <= 1'b0;
      rdata_o  <= '0;
    end else begin
      if (we_i && addr_i != A_CMD) r[addr_i] <= wdata_i;
      rvalid_o <= re_i;
      if (re_i) begin
        case (addr_i)
          7'h30:   rdata_o <= status_i;
          7'h31:   rdata_o <= wptr_i;
          7'h32:   rdata_o <= 32'(ts_i);
          default: rdata_o <= r[addr_i];
        endcase
      end
    end
  end

  assign release_o  = we_i && addr_i == A_CMD && wdata_i[0];
  assign xclr_o     = we_i && addr_i == A_CMD && wdata_i[1];
  assign arm_o      = we_i && addr_i == A_CMD && wdata_i[2];
  assign flag_clr_o = we_i && addr_i == A_CMD && wdata_i[3];

  function automatic brk_route_t route(logic [31:0] v);
    brk_route_t x;
    x.halt = v[NCORE-1:0];
    x.susp = v[8 +: NSUSP];
    x.ext  = v[16 +: NEXT];
    return x;
  endfunction

  always_comb begin
    for (int c = 0; c < NCORE; c++) begin
      logic [31:0] ctl;
      ctl = r[16*c + 10];
      unit_o[c].gate               = ctl[8];
      unit_o[c].prog.trace_en      = ctl[0];
      unit_o[c].data.trace_en      = ctl[1];
      unit_o[c].data.qualify       = ctl[6];
      unit_o[c].data.val_en        = ctl[7];
      unit_o[c].data.value         = r[16*c + 8];
      unit_o[c].data.vmask         = r[16*c + 9];
      for (int k = 0; k < NCMP; k++) begin
        unit_o[c].prog.cmp[k].en = ctl[2 + k];
        unit_o[c].prog.cmp[k].lo = r[16*c + 2*k];
        unit_o[c].prog.cmp[k].hi = r[16*c + 2*k + 1];
        unit_o[c].data.cmp[k].en = ctl[4 + k];
        unit_o[c].data.cmp[k].lo = r[16*c + 4 + 2*k];
        unit_o[c].data.cmp[k].hi = r[16*c + 5 + 2*k];
      end
      xtrig_o.core[c].and_mask = r[16*c + 11][NXT:0];
      xtrig_o.core[c].or_mask  = r[16*c + 11][8 +: NXT+1];
      xtrig_o.core[c].latch    = r[16*c + 11][16];
      route_o[c]               = route(r[16*c + 12]);
    end
    xtrig_o.c_and_mask = r[7'h20][NCORE-1:0];
    xtrig_o.c_or_mask  = r[7'h20][8 +: NCORE];
    xtrig_o.and2or     = r[7'h20][16];
    xtrig_o.cnt2or     = r[7'h20][17];
    xtrig_o.cnt_limit  = r[7'h21][15:0];
    for (int s = 0; s < 1 + NEXT; s++)
      route_o[NCORE + s] = route(r['h22 + s]);
    ovl_o.page        = r[7'h26][0];
    ovl_o.page_stride = r[7'h27][EMEM_AW-1:0];
    ovl_o.ws          = r[7'h28][3:0];
    trace_blk_o       = r[7'h29][NBLK-1:0];
    trc_o.base        = r[7'h2A][EMEM_WAW-1:0];
    trc_o.limit       = r[7'h2B][EMEM_WAW-1:0];
    trc_o.post        = r[7'h2C][15:0];
    bus_o.trace_en    = r[7'h39][1];
    bus_o.qualify     = r[7'h39][6];
    bus_o.val_en      = r[7'h39][7];
    bus_o.value       = r[7'h37];
    bus_o.vmask       = r[7'h38];
    for (int k = 0; k < NCMP; k++) begin
      bus_o.cmp[k].en = r[7'h39][4 + k];
      bus_o.cmp[k].lo = r['h33 + 2*k];
      bus_o.cmp[k].hi = r['h34 + 2*k];
    end
    for (int g = 0; g < NRANGE; g++) begin
      ovl_o.rng[g].base = {r['h40 + 2*g][ADDR_W-1:10], 10'b0};
      ovl_o.rng[g].size = r['h40 + 2*g][3:1];
      ovl_o.rng[g].en   = r['h40 + 2*g][0];
      ovl_o.rng[g].offs = r['h41 + 2*g][EMEM_AW-1:0];
    end
  end
endmodule
