// Debug, calibration and emulation subsystem of a multi-core powertrain
// controller: multi-core trace and trigger, cross triggering, break and
// suspend switch, and the emulation RAM with its flash overlay and trace
// buffer, as carried by the development (emulation) version of the chip.
//
// Each of the NCORE cores has a trace and trigger unit (mcds_trace_unit)
// fed by its trace signals. All units stamp events with one cycle counter
// (mcds_timestamp). A further unit (mcds_bus_unit) traces the transfers of
// all masters on the multi-master system bus. A system message sorter
// merges the units' outputs in temporal order into the trace memory controller (trace_wr), which writes
// them into the trace blocks of the 512 KB emulation RAM (emem). The units'
// trigger lines and one trigger pin per core go to the cross trigger unit
// (mcds_xtrig), whose per-core Enable gates each core's trace and whose
// per-core and complex triggers feed the break and suspend switch
// (mcds_brk_switch) and stop the trace buffer. A core's flash reads go
// through the overlay sequencer (ovl_access), which redirects up to 16
// ranges into the overlay blocks of the same emulation RAM with flash
// timing. The debug host (JTAG debugger, or the extra debug core serving
// USB/XCP or CAN) uses one bus: byte address bit 20 = 1 selects the
// register file (dbg_regs, word index = address[8:2]), bit 20 = 0 the
// emulation RAM (word address = address[18:2]). Read data returns on
// host_rvalid_o one cycle after the accepted read (host_ready_o).
// The cores, the flash, the debug core and the host interfaces themselves
// are outside this block; their signals are ports.
module psi_debug_top
  import mcds_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned HOLD       = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // core trace signals
  input  logic [NCORE-1:0]                 pc_retire,
  input  logic [NCORE-1:0][ADDR_W-1:0]     pc,
  input  logic [NCORE-1:0][2:0]            pc_len,
  input  logic [NCORE-1:0]                 d_rd,
  input  logic [NCORE-1:0]                 d_wr,
  input  logic [NCORE-1:0][ADDR_W-1:0]     d_addr,
  input  logic [NCORE-1:0][DATA_W-1:0]     d_wdata,
  input  logic [NCORE-1:0]                 d_rvalid,
  input  logic [NCORE-1:0][DATA_W-1:0]     d_rdata,
  input  logic [NCORE-1:0]                 trig_pin_i,
  // system bus observation (all masters)
  input  logic                             bus_valid,
  input  logic                             bus_ready,
  input  logic [MST_W-1:0]                 bus_master,
  input  logic                             bus_write,
  input  logic [ADDR_W-1:0]                bus_addr,
  input  logic [DATA_W-1:0]                bus_wdata,
  input  logic [DATA_W-1:0]                bus_rdata,
  // break and suspend
  input  logic [NEXT-1:0]                  ext_trig_i,
  output logic [NEXT-1:0]                  ext_trig_o,
  output logic [NCORE-1:0]                 halt_o,
  output logic [NSUSP-1:0]                 susp_o,
  output logic                             ctrig_o,
  // flash read path (core side)
  input  logic                             fetch_req_i,
  input  logic [ADDR_W-1:0]                fetch_addr_i,
  output logic                             fetch_ready_o,
  output logic                             fetch_rvalid_o,
  output logic [DATA_W-1:0]                fetch_rdata_o,
  // flash read path (flash side)
  output logic                             flash_req_o,
  output logic [ADDR_W-1:0]                flash_addr_o,
  input  logic                             flash_rvalid_i,
  input  logic [DATA_W-1:0]                flash_rdata_i,
  // debug host bus
  input  logic                             host_req_i,
  input  logic                             host_we_i,
  input  logic [31:0]                      host_addr_i,
  input  logic [31:0]                      host_wdata_i,
  output logic                             host_ready_o,
  output logic                             host_rvalid_o,
  output logic [31:0]                      host_rdata_o
);
  logic [TS_W-1:0]            ts;
  unit_cfg_t [NCORE-1:0]      ucfg;
  data_cfg_t                  bcfg;
  xtrig_cfg_t                 xcfg;
  brk_route_t [NBSRC-1:0]     route;
  ovl_cfg_t                   ocfg;
  trc_cfg_t                   tcfg;
  logic [NBLK-1:0]            trace_blk;
  logic                       brk_release, xclr, arm, flag_clr;

  logic [NCORE-1:0][2*NCMP-1:0] utrig;
  logic [NCORE-1:0]           u_hold;
  logic [NTSRC-1:0]           u_valid, u_ready, u_ovf;
  trace_msg_t [NTSRC-1:0]     u_msg;
  logic [NCORE-1:0][NXT-1:0]  xin;
  logic [NCORE-1:0]           core_trig, enable;
  logic                       cnt_hit;
  logic [NBSRC-1:0]           cause;

  logic                       s_valid, s_ready, s_hold;
  trace_msg_t                 s_msg;
  logic                       t_we;
  logic [EMEM_WAW-1:0]        t_addr, t_wptr;
  logic [DATA_W-1:0]          t_wdata;
  logic                       t_armed, t_wrapped, t_trig, t_stopped;

  logic                       o_req;
  logic [EMEM_WAW-1:0]        o_addr;
  logic [DATA_W-1:0]          o_rdata;
  logic                       ovl_err, trc_err;

  logic                       sel_reg, reg_we, reg_re, m_req, m_ready, m_rvalid, r_rvalid;
  logic [31:0]                m_rdata, r_rdata, status;

  mcds_timestamp #(.TS_W(TS_W)) u_ts (.clk, .rst_n, .ts_o(ts));

  for (genvar c = 0; c < NCORE; c++) begin : g_core
    mcds_trace_unit #(
      .SRC_ID(SRC_W'(c)), .FIFO_DEPTH(FIFO_DEPTH), .HOLD(HOLD)
    ) u_unit (
      .clk, .rst_n, .ts_i(ts), .cfg_i(ucfg[c]), .trace_en_i(enable[c]), .clr_i(flag_clr),
      .pc_retire(pc_retire[c]), .pc(pc[c]), .pc_len(pc_len[c]),
      .d_rd(d_rd[c]), .d_wr(d_wr[c]), .d_addr(d_addr[c]), .d_wdata(d_wdata[c]),
      .d_rvalid(d_rvalid[c]), .d_rdata(d_rdata[c]),
      .trig_o(utrig[c]), .msg_valid_o(u_valid[c]), .msg_ready_i(u_ready[c]),
      .msg_o(u_msg[c]), .ovf_o(u_ovf[c]), .hold_o(u_hold[c])
    );
    assign xin[c] = {trig_pin_i[c], utrig[c]};
  end

  mcds_bus_unit #(.SRC_ID(SRC_W'(NCORE)), .FIFO_DEPTH(FIFO_DEPTH)) u_bus (
    .clk, .rst_n, .ts_i(ts), .cfg_i(bcfg), .clr_i(flag_clr),
    .b_valid(bus_valid), .b_ready(bus_ready), .b_master(bus_master),
    .b_write(bus_write), .b_addr(bus_addr), .b_wdata(bus_wdata), .b_rdata(bus_rdata),
    .trig_o(), .msg_valid_o(u_valid[NCORE]), .msg_ready_i(u_ready[NCORE]),
    .msg_o(u_msg[NCORE]), .ovf_o(u_ovf[NCORE])
  );

  mcds_msg_sorter #(.N(NTSRC), .HOLD(HOLD)) u_sys_sort (
    .clk, .rst_n, .now_i(ts),
    .in_valid(u_valid), .in_ready(u_ready), .in_msg(u_msg),
    .out_valid(s_valid), .out_ready(s_ready), .out_msg(s_msg), .hold_o(s_hold)
  );

  mcds_xtrig u_xtrig (
    .clk, .rst_n, .clr_i(xclr), .cfg_i(xcfg), .trig_i(xin),
    .core_trig_o(core_trig), .enable_o(enable), .ctrig_o, .cnt_hit_o(cnt_hit)
  );

  mcds_brk_switch u_brk (
    .clk, .rst_n, .route_i(route), .core_brk_i(core_trig), .ctrig_i(ctrig_o),
    .ext_i(ext_trig_i), .release_i(brk_release),
    .halt_o, .susp_o, .ext_o(ext_trig_o), .cause_o(cause)
  );

  trace_wr u_trc (
    .clk, .rst_n, .cfg_i(tcfg), .arm_i(arm), .trig_i(ctrig_o),
    .msg_valid_i(s_valid), .msg_ready_o(s_ready), .msg_i(s_msg),
    .we_o(t_we), .waddr_o(t_addr), .wdata_o(t_wdata), .wptr_o(t_wptr),
    .armed_o(t_armed), .wrapped_o(t_wrapped), .triggered_o(t_trig), .stopped_o(t_stopped)
  );

  ovl_access u_ovl (
    .clk, .rst_n, .cfg_i(ocfg),
    .req_i(fetch_req_i), .addr_i(fetch_addr_i), .ready_o(fetch_ready_o),
    .rvalid_o(fetch_rvalid_o), .rdata_o(fetch_rdata_o), .hit_o(),
    .flash_req_o, .flash_addr_o, .flash_rvalid_i, .flash_rdata_i,
    .emem_req_o(o_req), .emem_addr_o(o_addr), .emem_rdata_i(o_rdata)
  );

  // host bus decode
  assign sel_reg = host_addr_i[20];
  assign reg_we  = host_req_i && sel_reg && host_we_i;
  assign reg_re  = host_req_i && sel_reg && !host_we_i;
  assign m_req   = host_req_i && !sel_reg;

  emem u_emem (
    .clk, .rst_n, .blk_is_trace_i(trace_blk), .clr_i(flag_clr),
    .ovl_req_i(o_req), .ovl_addr_i(o_addr), .ovl_rdata_o(o_rdata), .ovl_err_o(ovl_err),
    .trc_we_i(t_we), .trc_addr_i(t_addr), .trc_wdata_i(t_wdata), .trc_err_o(trc_err),
    .host_req_i(m_req), .host_we_i, .host_addr_i(host_addr_i[EMEM_AW-1:2]),
    .host_wdata_i, .host_ready_o(m_ready), .host_rvalid_o(m_rvalid), .host_rdata_o(m_rdata)
  );

  assign status = 32'({trc_err, ovl_err, |u_ovf, t_stopped, t_trig, t_wrapped, t_armed,
                       1'b0, cause, halt_o});

  dbg_regs u_regs (
    .clk, .rst_n, .we_i(reg_we), .re_i(reg_re), .addr_i(host_addr_i[8:2]),
    .wdata_i(host_wdata_i), .rvalid_o(r_rvalid), .rdata_o(r_rdata),
    .status_i(status), .wptr_i(32'(t_wptr)), .ts_i(ts),
    .unit_o(ucfg), .bus_o(bcfg), .xtrig_o(xcfg), .route_o(route), .ovl_o(ocfg),
    .trace_blk_o(trace_blk), .trc_o(tcfg),
    .release_o(brk_release), .xclr_o(xclr), .arm_o(arm), .flag_clr_o(flag_clr)
  );

  assign host_ready_o  = sel_reg ? host_req_i : m_ready;
  assign host_rvalid_o = r_rvalid || m_rvalid;
  assign host_rdata_o  = r_rvalid ? r_rdata : m_rdata;
endmodule
