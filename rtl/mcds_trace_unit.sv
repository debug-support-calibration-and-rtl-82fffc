// Trace and trigger unit placed at one processor core.
//
// The unit follows the published block diagram: adaptation logic turns the
// core's signals into program and data observations; program reconstruction
// and data reconstruction each generate messages into their own message
// FIFO and extract trigger lines; a message sorter merges the two FIFOs into
// one time-ordered stream for the system sorter. Tracing is qualified by
// cfg_i.prog.trace_en / cfg_i.data.trace_en and, when cfg_i.gate is set, by
// the Enable the cross trigger unit returns for this core (trace_en_i).
// trig_o = {data cmp1, data cmp0, prog cmp1, prog cmp0}, one cycle pulses
// two cycles after the core event (adaptation and extraction registers).
// ovf_o is the sticky overflow of either message FIFO, cleared by clr_i.
// Latency from a core event to the head of a FIFO is three cycles; reads
// add the wait for their data phase. The unit's sorter uses HOLD cycles of
// hold-off, which must cover that latency.
module mcds_trace_unit
  import mcds_pkg::*;
#(
  parameter logic [SRC_W-1:0] SRC_ID = '0,
  parameter int unsigned      FIFO_DEPTH = 8,
  parameter int unsigned      HOLD = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TS_W-1:0]   ts_i,
  input  unit_cfg_t         cfg_i,
  input  logic              trace_en_i,
  input  logic              clr_i,
  // core signals
  input  logic              pc_retire,
  input  logic [ADDR_W-1:0] pc,
  input  logic [2:0]        pc_len,
  input  logic              d_rd,
  input  logic              d_wr,
  input  logic [ADDR_W-1:0] d_addr,
  input  logic [DATA_W-1:0] d_wdata,
  input  logic              d_rvalid,
  input  logic [DATA_W-1:0] d_rdata,
  // outputs
  output logic [2*NCMP-1:0] trig_o,
  output logic              msg_valid_o,
  input  logic              msg_ready_i,
  output trace_msg_t        msg_o,
  output logic              ovf_o,
  output logic              hold_o
);
  prog_obs_t  pobs;
  data_obs_t  dobs;
  logic       en;
  logic       pm_v, dm_v;
  trace_msg_t pm, dm;
  logic [1:0] f_valid, f_ready, f_ovf;
  trace_msg_t [1:0] f_msg;

  assign en = !cfg_i.gate || trace_en_i;

  mcds_adapt u_adapt (
    .clk, .rst_n, .ts_i,
    .pc_retire, .pc, .pc_len,
    .d_rd, .d_wr, .d_addr, .d_wdata, .d_rvalid, .d_rdata,
    .prog_o(pobs), .data_o(dobs)
  );

  mcds_prog_recon #(.SRC_ID(SRC_ID)) u_prog (
    .clk, .rst_n, .obs_i(pobs), .cfg_i(cfg_i.prog), .en_i(en),
    .trig_o(trig_o[NCMP-1:0]), .msg_valid_o(pm_v), .msg_o(pm)
  );

  mcds_data_recon #(.SRC_ID(SRC_ID)) u_data (
    .clk, .rst_n, .obs_i(dobs), .cfg_i(cfg_i.data), .en_i(en),
    .trig_o(trig_o[2*NCMP-1:NCMP]), .msg_valid_o(dm_v), .msg_o(dm)
  );

  mcds_msg_fifo #(.T(trace_msg_t), .DEPTH(FIFO_DEPTH)) u_pfifo (
    .clk, .rst_n, .clr_i, .wr_valid(pm_v), .wr_data(pm),
    .rd_valid(f_valid[0]), .rd_ready(f_ready[0]), .rd_data(f_msg[0]),
    .overflow(f_ovf[0])
  );

  mcds_msg_fifo #(.T(trace_msg_t), .DEPTH(FIFO_DEPTH)) u_dfifo (
    .clk, .rst_n, .clr_i, .wr_valid(dm_v), .wr_data(dm),
    .rd_valid(f_valid[1]), .rd_ready(f_ready[1]), .rd_data(f_msg[1]),
    .overflow(f_ovf[1])
  );

  mcds_msg_sorter #(.N(2), .HOLD(HOLD)) u_sort (
    .clk, .rst_n, .now_i(ts_i),
    .in_valid(f_valid), .in_ready(f_ready), .in_msg(f_msg),
    .out_valid(msg_valid_o), .out_ready(msg_ready_i), .out_msg(msg_o),
    .hold_o
  );

  assign ovf_o = |f_ovf;
endmodule
