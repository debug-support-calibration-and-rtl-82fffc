// Trace and trigger unit for the system bus.
//
// It observes all masters' transfers on the multi-master bus through
// mcds_bus_adapt, passes them through the same data reconstruction as a
// core's data accesses (address comparators, data-value watchpoint,
// qualification range) and buffers the resulting MSG_RD / MSG_WR messages,
// which carry the bus master number, in a message FIFO. Its output joins
// the system message sorter like a core's trace unit, so bus transfers are
// ordered with the cores' program and data messages. There is no program
// reconstruction: a bus has no instruction flow.
// trig_o are the two data comparator lines, two cycles after the data
// phase. Tracing is on when cfg_i.trace_en is set. ovf_o is the sticky
// FIFO overflow. A transfer reaches the FIFO head three cycles after its
// data phase; for strict time order at the system sorter a data phase must
// therefore end within HOLD - 3 cycles of its address phase.
module mcds_bus_unit
  import mcds_pkg::*;
#(
  parameter logic [SRC_W-1:0] SRC_ID = SRC_W'(NCORE),
  parameter int unsigned      FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TS_W-1:0]   ts_i,
  input  data_cfg_t         cfg_i,
  input  logic              clr_i,
  input  logic              b_valid,
  input  logic              b_ready,
  input  logic [MST_W-1:0]  b_master,
  input  logic              b_write,
  input  logic [ADDR_W-1:0] b_addr,
  input  logic [DATA_W-1:0] b_wdata,
  input  logic [DATA_W-1:0] b_rdata,
  output logic [NCMP-1:0]   trig_o,
  output logic              msg_valid_o,
  input  logic              msg_ready_i,
  output trace_msg_t        msg_o,
  output logic              ovf_o
);
  data_obs_t  obs;
  logic       mv;
  trace_msg_t m;

  mcds_bus_adapt u_adapt (
    .clk, .rst_n, .ts_i, .b_valid, .b_ready, .b_master, .b_write, .b_addr,
    .b_wdata, .b_rdata, .data_o(obs)
  );

  mcds_data_recon #(.SRC_ID(SRC_ID)) u_data (
    .clk, .rst_n, .obs_i(obs), .cfg_i, .en_i(1'b1),
    .trig_o, .msg_valid_o(mv), .msg_o(m)
  );

  mcds_msg_fifo #(.T(trace_msg_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr_i, .wr_valid(mv), .wr_data(m),
    .rd_valid(msg_valid_o), .rd_ready(msg_ready_i), .rd_data(msg_o),
    .overflow(ovf_o)
  );
endmodule
