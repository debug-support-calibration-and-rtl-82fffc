// Adaptation logic for tracing an on-chip multi-master system bus.
//
// The bus is modelled as a pipelined bus with an address phase and a data
// phase, both advanced by the shared ready signal (as in common on-chip
// buses): an address phase (b_valid with master number, direction and
// address) is taken in a cycle with b_ready; its data phase is the next
// cycle with b_ready, where b_wdata or b_rdata carries the data. A new
// address phase may be taken in the same cycle as the previous data phase
// completes. The adaptation pairs each data phase with its address phase
// and emits one generic data observation per completed transfer, carrying
// the master number and the cycle stamp of the address phase, so that bus
// activity enters the same data reconstruction and time-ordered trace as
// the cores' accesses. Tracing buses independently of the cores follows
// the published architecture; the bus protocol is this design's model.
// Timing: data_o is registered, one cycle after the completing data phase.
module mcds_bus_adapt
  import mcds_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TS_W-1:0]   ts_i,
  input  logic              b_valid,
  input  logic              b_ready,
  input  logic [MST_W-1:0]  b_master,
  input  logic              b_write,
  input  logic [ADDR_W-1:0] b_addr,
  input  logic [DATA_W-1:0] b_wdata,
  input  logic [DATA_W-1:0] b_rdata,
  output data_obs_t         data_o
);
  logic              dp_pend;
  logic [MST_W-1:0]  dp_mst;
  logic              dp_write;
  logic [ADDR_W-1:0] dp_addr;
  logic [TS_W-1:0]   dp_ts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dp_pend  <= 1'b0;
      dp_mst   <= '0;
      dp_write <= 1'b0;
      dp_addr  <= '0;
      dp_ts    <= '0;
      data_o   <= '0;
    end else begin
      data_o.valid <= 1'b0;
      if (b_ready) begin
        if (dp_pend) begin
          data_o.valid <= 1'b1;
          data_o.write <= dp_write;
          data_o.mst   <= dp_mst;
          data_o.addr  <= dp_addr;
          data_o.data  <= dp_write ? b_wdata : b_rdata;
          data_o.ts    <= dp_ts;
        end
        dp_pend <= b_valid;
        if (b_valid) begin
          dp_mst   <= b_master;
          dp_write <= b_write;
          dp_addr  <= b_addr;
          dp_ts    <= ts_i;
        end
      end
    end
  end
endmodule
