// Adaptation logic of one trace unit: core-specific signals in, generic
// time-stamped observations out.
//
// Program side: every retired instruction (pc_retire) becomes a prog_obs_t
// carrying its address, its length in bytes and the cycle it retired in.
// Data side: the core's data bus is split into an address phase (d_rd or
// d_wr with d_addr) and, for reads, a later data phase (d_rvalid with
// d_rdata). Writes are complete in their address phase. A read's address and
// time stamp are held until its data phase arrives and are then emitted
// together with the read data, so the data reconstruction sees one record
// per access. One read may be outstanding and the bus completes accesses in
// order (no write while a read waits for its data); the bus protocol is this design's
// model of a generic 32-bit core. In the published architecture only this
// block differs between core types.
// Timing: both outputs are registered, one cycle after the retiring
// instruction, the write address phase or the read data phase. The time
// stamp is that of the retire, write or read address phase.
module mcds_adapt
  import mcds_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TS_W-1:0]   ts_i,
  // core program trace
  input  logic              pc_retire,
  input  logic [ADDR_W-1:0] pc,
  input  logic [2:0]        pc_len,
  // core data bus
  input  logic              d_rd,
  input  logic              d_wr,
  input  logic [ADDR_W-1:0] d_addr,
  input  logic [DATA_W-1:0] d_wdata,
  input  logic              d_rvalid,
  input  logic [DATA_W-1:0] d_rdata,
  // generic observations
  output prog_obs_t         prog_o,
  output data_obs_t         data_o
);
  logic              rd_pend;
  logic [ADDR_W-1:0] rd_addr;
  logic [TS_W-1:0]   rd_ts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog_o  <= '0;
      data_o  <= '0;
      rd_pend <= 1'b0;
      rd_addr <= '0;
      rd_ts   <= '0;
    end else begin
      prog_o.valid <= pc_retire;
      prog_o.pc    <= pc;
      prog_o.len   <= pc_len;
      prog_o.ts    <= ts_i;

      if (d_rd) begin
        rd_pend <= 1'b1;
        rd_addr <= d_addr;
        rd_ts   <= ts_i;
      end else if (d_rvalid) begin
        rd_pend <= 1'b0;
      end

      data_o.valid <= 1'b0;
      if (d_rvalid && rd_pend) begin
        data_o.valid <= 1'b1;
        data_o.write <= 1'b0;
        data_o.mst   <= '0;
        data_o.addr  <= rd_addr;
        data_o.data  <= d_rdata;
        data_o.ts    <= rd_ts;
      end else if (d_wr) begin
        data_o.valid <= 1'b1;
        data_o.write <= 1'b1;
        data_o.mst   <= '0;
        data_o.addr  <= d_addr;
        data_o.data  <= d_wdata;
        data_o.ts    <= ts_i;
      end
    end
  end

  // Bus rules of the core model: reads and writes complete in order, so no
  // write address phase while a read waits for its data, and no read or
  // write phase in the same cycle as a write.
  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
                               !(d_wr && rd_pend));
  a_one_cmd:  assert property (@(posedge clk) disable iff (!rst_n)
                               !(d_wr && d_rd));
endmodule
