// Data reconstruction: data-access message generation, qualification and
// data trigger extraction for one core.
//
// Every observed access is checked against NCMP inclusive address range
// comparators. Comparator 1 can in addition require the accessed value to
// match cfg_i.value in the bits set in cfg_i.vmask (a data watchpoint).
// trig_o[k] reports a hit of comparator k. When tracing is on (trace_en and
// the cross-trigger Enable), an access produces a MSG_RD or MSG_WR message
// with its address, data and time stamp; if cfg_i.qualify is set only
// accesses inside comparator 0's range are traced, which filters the trace
// down to the variables of interest (for instance shared variables of two
// cores). The stage and its purpose follow the published architecture; the
// comparator set is this design's choice.
// Timing: msg_valid_o and trig_o are registered, one cycle after obs_i.
module mcds_data_recon
  import mcds_pkg::*;
#(
  parameter logic [SRC_W-1:0] SRC_ID = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  data_obs_t        obs_i,
  input  data_cfg_t        cfg_i,
  input  logic             en_i,
  output logic [NCMP-1:0]  trig_o,
  output logic             msg_valid_o,
  output trace_msg_t       msg_o
);
  logic [NCMP-1:0] hit;
  logic            val_ok;
  logic            take;

  always_comb begin
    val_ok = ((obs_i.data ^ cfg_i.value) & cfg_i.vmask) == '0;
    for (int k = 0; k < NCMP; k++)
      hit[k] = obs_i.valid && in_range(cfg_i.cmp[k], obs_i.addr);
    if (cfg_i.val_en) hit[1] = hit[1] && val_ok;
    take = obs_i.valid && cfg_i.trace_en && en_i && (!cfg_i.qualify || hit[0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_o      <= '0;
      msg_valid_o <= 1'b0;
      msg_o       <= '0;
    end else begin
      trig_o      <= hit;
      msg_valid_o <= take;
      if (take) begin
        msg_o.ts   <= obs_i.ts;
        msg_o.src  <= SRC_ID;
        msg_o.kind <= obs_i.write ? MSG_WR : MSG_RD;
        msg_o.mst  <= obs_i.mst;
        msg_o.addr <= obs_i.addr;
        msg_o.data <= obs_i.data;
      end
    end
  end
endmodule
