// Program reconstruction: program-flow message generation and PC trigger
// extraction for one core.
//
// Message generation compresses the retired-instruction stream. The address
// the next instruction would have if execution ran on sequentially (previous
// PC plus its length) is kept; a retired instruction at any other address
// is a discontinuity (taken branch, call, return, interrupt) and produces a
// MSG_PROG message whose addr is the new PC and whose data is the number of
// instructions retired sequentially since the previous message. The first
// instruction after tracing is switched on always produces a message, so the
// decoder has a starting point. Sequential code thus costs no trace
// bandwidth; only the branch targets are recorded. The published
// architecture names this stage; the branch-trace format is this design's.
// Trigger extraction: NCMP inclusive PC range comparators; trig_o[k] is
// asserted in the cycle a retiring PC hits comparator k, whether or not
// tracing is on.
// Timing: msg_valid_o and trig_o are registered, one cycle after obs_i.
module mcds_prog_recon
  import mcds_pkg::*;
#(
  parameter logic [SRC_W-1:0] SRC_ID = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  prog_obs_t        obs_i,
  input  prog_cfg_t        cfg_i,
  input  logic             en_i,        // trace qualification (cross trigger)
  output logic [NCMP-1:0]  trig_o,
  output logic             msg_valid_o,
  output trace_msg_t       msg_o
);
  logic [ADDR_W-1:0] next_pc;
  logic              synced;            // next_pc is meaningful
  logic [DATA_W-1:0] seq_cnt;
  logic              tracing;
  logic              discont;

  assign tracing = cfg_i.trace_en && en_i;
  assign discont = !synced || (obs_i.pc != next_pc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_pc     <= '0;
      synced      <= 1'b0;
      seq_cnt     <= '0;
      msg_valid_o <= 1'b0;
      msg_o       <= '0;
      trig_o      <= '0;
    end else begin
      msg_valid_o <= 1'b0;
      for (int k = 0; k < NCMP; k++)
        trig_o[k] <= obs_i.valid && in_range(cfg_i.cmp[k], obs_i.pc);
      if (!tracing) begin
        synced  <= 1'b0;
        seq_cnt <= '0;
      end else if (obs_i.valid) begin
        next_pc <= obs_i.pc + ADDR_W'(obs_i.len);
        synced  <= 1'b1;
        if (discont) begin
          msg_valid_o <= 1'b1;
          msg_o.ts    <= obs_i.ts;
          msg_o.src   <= SRC_ID;
          msg_o.kind  <= MSG_PROG;
          msg_o.mst   <= '0;
          msg_o.addr  <= obs_i.pc;
          msg_o.data  <= seq_cnt;
          seq_cnt     <= DATA_W'(1);
        end else begin
          seq_cnt     <= seq_cnt + 1'b1;
        end
      end
    end
  end
endmodule
