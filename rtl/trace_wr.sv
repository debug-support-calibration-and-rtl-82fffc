// Trace memory controller: stores the merged message stream in a circular
// buffer in the trace blocks of the emulation RAM.
//
// Each message is written as four consecutive 32-bit words:
//   word 0  header {kind[31:30], src[29:28], bus master[27:24],
//           sequence number[23:0]}
//   word 1  time stamp
//   word 2  address (branch target or data address)
//   word 3  data (sequential instruction count or data value)
// The header word is written in the cycle the message is accepted and the
// other three in the next three cycles, so the buffer takes one message
// every four cycles; bursts wait in the message FIFOs. Words go from
// cfg.base up to cfg.limit-1 and then wrap to cfg.base (wrapped_o is set),
// so the buffer always holds the newest messages; the region should be a
// multiple of four words. arm_i (a pulse) restarts the buffer. After the
// first cycle with trig_i, cfg.post more messages are stored and then
// recording stops (stopped_o), keeping the history around the trigger.
// While not armed or stopped, messages are accepted and discarded so the
// sources never overflow because of the buffer. The use of the emulation
// RAM as trace memory follows the published implementation; the message
// layout and stop rule are this design's.
module trace_wr
  import mcds_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  trc_cfg_t             cfg_i,
  input  logic                 arm_i,
  input  logic                 trig_i,
  input  logic                 msg_valid_i,
  output logic                 msg_ready_o,
  input  trace_msg_t           msg_i,
  output logic                 we_o,
  output logic [EMEM_WAW-1:0]  waddr_o,
  output logic [DATA_W-1:0]    wdata_o,
  output logic [EMEM_WAW-1:0]  wptr_o,
  output logic                 armed_o,
  output logic                 wrapped_o,
  output logic                 triggered_o,
  output logic                 stopped_o
);
  logic [1:0]          beat;      // 0: free, 1..3: words still to write
  trace_msg_t          cur;
  logic [23:0]         seq;
  logic [15:0]         remain;
  logic                recording;
  logic                accept;

  assign recording   = armed_o && !stopped_o;
  assign msg_ready_o = (beat == 2'd0);
  assign accept      = msg_valid_i && msg_ready_o && recording;

  always_comb begin
    we_o    = 1'b0;
    wdata_o = '0;
    waddr_o = wptr_o;
    if (accept) begin
      we_o    = 1'b1;
      wdata_o = {msg_i.kind, msg_i.src, msg_i.mst, seq};
    end else if (beat != 2'd0) begin
      we_o = 1'b1;
      case (beat)
        2'd1:    wdata_o = cur.ts;
        2'd2:    wdata_o = cur.addr;
        default: wdata_o = cur.data;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat        <= '0;
      cur         <= '0;
      seq         <= '0;
      remain      <= '0;
      wptr_o      <= '0;
      armed_o     <= 1'b0;
      wrapped_o   <= 1'b0;
      triggered_o <= 1'b0;
      stopped_o   <= 1'b0;
    end else if (arm_i) begin
      beat        <= '0;
      seq         <= '0;
      wptr_o      <= cfg_i.base;
      armed_o     <= 1'b1;
      wrapped_o   <= 1'b0;
      triggered_o <= 1'b0;
      stopped_o   <= 1'b0;
    end else begin
      if (we_o) begin
        if (wptr_o + 1'b1 >= cfg_i.limit) begin
          wptr_o    <= cfg_i.base;
          wrapped_o <= 1'b1;
        end else begin
          wptr_o <= wptr_o + 1'b1;
        end
      end
      if (accept) begin
        cur  <= msg_i;
        seq  <= seq + 1'b1;
        beat <= 2'd1;
      end else if (beat != 2'd0) begin
        beat <= (beat == 2'd3) ? 2'd0 : beat + 1'b1;
      end
      // trigger and post-trigger count
      if (recording && trig_i && !triggered_o) begin
        triggered_o <= 1'b1;
        remain      <= cfg_i.post;
        if (cfg_i.post == '0) stopped_o <= 1'b1;
      end else if (triggered_o && accept) begin
        remain <= remain - 1'b1;
        if (remain == 16'd1) stopped_o <= 1'b1;
      end
    end
  end
endmodule
