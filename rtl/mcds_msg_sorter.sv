// Message sorter: merges N trace message streams into one stream in
// time-stamp order.
//
// Among the inputs that hold a message the one with the oldest time stamp is
// the candidate (time stamps are compared by their wrapped difference; equal
// stamps go to the lowest input). Because messages reach the sorter a few
// cycles after they were stamped, an input that is empty now may still
// receive an older message. The candidate is therefore only released when
// every input holds a message, or when it is at least HOLD cycles old:
// HOLD must be at least the largest delay from stamping to arrival at an
// input, and then no older message can appear later and the output is in
// temporal order. hold_o shows a cycle in which a message waited for this
// reason. The published architecture places a sorter below the two message
// FIFOs of each trace unit and one below the units of all cores, with the
// goal of correct temporal order; the release rule is this design's.
// Interface: valid/ready handshakes; in_ready[i] is 1 only for the input
// whose message is taken. Timing: combinational from inputs to outputs.
module mcds_msg_sorter
  import mcds_pkg::*;
#(
  parameter int unsigned N    = 2,
  parameter int unsigned HOLD = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [TS_W-1:0]      now_i,
  input  logic [N-1:0]         in_valid,
  output logic [N-1:0]         in_ready,
  input  trace_msg_t [N-1:0]   in_msg,
  output logic                 out_valid,
  input  logic                 out_ready,
  output trace_msg_t           out_msg,
  output logic                 hold_o
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0]   sel;
  logic            any;
  logic            release_ok;
  logic [TS_W-1:0] age;

  // a is older than b
  function automatic logic older(logic [TS_W-1:0] a, logic [TS_W-1:0] b);
    logic [TS_W-1:0] d;
    d = a - b;
    return d[TS_W-1];
  endfunction

  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && (!any || older(in_msg[i].ts, in_msg[sel].ts))) begin
        sel = IW'(i);
        any = 1'b1;
      end
    end
    age        = now_i - in_msg[sel].ts;
    release_ok = any && ((&in_valid) || (age >= TS_W'(HOLD)));
    out_valid  = release_ok;
    out_msg    = in_msg[sel];
    hold_o     = any && !release_ok;
  end

  // Kept apart from the selection so that out_ready never feeds out_valid.
  always_comb begin
    in_ready      = '0;
    in_ready[sel] = release_ok && out_ready;
  end

  // Output stream must never go back in time while this sorter runs.
  logic            last_ok;
  logic [TS_W-1:0] last_ts;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_ok <= 1'b0;
      last_ts <= '0;
    end else if (out_valid && out_ready) begin
      last_ok <= 1'b1;
      last_ts <= out_msg.ts;
    end
  end
  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
                               (out_valid && out_ready && last_ok) |-> !older(out_msg.ts, last_ts));
endmodule
