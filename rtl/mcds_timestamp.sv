// Time stamp counter of the trace subsystem.
//
// A free-running binary counter, incremented every clock cycle from zero
// after reset, that wraps at 2**TS_W. All trace units sample the same counter
// when an event is observed, which gives messages from different cores a
// common time base with single-cycle resolution; the message sorters order
// messages by this value. The cycle resolution follows the published
// architecture; the width and wrap-around are this design's choice (the
// sorters compare time stamps by their wrapped difference).
// Interface: ts_o is the count of clock edges since reset, registered.
module mcds_timestamp #(
  parameter int unsigned TS_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  output logic [TS_W-1:0] ts_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ts_o <= '0;
    else            ts_o <= ts_o + 1'b1;
  end
endmodule
