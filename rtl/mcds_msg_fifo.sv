// Message FIFO between message generation and the message sorter.
//
// A synchronous first-in first-out buffer of DEPTH entries of any type T
// (trace messages in this design). wr_valid pushes wr_data; there is no
// back-pressure towards message generation, because the core being observed
// cannot be stalled. A push into a full FIFO (unless an entry leaves in the
// same cycle) is dropped and sets the sticky overflow flag, which stays set
// until clr_i, so lost trace is always reported. The read side is a
// valid/ready handshake: rd_data is the oldest entry while rd_valid is 1 and
// leaves on a cycle with rd_valid and rd_ready both 1.
// The FIFO itself follows the published block diagram; depth, drop policy
// and overflow flag are this design's choices.
// Timing: a pushed entry is visible on rd_data the cycle after the push.
module mcds_msg_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr_i,
  input  logic wr_valid,
  input  T     wr_data,
  output logic rd_valid,
  input  logic rd_ready,
  output T     rd_data,
  output logic overflow
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T                mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic [CW-1:0]   count;
  logic            push, pop;

  assign rd_valid = (count != '0);
  assign rd_data  = mem[rptr];
  assign pop      = rd_valid && rd_ready;
  assign push     = wr_valid && ((count != CW'(DEPTH)) || pop);

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      count <= count + CW'(push) - CW'(pop);
      if (clr_i)                 overflow <= 1'b0;
      else if (wr_valid && !push) overflow <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wr_data;
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(count == '0 && pop));
endmodule
