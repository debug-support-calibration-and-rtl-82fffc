// Multiple-core cross trigger unit.
//
// Per core (left and right blocks of the published figure) the trigger
// lines trig_i[c] of that core's trace unit and trigger pin, plus the
// fed-back complex trigger, enter a programmable AND term; an OR combines
// the AND term with any single lines selected by or_mask. The OR result is
// core_trig_o[c] and drives the core's Enable (enable_o[c]), which gates the
// core's trace; with cfg.latch set Enable stays on from the first firing
// until clr_i. In the centre the cores' OR results enter a central AND and a
// Counter that counts the cycles in which that AND is true and fires once
// each time it reaches cnt_limit (then restarts at zero). A central OR
// collects the selected core results, the AND and the Counter into the
// complex trigger ctrig_o, used for instance to break all cores. Gate kinds
// (AND, OR, Counter) and their order follow the published figure; making
// every input selectable by masks is this design's way of letting the
// developer decide what a trigger does. An AND term with an empty mask is
// false.
// Timing: core_trig_o and enable_o are combinational from trig_i;
// ctrig_o is registered (one cycle after the core results), and the same
// registered value is fed back, so there is no combinational loop.
module mcds_xtrig
  import mcds_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr_i,
  input  xtrig_cfg_t                 cfg_i,
  input  logic [NCORE-1:0][NXT-1:0]  trig_i,
  output logic [NCORE-1:0]           core_trig_o,
  output logic [NCORE-1:0]           enable_o,
  output logic                       ctrig_o,
  output logic                       cnt_hit_o
);
  logic [NCORE-1:0] latched;
  logic             c_and;
  logic             c_or;
  logic [15:0]      cnt;

  function automatic logic and_term(logic [NXT:0] v, logic [NXT:0] m);
    return (m != '0) && ((v | ~m) == '1);
  endfunction

  always_comb begin
    for (int c = 0; c < NCORE; c++) begin
      logic [NXT:0] v;
      v = {ctrig_o, trig_i[c]};
      core_trig_o[c] = and_term(v, cfg_i.core[c].and_mask) ||
                       ((v & cfg_i.core[c].or_mask) != '0);
      enable_o[c]    = core_trig_o[c] || (cfg_i.core[c].latch && latched[c]);
    end
    c_and     = (cfg_i.c_and_mask != '0) &&
                ((core_trig_o | ~cfg_i.c_and_mask) == '1);
    cnt_hit_o = c_and && (cfg_i.cnt_limit != '0) && (cnt + 1'b1 == cfg_i.cnt_limit);
    c_or      = ((core_trig_o & cfg_i.c_or_mask) != '0) ||
                (cfg_i.and2or && c_and) || (cfg_i.cnt2or && cnt_hit_o);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      latched <= '0;
      cnt     <= '0;
      ctrig_o <= 1'b0;
    end else begin
      ctrig_o <= c_or;
      if (clr_i) begin
        latched <= '0;
        cnt     <= '0;
      end else begin
        latched <= latched | core_trig_o;
        if (cnt_hit_o)  cnt <= '0;
        else if (c_and) cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
