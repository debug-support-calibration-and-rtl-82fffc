// Multi-core break and suspend switch.
//
// Break sources are, in this order, the per-core trigger results of the
// cross trigger unit (on-chip), the complex trigger, and the external
// trigger pins. For every source a route register (brk_route_t) selects the
// cores it halts, the suspend lines it raises (peripherals such as timers
// that must stop with the cores) and the external trigger outputs it
// drives. All targets reached by the sources active in one cycle are set at
// the same clock edge, so synchronized cores stop in the same cycle with no
// slippage between them, and they stay set until release_i. cause_o records
// which sources fired since the last release. That the switch is
// reconfigurable, serves on-chip and external triggers and halts cores
// without slippage follows the published description; the route registers,
// the hold-until-release rule and the single register stage are this
// design's choice.
// Timing: targets are registered, one cycle after the source.
module mcds_brk_switch
  import mcds_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  brk_route_t [NBSRC-1:0]  route_i,
  input  logic [NCORE-1:0]        core_brk_i,
  input  logic                    ctrig_i,
  input  logic [NEXT-1:0]         ext_i,
  input  logic                    release_i,
  output logic [NCORE-1:0]        halt_o,
  output logic [NSUSP-1:0]        susp_o,
  output logic [NEXT-1:0]         ext_o,
  output logic [NBSRC-1:0]        cause_o
);
  logic [NBSRC-1:0] src;
  brk_route_t       hit;

  always_comb begin
    src = {ext_i, ctrig_i, core_brk_i};
    hit = '0;
    for (int s = 0; s < NBSRC; s++)
      if (src[s]) hit = hit | route_i[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      halt_o  <= '0;
      susp_o  <= '0;
      ext_o   <= '0;
      cause_o <= '0;
    end else if (release_i) begin
      halt_o  <= '0;
      susp_o  <= '0;
      ext_o   <= '0;
      cause_o <= '0;
    end else begin
      halt_o  <= halt_o  | hit.halt;
      susp_o  <= susp_o  | hit.susp;
      ext_o   <= ext_o   | hit.ext;
      cause_o <= cause_o | src;
    end
  end
endmodule
