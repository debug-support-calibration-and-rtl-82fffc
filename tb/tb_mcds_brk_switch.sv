// Testbench of mcds_brk_switch: random routes and random source pulses
// against a model of the sticky, release-cleared targets. A directed case
// routes the complex trigger to both cores and checks that both halt
// requests rise in the same cycle, one cycle after the trigger.
module tb_mcds_brk_switch;
  import mcds_pkg::*;
  logic clk = 0, rst_n = 0, rel = 0;
  brk_route_t [NBSRC-1:0] route;
  logic [NCORE-1:0] cbrk = 0, halt;
  logic ctrig = 0;
  logic [NEXT-1:0] ext = 0, ext_o;
  logic [NSUSP-1:0] susp;
  logic [NBSRC-1:0] cause;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mcds_brk_switch dut (.clk, .rst_n, .route_i(route), .core_brk_i(cbrk), .ctrig_i(ctrig),
                       .ext_i(ext), .release_i(rel), .halt_o(halt), .susp_o(susp),
                       .ext_o(ext_o), .cause_o(cause));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    brk_route_t e;
    logic [NBSRC-1:0] e_cause, src;
    route = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: complex trigger halts both cores in one cycle
    @(negedge clk);
    route[NCORE] = '{halt: '1, susp: 4'b0001, ext: 2'b10};
    ctrig = 1;
    @(negedge clk); ctrig = 0;
    chk(halt == '1 && susp == 4'b0001 && ext_o == 2'b10, "both cores halted together");
    chk(cause == NBSRC'(1 << NCORE), "cause is the complex trigger");
    @(negedge clk);
    chk(halt == '1, "halt held");
    rel = 1; @(negedge clk); rel = 0;
    chk(halt == '0 && susp == '0 && ext_o == '0 && cause == '0, "released");
    // random
    e = '0; e_cause = '0;
    for (int i = 0; i < 3000; i++) begin
      if (i % 300 == 0) for (int s = 0; s < NBSRC; s++) route[s] = brk_route_t'($urandom);
      src = ($urandom_range(0, 3) == 0) ? NBSRC'($urandom) : '0;
      {ext, ctrig, cbrk} = src;
      rel = ($urandom_range(0, 20) == 0);
      @(negedge clk);
      if (rel) begin e = '0; e_cause = '0; end
      else begin
        for (int s = 0; s < NBSRC; s++) if (src[s]) e = e | route[s];
        e_cause |= src;
      end
      chk(halt == e.halt && susp == e.susp && ext_o == e.ext && cause == e_cause, "targets");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
