// Emulation RAM: 512 KB of SRAM in eight 64 KB blocks, each block used as
// either overlay or trace memory.
//
// Every 64 KB block is a bank of its own (a word array, one access per
// cycle), so the overlay port, the trace port and the host port can work in
// parallel on different blocks. blk_is_trace_i[b] assigns block b to trace
// (1) or overlay (0) use. The overlay port reads only overlay blocks and the
// trace port writes only trace blocks; an access to a block of the other
// kind is not performed and sets the sticky error flag ovl_err_o or
// trc_err_o (cleared by clr_i). The host port (debugger or debug core:
// calibration writes, trace read-out) may use any block but has the lowest
// priority: when the overlay or trace port uses the same block in that
// cycle, host_ready_o is 0 and the host repeats the request. The size and
// block division follow the published implementation; word width, ports
// and priorities are this design's. On silicon the banks would be SRAM
// macros.
// Timing: read data one cycle after the accepted request.
module emem
  import mcds_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NBLK-1:0]      blk_is_trace_i,
  input  logic                 clr_i,
  // overlay read port
  input  logic                 ovl_req_i,
  input  logic [EMEM_WAW-1:0]  ovl_addr_i,
  output logic [DATA_W-1:0]    ovl_rdata_o,
  output logic                 ovl_err_o,
  // trace write port
  input  logic                 trc_we_i,
  input  logic [EMEM_WAW-1:0]  trc_addr_i,
  input  logic [DATA_W-1:0]    trc_wdata_i,
  output logic                 trc_err_o,
  // host port
  input  logic                 host_req_i,
  input  logic                 host_we_i,
  input  logic [EMEM_WAW-1:0]  host_addr_i,
  input  logic [DATA_W-1:0]    host_wdata_i,
  output logic                 host_ready_o,
  output logic                 host_rvalid_o,
  output logic [DATA_W-1:0]    host_rdata_o
);
  localparam int unsigned WORDS = BLK_BYTES / 4;
  localparam int unsigned BW    = $clog2(NBLK);
  localparam int unsigned IW    = $clog2(WORDS);

  logic [BW-1:0] ovl_blk, trc_blk, host_blk;
  logic          ovl_ok, trc_ok;
  logic [NBLK-1:0] host_busy;
  logic [DATA_W-1:0] rdata [NBLK];
  logic [BW-1:0] ovl_blk_q, host_blk_q;

  assign ovl_blk  = ovl_addr_i[EMEM_WAW-1 -: BW];
  assign trc_blk  = trc_addr_i[EMEM_WAW-1 -: BW];
  assign host_blk = host_addr_i[EMEM_WAW-1 -: BW];
  assign ovl_ok   = ovl_req_i && !blk_is_trace_i[ovl_blk];
  assign trc_ok   = trc_we_i  &&  blk_is_trace_i[trc_blk];

  for (genvar b = 0; b < NBLK; b++) begin : g_bank
    logic [DATA_W-1:0] mem [WORDS];
    logic              use_ovl, use_trc, use_host;
    logic [IW-1:0]     a;

    always_comb begin
      use_ovl  = ovl_ok && (ovl_blk == BW'(b));
      use_trc  = trc_ok && (trc_blk == BW'(b));
      host_busy[b] = use_ovl || use_trc;
      use_host = host_req_i && (host_blk == BW'(b)) && !host_busy[b];
      if (use_ovl)      a = ovl_addr_i[IW-1:0];
      else if (use_trc) a = trc_addr_i[IW-1:0];
      else              a = host_addr_i[IW-1:0];
    end

    always_ff @(posedge clk) begin
      if (use_trc)
        mem[a] <= trc_wdata_i;
      else if (use_host && host_we_i)
        mem[a] <= host_wdata_i;
      if (use_ovl || (use_host && !host_we_i))
        rdata[b] <= mem[a];
    end
  end

  assign host_ready_o = host_req_i && !host_busy[host_blk];
  assign ovl_rdata_o  = rdata[ovl_blk_q];
  assign host_rdata_o = rdata[host_blk_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovl_blk_q     <= '0;
      host_blk_q    <= '0;
      host_rvalid_o <= 1'b0;
      ovl_err_o     <= 1'b0;
      trc_err_o     <= 1'b0;
    end else begin
      if (ovl_req_i) ovl_blk_q <= ovl_blk;
      if (host_ready_o && !host_we_i) host_blk_q <= host_blk;
      host_rvalid_o <= host_ready_o && !host_we_i;
      if (clr_i) begin
        ovl_err_o <= 1'b0;
        trc_err_o <= 1'b0;
      end else begin
        if (ovl_req_i && !ovl_ok) ovl_err_o <= 1'b1;
        if (trc_we_i && !trc_ok)  trc_err_o <= 1'b1;
      end
    end
  end
endmodule
