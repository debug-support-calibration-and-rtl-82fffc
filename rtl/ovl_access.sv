// Overlay access sequencer: serves a core's flash read from the flash or,
// when the overlay map redirects it, from the emulation RAM with the
// flash's timing.
//
// One read is handled at a time (ready_o is 1 when idle). On a request the
// address goes through ovl_addr_map. A miss is passed to the flash and the
// flash's answer is returned as it comes. A hit reads the emulation RAM
// (one-cycle read) and holds the word until exactly ws+1 cycles after the
// request, ws being the programmed flash wait states, so code and
// calibration data run with the same timing from overlay RAM as from
// flash. The overlay configuration, including the page bit, is sampled at
// the request, so a page swap takes effect between accesses. Matching the
// flash timing follows the published implementation; the handshake and the
// wait-state model are this design's.
// Timing: overlay hit answered in cycle ws+1 after req_i; flash miss
// answered in the cycle flash_rvalid_i is 1.
module ovl_access
  import mcds_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  ovl_cfg_t            cfg_i,
  // core side
  input  logic                req_i,
  input  logic [ADDR_W-1:0]   addr_i,
  output logic                ready_o,
  output logic                rvalid_o,
  output logic [DATA_W-1:0]   rdata_o,
  output logic                hit_o,      // current request was redirected
  // flash side
  output logic                flash_req_o,
  output logic [ADDR_W-1:0]   flash_addr_o,
  input  logic                flash_rvalid_i,
  input  logic [DATA_W-1:0]   flash_rdata_i,
  // emulation RAM side (word address, data one cycle later)
  output logic                emem_req_o,
  output logic [EMEM_WAW-1:0] emem_addr_o,
  input  logic [DATA_W-1:0]   emem_rdata_i
);
  typedef enum logic [1:0] {S_IDLE, S_FLASH, S_OVL} state_e;
  state_e            state;
  logic              map_hit;
  logic [EMEM_AW-1:0] map_addr;
  logic [3:0]        wait_cnt;
  logic              first;
  logic [DATA_W-1:0] hold;

  ovl_addr_map u_map (
    .cfg_i, .addr_i, .hit_o(map_hit), .idx_o(), .emem_addr_o(map_addr)
  );

  assign ready_o      = (state == S_IDLE);
  assign hit_o        = ready_o && req_i && map_hit;
  assign flash_req_o  = ready_o && req_i && !map_hit;
  assign flash_addr_o = addr_i;
  assign emem_req_o   = ready_o && req_i && map_hit;
  assign emem_addr_o  = map_addr[EMEM_AW-1:2];

  always_comb begin
    rvalid_o = 1'b0;
    rdata_o  = '0;
    if (state == S_FLASH && flash_rvalid_i) begin
      rvalid_o = 1'b1;
      rdata_o  = flash_rdata_i;
    end else if (state == S_OVL && wait_cnt == '0) begin
      rvalid_o = 1'b1;
      rdata_o  = first ? emem_rdata_i : hold;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      wait_cnt <= '0;
      first    <= 1'b0;
      hold     <= '0;
    end else begin
      case (state)
        S_IDLE: if (req_i) begin
          state    <= map_hit ? S_OVL : S_FLASH;
          wait_cnt <= cfg_i.ws;
          first    <= 1'b1;
        end
        S_FLASH: if (flash_rvalid_i) state <= S_IDLE;
        S_OVL: begin
          first <= 1'b0;
          if (first) hold <= emem_rdata_i;
          if (wait_cnt == '0) state <= S_IDLE;
          else                wait_cnt <= wait_cnt - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
