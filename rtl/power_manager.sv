// power_manager: software-controlled clock-gating, power-gating and memory
// retention for every power domain of the platform.
//
// Domains, in register order: 0 CPU, 1 peripheral domain, 2.. the memory
// banks (NUM_BANKS), then the external domains of accelerators attached to
// the platform (NUM_EXT_DOMAINS). Each domain has one control register:
//   CTRL[d]   at 0x00 + 4*d : bit0 power_off, bit1 clk_gate, bit2 retention
//   STATUS[d] at 0x80 + 4*d : bit0 domain on, bit1 domain off (read only)
// Bits a domain does not support read back as zero:
//  - clock-gating: every domain;
//  - retention: memory banks and external domains marked in EXT_RET_MASK;
//  - power-gating: every domain except the first NUM_AO_BANKS banks, which
//    sit in the always-on domain.
// The CPU is switched off only while it sleeps (core_sleep_i): software sets
// CPU power_off and then waits for an interrupt. Any wake-up request
// (wakeup_i, an interrupt) clears that bit and the CPU domain is switched
// back on. The domain set, the three strategies and which domain supports
// which follow the platform description; the register layout, the
// sleep/wake rule and the switching sequence (power_seq) are this design's.
// Interface: OBI slave (gnt with req, rvalid one cycle later); per domain a
// pwr_dom_t bundle out and a power-switch acknowledge in.
module power_manager
  import xheep_pkg::*;
#(
  parameter int unsigned NUM_BANKS       = 8,
  parameter int unsigned NUM_AO_BANKS    = 2,
  parameter int unsigned NUM_EXT_DOMAINS = 3,
  parameter logic [NUM_EXT_DOMAINS-1:0] EXT_RET_MASK = 3'b010,
  localparam int unsigned NUM_DOMAINS    = 2 + NUM_BANKS + NUM_EXT_DOMAINS
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  obi_req_t               req_i,
  output obi_resp_t              resp_o,
  input  logic                   core_sleep_i,
  input  logic                   wakeup_i,
  output pwr_dom_t               dom_o     [NUM_DOMAINS],
  input  logic [NUM_DOMAINS-1:0] sw_ack_i
);
  localparam int unsigned DOM_CPU = 0;

  // What each domain supports: {retention, clk_gate, power_off}.
  function automatic logic [2:0] caps(input int unsigned d);
    if (d < 2)                       return 3'b011;
    if (d < 2 + NUM_AO_BANKS)        return 3'b110;
    if (d < 2 + NUM_BANKS)           return 3'b111;
    return {EXT_RET_MASK[d - 2 - NUM_BANKS], 2'b11};
  endfunction

  pwr_ctrl_t   ctrl_q [NUM_DOMAINS];
  pwr_state_e  state  [NUM_DOMAINS];
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic [5:0]  reg_idx;
  logic        is_status;

  assign reg_idx   = req_i.addr[7:2];
  assign is_status = req_i.addr[7];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int d = 0; d < NUM_DOMAINS; d++) ctrl_q[d] <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      for (int d = 0; d < NUM_DOMAINS; d++) begin
        if (req_i.req && req_i.we && !is_status && req_i.be[0] && reg_idx == 6'(d))
          ctrl_q[d] <= pwr_ctrl_t'(req_i.wdata[2:0] & caps(d));
      end
      // A wake-up request brings the CPU back.
      if (wakeup_i && state[DOM_CPU] == PS_OFF) ctrl_q[DOM_CPU].power_off <= 1'b0;
      rvalid_q <= req_i.req;
      if (req_i.req && !req_i.we) begin
        rdata_q <= '0;
        for (int d = 0; d < NUM_DOMAINS; d++) begin
          if (!is_status && reg_idx == 6'(d))
            rdata_q <= 32'(ctrl_q[d]);
          if (is_status && reg_idx[4:0] == 5'(d))
            rdata_q <= {30'h0, state[d] == PS_OFF, state[d] == PS_ON};
        end
      end
    end
  end

  for (genvar d = 0; d < NUM_DOMAINS; d++) begin : g_dom
    logic off_req;
    if (d == DOM_CPU) begin : g_cpu
      // The CPU goes off only once it sleeps; it stays off until woken.
      assign off_req = ctrl_q[d].power_off && (core_sleep_i || state[d] != PS_ON);
    end else begin : g_other
      assign off_req = ctrl_q[d].power_off;
    end

    if (caps(d)[0]) begin : g_sw
      logic pwr_on, iso, rst_n;
      power_seq u_seq (
        .clk_i, .rst_ni,
        .off_i    (off_req),
        .sw_ack_i (sw_ack_i[d]),
        .pwr_on_o (pwr_on),
        .iso_o    (iso),
        .rst_no   (rst_n),
        .state_o  (state[d])
      );
      assign dom_o[d].pwr_on = pwr_on;
      assign dom_o[d].iso    = iso;
      assign dom_o[d].rst_n  = rst_n;
    end else begin : g_ao
      // Always-on: no switch, the domain is on whenever the chip is.
      assign state[d]        = PS_ON;
      assign dom_o[d].pwr_on = 1'b1;
      assign dom_o[d].iso    = 1'b0;
      assign dom_o[d].rst_n  = 1'b1;
    end
    assign dom_o[d].clk_en    = !ctrl_q[d].clk_gate;
    assign dom_o[d].retention = ctrl_q[d].retention;
  end

  assign resp_o.gnt    = req_i.req;
  assign resp_o.rvalid = rvalid_q;
  assign resp_o.rdata  = rdata_q;

endmodule
