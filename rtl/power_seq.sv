// power_seq: the switch-off / switch-on sequencer of one power-gated domain.
//
// Switching a domain off: clamp its outputs (isolation), then assert its
// reset, then open its power switch and wait until the switch reports it is
// open. Switching it on runs the same steps backwards: close the switch and
// wait for its acknowledge, release the reset, then release the isolation.
// Each step lasts at least one clock cycle. The platform description says
// only that each domain can be power-gated by the power manager; the order of
// the steps and the switch acknowledge are this design's choice, the usual
// practice for power-gated logic.
// Interface: off_i requests the domain off (level). pwr_on_o drives the power
// switch, sw_ack_i is the switch's report (1 = closed, domain powered).
module power_seq
  import xheep_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       off_i,
  input  logic       sw_ack_i,
  output logic       pwr_on_o,
  output logic       iso_o,
  output logic       rst_no,
  output pwr_state_e state_o
);
  pwr_state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      PS_ON:      if (off_i) state_d = PS_ISO;
      PS_ISO:     state_d = PS_RST;
      PS_RST:     state_d = PS_SW_OFF;
      PS_SW_OFF:  if (!sw_ack_i) state_d = PS_OFF;
      PS_OFF:     if (!off_i) state_d = PS_SW_ON;
      PS_SW_ON:   if (sw_ack_i) state_d = PS_RST_REL;
      PS_RST_REL: state_d = PS_ISO_REL;
      PS_ISO_REL: state_d = PS_ON;
      default:    state_d = PS_ON;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q <= PS_ON;
    else         state_q <= state_d;
  end

  always_comb begin
    pwr_on_o = !(state_q inside {PS_SW_OFF, PS_OFF});
    iso_o    = !(state_q inside {PS_ON, PS_ISO_REL});
    rst_no   = !(state_q inside {PS_RST, PS_SW_OFF, PS_OFF, PS_SW_ON});
  end

  assign state_o = state_q;

endmodule
