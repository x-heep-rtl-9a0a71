// fast_intr_ctrl: the fast interrupt controller of the always-on domain.
//
// It collects NUM_LINES interrupt sources (DMA end of transfer, always-on
// peripherals) and drives the CPU's fast interrupt inputs directly, without
// the priority and claim logic of the PLIC. A source that is high for a cycle
// sets its pending bit; the bit stays set until software clears it, so a
// one-cycle pulse is not lost. The block's existence and role come from the
// platform description; its registers are this design's choice:
//   0x0 PENDING (read only)  0x4 CLEAR (write 1 to clear)  0x8 ENABLE
// Interface: OBI slave (gnt with req, rvalid one cycle later); irq_o is
// PENDING & ENABLE, registered, so a source shows on irq_o one cycle later.
module fast_intr_ctrl
  import xheep_pkg::*;
#(
  parameter int unsigned NUM_LINES = 16
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  obi_req_t             req_i,
  output obi_resp_t            resp_o,
  input  logic [NUM_LINES-1:0] intr_i,
  output logic [NUM_LINES-1:0] irq_o
);
  logic [NUM_LINES-1:0] pending_q, enable_q, clear;
  logic                 rvalid_q;
  logic [31:0]          rdata_q;
  logic [1:0]           reg_idx;
  logic                 wr;

  assign reg_idx = req_i.addr[3:2];
  assign wr      = req_i.req && req_i.we;

  always_comb begin
    clear = '0;
    if (wr && reg_idx == 2'd1) clear = NUM_LINES'(sel_word(32'h0, req_i.wdata, req_i.be));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q <= '0;
      enable_q  <= '0;
      rvalid_q  <= 1'b0;
      rdata_q   <= '0;
    end else begin
      pending_q <= (pending_q & ~clear) | intr_i;
      if (wr && reg_idx == 2'd2)
        enable_q <= NUM_LINES'(sel_word(32'(enable_q), req_i.wdata, req_i.be));
      rvalid_q <= req_i.req;
      if (req_i.req && !req_i.we) begin
        unique case (reg_idx)
          2'd0:    rdata_q <= 32'(pending_q);
          2'd2:    rdata_q <= 32'(enable_q);
          default: rdata_q <= '0;
        endcase
      end
    end
  end

  assign irq_o         = pending_q & enable_q;
  assign resp_o.gnt    = req_i.req;
  assign resp_o.rvalid = rvalid_q;
  assign resp_o.rdata  = rdata_q;

endmodule
