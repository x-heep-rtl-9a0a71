// plic: platform-level interrupt controller of the peripheral domain.
//
// It gathers the interrupt lines of the switchable peripherals and the
// interrupt lines that accelerators bring in through the accelerator
// interface (for example a CGRA's end of computation) and presents them to
// the CPU as one external interrupt, under software control. Source 0 is
// unused. A high source line whose interrupt is not already pending or being
// served becomes pending. Software reads CLAIM to get the id of the pending,
// enabled source with the highest priority (lowest id on a tie, 0 if none);
// the read clears its pending bit and marks it in service. Writing that id
// back to CLAIM completes it, and the line can become pending again. irq_o
// is high while a pending, enabled source has a priority above THRESHOLD.
// The PLIC's role (one line per accelerator interrupt, software control)
// follows the platform description; the register layout and the level
// gateway are this design's choice, after the RISC-V PLIC convention:
//   0x000 + 4*i PRIORITY[i]   0x080 PENDING (read only)   0x100 ENABLE
//   0x180 THRESHOLD           0x184 CLAIM / COMPLETE
// Interface: OBI slave (gnt with req, rvalid one cycle later).
module plic
  import xheep_pkg::*;
#(
  parameter int unsigned NUM_SRC = 32,
  parameter int unsigned PRIO_W  = 3
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  obi_req_t           req_i,
  output obi_resp_t          resp_o,
  input  logic [NUM_SRC-1:0] src_i,
  output logic               irq_o,
  output logic [$clog2(NUM_SRC)-1:0] irq_id_o
);
  localparam int unsigned IDW = $clog2(NUM_SRC);

  logic [PRIO_W-1:0]  prio_q [NUM_SRC];
  logic [NUM_SRC-1:0] ip_q, ie_q, busy_q;
  logic [PRIO_W-1:0]  thr_q;
  logic [IDW-1:0]     best_id;
  logic [PRIO_W-1:0]  best_prio;
  logic               rvalid_q;
  logic [31:0]        rdata_q;
  logic [8:0]         off;
  logic               claim, complete;

  // highest-priority pending and enabled source
  always_comb begin
    best_id   = '0;
    best_prio = '0;
    for (int i = 1; i < NUM_SRC; i++) begin
      if (ip_q[i] && ie_q[i] && prio_q[i] > best_prio) begin
        best_id   = IDW'(i);
        best_prio = prio_q[i];
      end
    end
  end

  assign off      = req_i.addr[8:0];
  assign claim    = req_i.req && !req_i.we && off == 9'h184;
  assign complete = req_i.req &&  req_i.we && off == 9'h184;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < NUM_SRC; i++) prio_q[i] <= '0;
      ip_q     <= '0;
      ie_q     <= '0;
      busy_q   <= '0;
      thr_q    <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      // gateway
      for (int i = 1; i < NUM_SRC; i++)
        if (src_i[i] && !ip_q[i] && !busy_q[i]) ip_q[i] <= 1'b1;
      if (claim && best_id != 0) begin
        ip_q[best_id]   <= 1'b0;
        busy_q[best_id] <= 1'b1;
      end
      if (complete) busy_q[req_i.wdata[IDW-1:0]] <= 1'b0;

      if (req_i.req && req_i.we) begin
        if (off < 9'h080)  prio_q[off[6:2]] <= req_i.wdata[PRIO_W-1:0];
        if (off == 9'h100) ie_q  <= NUM_SRC'(req_i.wdata);
        if (off == 9'h180) thr_q <= req_i.wdata[PRIO_W-1:0];
      end

      rvalid_q <= req_i.req;
      if (req_i.req && !req_i.we) begin
        rdata_q <= '0;
        if (off < 9'h080)  rdata_q <= 32'(prio_q[off[6:2]]);
        if (off == 9'h080) rdata_q <= 32'(ip_q);
        if (off == 9'h100) rdata_q <= 32'(ie_q);
        if (off == 9'h180) rdata_q <= 32'(thr_q);
        if (off == 9'h184) rdata_q <= 32'(best_id);
      end
    end
  end

  assign irq_o    = (best_id != 0) && (best_prio > thr_q);
  assign irq_id_o = best_id;

  assign resp_o.gnt    = req_i.req;
  assign resp_o.rvalid = rvalid_q;
  assign resp_o.rdata  = rdata_q;

endmodule
