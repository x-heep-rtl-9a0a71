// periph_demux: the peripheral bus of one peripheral domain.
//
// The system bus gives each peripheral domain one OBI slave port; this block
// splits it into NUM_SLOTS peripheral windows of WINDOW_BYTES each, selected
// by the address bits above the window offset. A request to a window beyond
// NUM_SLOTS is granted and answered with zero. That a peripheral bus sits
// behind the system bus, and that external peripherals hang on it, follows the
// platform description; window size and error behaviour are this design's.
// Timing: combinational request path; rvalid one cycle after gnt, taken from
// the window granted in the previous cycle.
module periph_demux
  import xheep_pkg::*;
#(
  parameter int unsigned NUM_SLOTS    = 5,
  parameter int unsigned WINDOW_BYTES = 32'h0001_0000
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  obi_req_t  req_i,
  output obi_resp_t resp_o,
  output obi_req_t  slot_req_o  [NUM_SLOTS],
  input  obi_resp_t slot_resp_i [NUM_SLOTS]
);
  localparam int unsigned LSB = $clog2(WINDOW_BYTES);
  localparam int unsigned IW  = 8;

  logic [IW-1:0] idx, idx_q;
  logic          hit, err_q, pend_q;
  logic          gnt;

  assign idx = req_i.addr[LSB +: IW];
  assign hit = idx < IW'(NUM_SLOTS);

  for (genvar i = 0; i < NUM_SLOTS; i++) begin : g_slot
    always_comb begin
      slot_req_o[i]     = req_i;
      slot_req_o[i].req = req_i.req && hit && (idx == IW'(i));
    end
  end

  always_comb begin
    gnt = req_i.req && !hit;
    for (int i = 0; i < NUM_SLOTS; i++)
      if (req_i.req && hit && idx == IW'(i)) gnt = slot_resp_i[i].gnt;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      idx_q  <= '0;
      err_q  <= 1'b0;
      pend_q <= 1'b0;
    end else begin
      pend_q <= gnt;
      if (gnt) begin
        idx_q <= idx;
        err_q <= !hit;
      end
    end
  end

  always_comb begin
    resp_o.gnt    = gnt;
    resp_o.rvalid = 1'b0;
    resp_o.rdata  = '0;
    if (pend_q) begin
      if (err_q) resp_o.rvalid = 1'b1;
      else begin
        for (int i = 0; i < NUM_SLOTS; i++)
          if (idx_q == IW'(i)) begin
            resp_o.rvalid = slot_resp_i[i].rvalid;
            resp_o.rdata  = slot_resp_i[i].rdata;
          end
      end
    end
  end

endmodule
