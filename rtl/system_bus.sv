// system_bus: the platform's OBI interconnect, in one of two topologies.
//
// Masters (CPU instruction and data ports, debug unit, DMA, external masters)
// reach slaves (memory banks, debug unit, the two peripheral domains,
// external slaves) through an address decoder and arbitration:
//   FULLY_CONNECTED = 1: every master has its own decoder and every slave its
//     own round-robin arbiter, so masters that target different slaves are
//     served in the same cycle (bandwidth grows by 32 bit per master/slave pair).
//   FULLY_CONNECTED = 0 ("one-at-a-time"): one round-robin arbiter picks a
//     single master per cycle and a single decoder routes it; the bus moves
//     at most 32 bit per cycle whatever the number of ports.
// The two topologies, and contiguous or interleaved mapping of the banks,
// come from the platform description. NUM_BANKS and BANK_SIZE_BYTES must be
// powers of two. The round-robin policy, the address map
// (xheep_pkg) and the error slave are this design's choices. Addresses that
// hit no slave are granted by an internal error slave that returns zero.
//
// Slave port order: banks 0..NUM_BANKS-1, debug, always-on peripherals,
// peripherals, external slaves 0..NUM_EXT_SLAVES-1.
// Timing: combinational request path (gnt in the cycle the slave grants);
// every slave must give rvalid exactly one cycle after its gnt, and the bus
// forwards it to the master granted in the previous cycle.
module system_bus
  import xheep_pkg::*;
#(
  parameter int unsigned NUM_MASTERS     = 9,
  parameter int unsigned NUM_BANKS       = 8,
  parameter int unsigned BANK_SIZE_BYTES = 32768,
  parameter bit          INTERLEAVED     = 1'b0,
  parameter int unsigned NUM_EXT_SLAVES  = 3,
  parameter bit          FULLY_CONNECTED = 1'b1,
  localparam int unsigned NUM_SLAVES     = NUM_BANKS + 3 + NUM_EXT_SLAVES
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  obi_req_t  mst_req_i  [NUM_MASTERS],
  output obi_resp_t mst_resp_o [NUM_MASTERS],
  output obi_req_t  slv_req_o  [NUM_SLAVES],
  input  obi_resp_t slv_resp_i [NUM_SLAVES]
);
  localparam int unsigned NS     = NUM_SLAVES + 1;      // plus error slave
  localparam int unsigned ERR    = NUM_SLAVES;
  localparam int unsigned SW     = $clog2(NS);
  localparam int unsigned MW     = (NUM_MASTERS > 1) ? $clog2(NUM_MASTERS) : 1;
  localparam logic [31:0] MEM_END = MEM_START + NUM_BANKS * BANK_SIZE_BYTES;

  // ------------------------------------------------------------ address decode
  function automatic logic [SW-1:0] decode(input logic [31:0] a);
    logic [31:0] off;
    if (a < MEM_END) begin  // the memory starts at address 0
      if (INTERLEAVED) return SW'((a >> 2) & (NUM_BANKS - 1));
      else             return SW'((a - MEM_START) >> $clog2(BANK_SIZE_BYTES));
    end
    if (a >= DEBUG_START && a < DEBUG_START + DEBUG_SIZE)             return SW'(NUM_BANKS);
    if (a >= AO_PERIPH_START && a < AO_PERIPH_START + AO_PERIPH_SIZE) return SW'(NUM_BANKS + 1);
    if (a >= PERIPH_START && a < PERIPH_START + PERIPH_SIZE)          return SW'(NUM_BANKS + 2);
    off = a - EXT_SLAVE_START;
    if (a >= EXT_SLAVE_START && (off >> $clog2(EXT_SLAVE_SIZE)) < NUM_EXT_SLAVES)
      return SW'(NUM_BANKS + 3 + (off >> $clog2(EXT_SLAVE_SIZE)));
    return SW'(ERR);
  endfunction

  logic [SW-1:0] sel [NUM_MASTERS];
  for (genvar m = 0; m < NUM_MASTERS; m++) begin : g_dec
    assign sel[m] = decode(mst_req_i[m].addr);
  end

  // -------------------------------------------------------------- arbitration
  // Round-robin: the first requester after the last winner wins.
  function automatic logic [MW-1:0] rr_pick(input logic [NUM_MASTERS-1:0] reqs,
                                            input logic [MW-1:0] last);
    logic [MW-1:0] first, after;
    logic          found;
    first = '0;
    after = '0;
    found = 1'b0;
    for (int i = NUM_MASTERS - 1; i >= 0; i--) begin
      if (reqs[i]) first = MW'(i);
      if (reqs[i] && MW'(i) > last) begin after = MW'(i); found = 1'b1; end
    end
    return found ? after : first;
  endfunction

  // win[s][m]: master m is the one forwarded to slave s in this cycle.
  logic [NUM_MASTERS-1:0] win [NS];
  obi_resp_t              slv_resp [NS];
  obi_req_t               slv_req  [NS];
  logic                   err_rvalid_q;

  if (FULLY_CONNECTED) begin : g_fc
    logic [MW-1:0] last_q [NS];
    for (genvar s = 0; s < NS; s++) begin : g_arb
      logic [NUM_MASTERS-1:0] reqs;
      logic [MW-1:0]          pick;
      always_comb begin
        for (int m = 0; m < NUM_MASTERS; m++)
          reqs[m] = mst_req_i[m].req && (sel[m] == SW'(s));
        pick = rr_pick(reqs, last_q[s]);
        win[s] = '0;
        if (|reqs) win[s][pick] = 1'b1;
      end
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni)                                  last_q[s] <= MW'(NUM_MASTERS - 1);
        else if (|reqs && slv_resp[s].gnt)            last_q[s] <= pick;
      end
    end
  end else begin : g_oaat
    logic [MW-1:0]          last_q;
    logic [NUM_MASTERS-1:0] reqs;
    logic [MW-1:0]          pick;
    always_comb begin
      for (int m = 0; m < NUM_MASTERS; m++) reqs[m] = mst_req_i[m].req;
      pick = rr_pick(reqs, last_q);
      for (int s = 0; s < NS; s++) begin
        win[s] = '0;
        if (|reqs && sel[pick] == SW'(s)) win[s][pick] = 1'b1;
      end
    end
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)                           last_q <= MW'(NUM_MASTERS - 1);
      else if (|reqs && slv_resp[sel[pick]].gnt) last_q <= pick;
    end
  end

  // ----------------------------------------------------------- request muxing
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      slv_req[s] = OBI_REQ_IDLE;
      for (int m = 0; m < NUM_MASTERS; m++)
        if (win[s][m]) slv_req[s] = mst_req_i[m];
    end
  end

  for (genvar s = 0; s < NUM_SLAVES; s++) begin : g_slv
    assign slv_req_o[s] = slv_req[s];
    assign slv_resp[s]  = slv_resp_i[s];
  end

  // Error slave: grants at once, answers zero one cycle later.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) err_rvalid_q <= 1'b0;
    else         err_rvalid_q <= slv_req[ERR].req;
  end
  assign slv_resp[ERR] = '{gnt: slv_req[ERR].req, rvalid: err_rvalid_q, rdata: 32'h0};

  // ---------------------------------------------------------- response routing
  logic          pend_q [NUM_MASTERS];
  logic [SW-1:0] rsel_q [NUM_MASTERS];

  for (genvar m = 0; m < NUM_MASTERS; m++) begin : g_mst
    logic gnt;
    always_comb begin
      gnt = 1'b0;
      for (int s = 0; s < NS; s++)
        if (win[s][m] && slv_resp[s].gnt) gnt = 1'b1;
    end
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        pend_q[m] <= 1'b0;
        rsel_q[m] <= '0;
      end else begin
        pend_q[m] <= gnt;
        if (gnt) rsel_q[m] <= sel[m];
      end
    end
    assign mst_resp_o[m].gnt    = gnt;
    assign mst_resp_o[m].rvalid = pend_q[m] && slv_resp[rsel_q[m]].rvalid;
    assign mst_resp_o[m].rdata  = slv_resp[rsel_q[m]].rdata;

    // OBI: a request waits, unchanged, until it is granted.
    a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      mst_req_i[m].req && !gnt |=> mst_req_i[m].req && $stable(mst_req_i[m].addr));
  end

  // Every slave answers exactly one cycle after its grant.
  for (genvar s = 0; s < NUM_SLAVES; s++) begin : g_lat
    a_one_cycle: assert property (@(posedge clk_i) disable iff (!rst_ni)
      slv_resp_i[s].rvalid == $past(slv_req[s].req && slv_resp_i[s].gnt));
  end

endmodule
