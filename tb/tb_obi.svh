// tb_obi.svh: a blocking OBI master for testbenches.
//
// `TB_OBI_MASTER(name, rq, rs) declares task name(we, addr, wdata, be, rdata,
// wait_cycles) that drives the obi_req_t variable rq and watches the
// obi_resp_t signal rs of the enclosing module, which must also have a clock
// named clk. The request goes up at a falling edge, stays until a rising edge
// where gnt is high, and the response is taken at the next falling edge,
// where rvalid must be high (one-cycle response latency). wait_cycles counts
// the cycles the request waited for its grant.
`ifndef TB_OBI_SVH
`define TB_OBI_SVH
`define TB_OBI_MASTER(NAME, RQ, RS) \
  task automatic NAME(input logic we, input logic [31:0] addr, input logic [31:0] wdata, \
                      input logic [3:0] be, output logic [31:0] rdata, output int wait_cycles); \
    @(negedge clk); \
    RQ.req = 1'b1; RQ.we = we; RQ.addr = addr; RQ.wdata = wdata; RQ.be = be; \
    wait_cycles = 0; #1; \
    while (!RS.gnt) begin @(negedge clk); #1; wait_cycles++; end \
    @(negedge clk); \
    RQ.req = 1'b0; \
    if (!RS.rvalid) begin failures++; $display("FAIL %m: no rvalid one cycle after gnt, addr %h", addr); end \
    rdata = RS.rdata; \
  endtask
`endif
