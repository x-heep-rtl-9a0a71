// tb_periph_demux: self-checking test of the peripheral bus demultiplexer.
// Three register-file models sit in windows 0..2; the test writes and reads
// random registers in each, checks that a window's model is the only one
// touched, that a slow peripheral's wait is passed back to the master, and
// that a window with no peripheral answers zero.
`include "tb/tb_obi.svh"
module tb_periph_demux;
  import xheep_pkg::*;
  localparam int unsigned NS = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  obi_req_t  req = OBI_REQ_IDLE;
  obi_resp_t resp;
  obi_req_t  sreq [NS];
  obi_resp_t sresp [NS];
  int        hits [NS];
  logic      slow_gnt = 1'b1;

  periph_demux #(.NUM_SLOTS(NS), .WINDOW_BYTES(32'h1_0000)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .resp_o(resp), .slot_req_o(sreq), .slot_resp_i(sresp));

  // register models: 16 words each; slot 2 grants only when slow_gnt is high
  for (genvar s = 0; s < NS; s++) begin : g_m
    logic [31:0] regs [16];
    logic rv; logic [31:0] rd;
    logic g;
    assign g = sreq[s].req && (s != 2 || slow_gnt);
    assign sresp[s] = '{gnt: g, rvalid: rv, rdata: rd};
    initial begin hits[s] = 0; for (int i = 0; i < 16; i++) regs[i] = 32'h0; end
    always @(posedge clk) begin
      rv <= rst_n && g;
      if (g) begin
        hits[s]++;
        if (sreq[s].we) regs[sreq[s].addr[5:2]] <= sreq[s].wdata;
        rd <= regs[sreq[s].addr[5:2]];
      end
    end
  end

  `TB_OBI_MASTER(acc, req, resp)

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] model [NS][16];
  initial begin
    logic [31:0] r; int wc, s, i, h0, h1, h2;
    for (int a = 0; a < NS; a++) for (int b = 0; b < 16; b++) model[a][b] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      s = $urandom_range(0, NS - 1); i = $urandom_range(0, 15);
      h0 = hits[0]; h1 = hits[1]; h2 = hits[2];
      if ($urandom_range(0, 1)) begin
        model[s][i] = $urandom;
        acc(1'b1, 32'h3000_0000 + 32'(s) * 32'h1_0000 + 32'(4 * i), model[s][i], 4'hF, r, wc);
      end else begin
        acc(1'b0, 32'h3000_0000 + 32'(s) * 32'h1_0000 + 32'(4 * i), 0, 4'hF, r, wc);
        check(r == model[s][i], $sformatf("slot %0d reg %0d read %h want %h", s, i, r, model[s][i]));
      end
      check((hits[0] - h0) == (s == 0) && (hits[1] - h1) == (s == 1) && (hits[2] - h2) == (s == 2),
            "only the addressed window is touched");
    end
    // a slow peripheral: the master waits as long as it does
    fork
      acc(1'b0, 32'h3002_0004, 0, 4'hF, r, wc);
      begin @(negedge clk); slow_gnt = 0; repeat (4) @(negedge clk); slow_gnt = 1; end
    join
    check(wc == 4 && r == model[2][1], $sformatf("slow window waited %0d cycles", wc));
    // unmapped window
    acc(1'b0, 32'h3005_0000, 0, 4'hF, r, wc);
    check(r == 32'h0 && wc == 0, "unmapped window reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
