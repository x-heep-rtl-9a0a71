// tb_plic: self-checking test of the interrupt controller.
// Random priorities, enables and threshold; random sources are raised. The
// test compares irq_o and each claim with a reference model (highest
// priority wins, lowest id on a tie, above the threshold to interrupt), and
// checks that a claimed source stays quiet until completed.
`include "tb/tb_obi.svh"
module tb_plic;
  import xheep_pkg::*;
  localparam int unsigned N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  obi_req_t  req = OBI_REQ_IDLE;
  obi_resp_t resp;
  logic [N-1:0] src = '0;
  logic irq; logic [4:0] irq_id;

  plic #(.NUM_SRC(N), .PRIO_W(3)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .resp_o(resp),
                                       .src_i(src), .irq_o(irq), .irq_id_o(irq_id));
  `TB_OBI_MASTER(acc, req, resp)

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  int prio [N]; logic [N-1:0] ie, ip; int thr;
  function automatic int best();
    int b, bp; b = 0; bp = 0;
    for (int i = 1; i < N; i++) if (ip[i] && ie[i] && prio[i] > bp) begin b = i; bp = prio[i]; end
    return b;
  endfunction

  initial begin
    logic [31:0] r; int wc, id;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int i = 1; i < N; i++) begin prio[i] = $urandom_range(0, 7); acc(1'b1, 32'(4 * i), 32'(prio[i]), 4'hF, r, wc); end
      ie = N'($urandom) & ~N'(1); acc(1'b1, 32'h100, 32'(ie), 4'hF, r, wc);
      thr = $urandom_range(0, 3);   acc(1'b1, 32'h180, 32'(thr), 4'hF, r, wc);
      // raise some sources as one-cycle pulses
      @(negedge clk); src = N'($urandom) & N'($urandom) & ~N'(1); ip = src;
      @(negedge clk); src = '0;
      @(negedge clk);
      acc(1'b0, 32'h080, 0, 4'hF, r, wc);
      check(r == 32'(ip), $sformatf("pending %h want %h", r, ip));
      // claim everything, in order
      for (int k = 0; k < N; k++) begin
        id = best();
        check(irq == (id != 0 && prio[id] > thr), $sformatf("irq %0d for best %0d prio %0d thr %0d", irq, id, prio[id], thr));
        acc(1'b0, 32'h184, 0, 4'hF, r, wc);
        check(int'(r) == id, $sformatf("claim %0d want %0d", r, id));
        if (id == 0) break;
        ip[id] = 1'b0;
        // while in service the source cannot become pending again
        @(negedge clk); src[id] = 1'b1; @(negedge clk); src[id] = 1'b0;
        acc(1'b0, 32'h080, 0, 4'hF, r, wc);
        check(!r[id], "claimed source stays quiet until completed");
        acc(1'b1, 32'h184, 32'(id), 4'hF, r, wc);
      end
      // disabled sources are still pending; clear them by enabling and claiming
      ie = ~N'(1); acc(1'b1, 32'h100, 32'(ie), 4'hF, r, wc);
      for (int i = 1; i < N; i++) begin prio[i] = 1; acc(1'b1, 32'(4 * i), 32'h1, 4'hF, r, wc); end
      while (best() != 0) begin
        id = best();
        acc(1'b0, 32'h184, 0, 4'hF, r, wc);
        check(int'(r) == id, "drain claim");
        ip[id] = 1'b0;
        acc(1'b1, 32'h184, 32'(id), 4'hF, r, wc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
