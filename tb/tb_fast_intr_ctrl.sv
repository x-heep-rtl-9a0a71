// tb_fast_intr_ctrl: self-checking test of the fast interrupt controller.
// Random one-cycle pulses on random lines must be held as pending until
// cleared, show on irq_o only where enabled, one cycle after the pulse, and
// the registers must read back as a reference model predicts.
`include "tb/tb_obi.svh"
module tb_fast_intr_ctrl;
  import xheep_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  obi_req_t  req = OBI_REQ_IDLE;
  obi_resp_t resp;
  logic [15:0] intr = '0, irq;

  fast_intr_ctrl #(.NUM_LINES(16)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .resp_o(resp),
                                        .intr_i(intr), .irq_o(irq));
  `TB_OBI_MASTER(acc, req, resp)

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] pend = '0, en = '0;
  initial begin
    logic [31:0] r; int wc; logic [15:0] p, c;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      en = 16'($urandom);
      acc(1'b1, 32'h8, 32'(en), 4'hF, r, wc);
      // pulse some lines for one cycle
      p = 16'($urandom) & 16'($urandom);
      @(negedge clk); intr = p;
      @(negedge clk); intr = '0;
      pend |= p;
      check(irq == (pend & en), $sformatf("irq %h want %h one cycle after the pulse", irq, pend & en));
      acc(1'b0, 32'h0, 0, 4'hF, r, wc);
      check(r[15:0] == pend, $sformatf("pending %h want %h", r[15:0], pend));
      c = 16'($urandom);
      acc(1'b1, 32'h4, 32'(c), 4'hF, r, wc);
      pend &= ~c;
      acc(1'b0, 32'h0, 0, 4'hF, r, wc);
      check(r[15:0] == pend, "pending after clear");
      acc(1'b0, 32'h8, 0, 4'hF, r, wc);
      check(r[15:0] == en, "enable readback");
    end
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
