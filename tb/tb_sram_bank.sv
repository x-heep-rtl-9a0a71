// tb_sram_bank: self-checking test of one SRAM bank.
// Random word and byte writes are mirrored in a reference array and read
// back; the one-cycle read latency is checked, and the bank must withhold
// its grant while clock-gated, in retention or powered down, and keep its
// contents through retention.
`include "tb/tb_obi.svh"
module tb_sram_bank;
  import xheep_pkg::*;
  localparam int unsigned SIZE = 32768;
  localparam int unsigned WORDS = SIZE / 4;

  logic clk = 0, rst_n = 0;
  obi_req_t  req = OBI_REQ_IDLE;
  obi_resp_t resp;
  logic clk_en = 1, ret = 0, pwr_on = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sram_bank #(.SIZE_BYTES(SIZE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .word_addr_i(req.addr[2 +: $clog2(WORDS)]),
    .resp_o(resp), .clk_en_i(clk_en), .retention_i(ret), .pwr_on_i(pwr_on));

  `TB_OBI_MASTER(acc, req, resp)

  logic [31:0] model [int];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(input int w, input logic [31:0] d, input logic [3:0] be);
    logic [31:0] r; int wc; logic [31:0] old;
    acc(1'b1, 32'(w) << 2, d, be, r, wc);
    old = model.exists(w) ? model[w] : 32'h0;
    model[w] = sel_word(old, d, be);
    check(wc == 0, "write granted at once");
  endtask

  task automatic read_check(input int w);
    logic [31:0] r; int wc;
    acc(1'b0, 32'(w) << 2, 32'h0, 4'hF, r, wc);
    check(wc == 0 && r == model[w], $sformatf("read word %0d got %h want %h", w, r, model[w]));
  endtask

  int addrs[64];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // full words first, so every word later read is defined
    for (int i = 0; i < 64; i++) begin
      addrs[i] = (i < 2) ? ((i == 0) ? 0 : WORDS - 1) : int'($urandom_range(0, WORDS - 1));
      write(addrs[i], $urandom, 4'hF);
    end
    for (int i = 0; i < 64; i++) write(addrs[i], $urandom, 4'($urandom_range(1, 15)));
    for (int i = 0; i < 64; i++) read_check(addrs[i]);

    // a gated bank withholds its grant, then serves the request once woken;
    // the request rises at the first of seven falling edges, so it waits six
    for (int mode = 0; mode < 3; mode++) begin
      int stall; logic [31:0] r;
      stall = 0;
      @(negedge clk);
      clk_en = (mode != 0); ret = (mode == 1); pwr_on = (mode != 2);
      fork
        acc(1'b0, 32'(addrs[5]) << 2, 32'h0, 4'hF, r, stall);
        begin repeat (7) @(negedge clk); clk_en = 1; ret = 0; pwr_on = 1; end
      join
      check(stall == 6, $sformatf("mode %0d stalled %0d cycles, want 6", mode, stall));
      check(r == model[addrs[5]], "contents kept across the low-power state");
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
