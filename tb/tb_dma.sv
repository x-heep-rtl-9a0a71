// tb_dma: self-checking test of the DMA engine.
// A memory model serves both bus ports (random grant delays in the first
// phase). Checked: memory-to-memory copies of random lengths land intact;
// with slaves that grant at once a copy of N words ends within N + 6 cycles
// (one word per cycle); a zero source increment reads a fixed peripheral
// register; receive mode reads only while rx_valid is high; the done pulse.
`include "tb/tb_obi.svh"
module tb_dma;
  import xheep_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  obi_req_t  req = OBI_REQ_IDLE, rd_req, wr_req;
  obi_resp_t resp, rd_resp, wr_resp;
  logic rx_valid = 1'b0, tx_ready = 1'b0, done;
  logic random_gnt = 1'b1;
  int   done_count = 0, periph_reads = 0;
  logic [31:0] periph_val = 32'h0;

  dma #(.FIFO_DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .resp_o(resp),
    .rd_req_o(rd_req), .rd_resp_i(rd_resp), .wr_req_o(wr_req), .wr_resp_i(wr_resp),
    .rx_valid_i(rx_valid), .tx_ready_i(tx_ready), .done_o(done));

  // memory model; address 0x3000_0000 is a peripheral data register whose
  // value steps on every read
  logic [31:0] mem [logic [31:0]];
  logic rg, wg, rv, wv;
  logic [31:0] rd;
  always @(posedge clk) begin
    #1;
    rg = !random_gnt || $urandom_range(0, 2) != 0;
    wg = !random_gnt || $urandom_range(0, 2) != 0;
  end
  assign rd_resp = '{gnt: rd_req.req && rg, rvalid: rv, rdata: rd};
  assign wr_resp = '{gnt: wr_req.req && wg, rvalid: wv, rdata: 32'h0};
  obi_req_t rs, ws; logic rgo, wgo;
  always @(negedge clk) begin #3; rs = rd_req; ws = wr_req; rgo = rd_req.req && rg; wgo = wr_req.req && wg; end
  always @(posedge clk) begin
    rv <= rst_n && rgo;
    wv <= rst_n && wgo;
    if (rgo) begin
      if (rs.addr == 32'h3000_0000) begin rd <= periph_val; periph_val = periph_val + 1; periph_reads++; end
      else rd <= mem.exists(rs.addr) ? mem[rs.addr] : 32'h0;
    end
    if (wgo) mem[ws.addr] = ws.wdata;
    if (done) done_count++;
  end

  `TB_OBI_MASTER(acc, req, resp)

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] r; int wc; acc(1'b1, a, d, 4'hF, r, wc);
  endtask
  task automatic wait_ready(output int cycles);
    logic [31:0] r; int wc;
    cycles = 0;
    do begin acc(1'b0, 32'hC, 0, 4'hF, r, wc); cycles += 2; end while (!r[0] && cycles < 10000);
  endtask

  initial begin
    int n, cyc, d0; logic [31:0] src, dst;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // memory-to-memory copies with random grants
    for (int it = 0; it < 10; it++) begin
      n = $urandom_range(1, 40);
      src = 32'h1000 + 32'(256 * it); dst = 32'h8000 + 32'(256 * it);
      for (int i = 0; i < n; i++) mem[src + 4 * i] = $urandom;
      mem[dst + 4 * n] = 32'hCAFE_F00D;        // guard word after the copy
      d0 = done_count;
      wr(32'h0, src); wr(32'h4, dst); wr(32'h8, 32'(4 * n));
      wait_ready(cyc);
      for (int i = 0; i < n; i++)
        check(mem[dst + 4 * i] == mem[src + 4 * i], $sformatf("copy %0d word %0d", it, i));
      check(mem[dst + 4 * n] == 32'hCAFE_F00D, "no word written past the end");
      check(done_count == d0 + 1, "one done pulse per copy");
    end
    // throughput: grants at once, 64 words
    random_gnt = 0;
    n = 64;
    for (int i = 0; i < n; i++) mem[32'h2000 + 4 * i] = $urandom;
    wr(32'h0, 32'h2000); wr(32'h4, 32'h9000);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'h8, wdata: 32'(4 * n)};
    @(negedge clk);
    req.req = 1'b0;
    cyc = 0;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    check(cyc <= n + 6, $sformatf("64 words copied in %0d cycles (want <= %0d)", cyc, n + 6));
    for (int i = 0; i < n; i++) check(mem[32'h9000 + 4 * i] == mem[32'h2000 + 4 * i], "fast copy data");
    // peripheral to memory, paced by rx_valid, fixed source address
    random_gnt = 1;
    wr(32'h10, 32'h0);                      // SRC_INC = 0
    wr(32'h18, 32'h1);                      // receive mode
    wr(32'h0, 32'h3000_0000); wr(32'h4, 32'hA000);
    periph_reads = 0; periph_val = 32'h100;
    wr(32'h8, 32'd40);                      // ten words
    repeat (30) @(negedge clk);
    check(periph_reads == 0, "nothing read while the peripheral has no data");
    for (int k = 0; k < 10; k++) begin
      rx_valid = 1'b1;
      while (periph_reads != k + 1) @(negedge clk);
      rx_valid = 1'b0;
      repeat (3) @(negedge clk);
    end
    wait_ready(cyc);
    check(periph_reads == 10, $sformatf("ten peripheral reads, got %0d", periph_reads));
    for (int i = 0; i < 10; i++) check(mem[32'hA000 + 4 * i] == 32'h100 + 32'(i), "received words in order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
