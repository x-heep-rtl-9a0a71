// tb_memory_ss: self-checking test of the banked memory in both addressing
// modes. Every bank port is written in the same cycle with a random address
// inside that bank; the word must land at the in-bank index the addressing
// mode defines (checked inside the bank) and read back through the port.
// A clock-gated bank must stall its port while the others keep serving.
module tb_memory_ss;
  import xheep_pkg::*;
  localparam int unsigned NB_C = 8, SZ_C = 32768;   // contiguous, full size
  localparam int unsigned NB_I = 4, SZ_I = 1024;    // interleaved, small

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  obi_req_t  req_c [NB_C], req_i [NB_I];
  obi_resp_t resp_c [NB_C], resp_i [NB_I];
  logic [NB_C-1:0] clk_en_c = '1;

  memory_ss #(.NUM_BANKS(NB_C), .BANK_SIZE_BYTES(SZ_C), .INTERLEAVED(1'b0)) u_c (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req_c), .resp_o(resp_c),
    .clk_en_i(clk_en_c), .retention_i('0), .pwr_on_i('1));
  memory_ss #(.NUM_BANKS(NB_I), .BANK_SIZE_BYTES(SZ_I), .INTERLEAVED(1'b1)) u_i (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req_i), .resp_o(resp_i),
    .clk_en_i('1), .retention_i('0), .pwr_on_i('1));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] a_c [NB_C], d_c [NB_C], a_i [NB_I], d_i [NB_I];

  initial begin
    for (int k = 0; k < NB_C; k++) req_c[k] = OBI_REQ_IDLE;
    for (int k = 0; k < NB_I; k++) req_i[k] = OBI_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      // write every bank in the same cycle
      @(negedge clk);
      for (int k = 0; k < NB_C; k++) begin
        a_c[k] = k * SZ_C + 4 * $urandom_range(0, SZ_C / 4 - 1);
        d_c[k] = $urandom;
        req_c[k] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a_c[k], wdata: d_c[k]};
      end
      for (int k = 0; k < NB_I; k++) begin
        // interleaved: word w of the region lives in bank w % NB_I
        a_i[k] = 4 * (NB_I * $urandom_range(0, SZ_I / 4 - 1) + k);
        d_i[k] = $urandom;
        req_i[k] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a_i[k], wdata: d_i[k]};
      end
      #1;
      for (int k = 0; k < NB_C; k++) check(resp_c[k].gnt, "contiguous write granted");
      @(negedge clk);
      for (int k = 0; k < NB_C; k++) begin req_c[k].we = 1'b0; end
      for (int k = 0; k < NB_I; k++) begin req_i[k].we = 1'b0; end
      #1;
      for (int k = 0; k < NB_C; k++) check(resp_c[k].rvalid, "contiguous write answered");
      @(negedge clk);
      for (int k = 0; k < NB_C; k++) req_c[k].req = 1'b0;
      for (int k = 0; k < NB_I; k++) req_i[k].req = 1'b0;
      for (int k = 0; k < NB_C; k++)
        check(resp_c[k].rvalid && resp_c[k].rdata == d_c[k], $sformatf("contiguous bank %0d readback", k));
      for (int k = 0; k < NB_I; k++)
        check(resp_i[k].rvalid && resp_i[k].rdata == d_i[k], $sformatf("interleaved bank %0d readback", k));
    end
    // in-bank placement, looked at inside the banks
    check(u_c.g_bank[3].u_bank.mem[(a_c[3] - 3 * SZ_C) >> 2] == d_c[3], "contiguous placement");
    check(u_c.g_bank[7].u_bank.mem[(a_c[7] - 7 * SZ_C) >> 2] == d_c[7], "contiguous placement");
    check(u_i.g_bank[1].u_bank.mem[a_i[1] >> 4] == d_i[1], "interleaved placement");
    check(u_i.g_bank[2].u_bank.mem[a_i[2] >> 4] == d_i[2], "interleaved placement");

    // clock-gate bank 2: its port stalls, bank 5 still answers
    @(negedge clk);
    clk_en_c[2] = 1'b0;
    req_c[2] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a_c[2], wdata: 32'h0};
    req_c[5] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a_c[5], wdata: 32'h0};
    #1;
    check(!resp_c[2].gnt && resp_c[5].gnt, "gated bank stalls, other bank served");
    @(negedge clk);
    req_c[5].req = 1'b0;
    check(resp_c[5].rdata == d_c[5], "other bank data");
    clk_en_c[2] = 1'b1;
    #1;
    check(resp_c[2].gnt, "bank served after the clock returns");
    @(negedge clk);
    req_c[2].req = 1'b0;
    check(resp_c[2].rvalid && resp_c[2].rdata == d_c[2], "gated bank data after wake");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
