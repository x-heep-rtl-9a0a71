// tb_power_manager: self-checking test of the power manager.
// A power-switch model acknowledges two cycles after being driven. The test
// checks which strategies each domain accepts, the order of the switch-off
// steps (isolation, then reset, then switch) and its reverse at switch-on,
// the status registers, clock-gate and retention outputs, and the CPU rule:
// switched off only while sleeping, back on at a wake-up request.
`include "tb/tb_obi.svh"
module tb_power_manager;
  import xheep_pkg::*;
  localparam int unsigned NB = 8, ND = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  obi_req_t  req = OBI_REQ_IDLE;
  obi_resp_t resp;
  logic sleep = 0, wake = 0;
  pwr_dom_t dom [ND];
  logic [ND-1:0] ack, ack_d1;

  power_manager #(.NUM_BANKS(NB), .NUM_AO_BANKS(2), .NUM_EXT_DOMAINS(3), .EXT_RET_MASK(3'b010)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .resp_o(resp), .core_sleep_i(sleep), .wakeup_i(wake),
    .dom_o(dom), .sw_ack_i(ack));

  // power switches: acknowledge two cycles after the command
  always_ff @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin ack_d1[d] <= dom[d].pwr_on; ack[d] <= ack_d1[d]; end
  end

  `TB_OBI_MASTER(acc, req, resp)

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // cycle at which each control of a domain last changed
  int t_iso [ND], t_rst [ND], t_sw [ND], cyc = 0;
  pwr_dom_t prev [ND];
  always @(posedge clk) begin
    cyc++;
    for (int d = 0; d < ND; d++) begin
      if (dom[d].iso != prev[d].iso)       t_iso[d] = cyc;
      if (dom[d].rst_n != prev[d].rst_n)   t_rst[d] = cyc;
      if (dom[d].pwr_on != prev[d].pwr_on) t_sw[d] = cyc;
      prev[d] = dom[d];
    end
  end

  function automatic logic [2:0] caps(int d);
    if (d < 2) return 3'b011;
    if (d < 4) return 3'b110;
    if (d < 2 + NB) return 3'b111;
    return (d == 2 + NB + 1) ? 3'b111 : 3'b011;
  endfunction

  task automatic set_ctrl(int d, logic [2:0] v);
    logic [31:0] r; int wc;
    acc(1'b1, 32'(4 * d), 32'(v), 4'hF, r, wc);
  endtask
  task automatic get(input logic [31:0] a, output logic [31:0] r);
    int wc;
    acc(1'b0, a, 0, 4'hF, r, wc);
  endtask

  initial begin
    logic [31:0] r;
    int doms[4] = '{1, 7, 12, 11};
    for (int d = 0; d < ND; d++) begin t_iso[d] = 0; t_rst[d] = 0; t_sw[d] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    // what each domain accepts
    for (int d = 0; d < ND; d++) begin
      set_ctrl(d, 3'b110);     // clock gate + retention, no power-off yet
      get(32'(4 * d), r);
      check(r[2:0] == (3'b110 & caps(d)), $sformatf("domain %0d ctrl %b want %b", d, r[2:0], 3'b110 & caps(d)));
      check(dom[d].clk_en == 1'b0 && dom[d].retention == caps(d)[2], $sformatf("domain %0d clk_en/retention", d));
      set_ctrl(d, 3'b000);
      check(dom[d].clk_en && !dom[d].retention, "clock back, retention off");
    end
    // always-on bank ignores power-off
    set_ctrl(2, 3'b001);
    repeat (10) @(negedge clk);
    check(dom[2].pwr_on && !dom[2].iso && dom[2].rst_n, "always-on bank stays powered");
    // switch domains off and on again; check the step order
    foreach (doms[i]) begin
      int d; d = doms[i];
      set_ctrl(d, 3'b001);
      repeat (10) @(negedge clk);
      check(!dom[d].pwr_on && dom[d].iso && !dom[d].rst_n, $sformatf("domain %0d off", d));
      check(t_iso[d] < t_rst[d] && t_rst[d] < t_sw[d], $sformatf("domain %0d off order iso %0d rst %0d sw %0d", d, t_iso[d], t_rst[d], t_sw[d]));
      get(32'h80 + 32'(4 * d), r);
      check(r[1:0] == 2'b10, "status off");
      set_ctrl(d, 3'b000);
      repeat (10) @(negedge clk);
      check(dom[d].pwr_on && !dom[d].iso && dom[d].rst_n, $sformatf("domain %0d on", d));
      check(t_sw[d] < t_rst[d] && t_rst[d] < t_iso[d], $sformatf("domain %0d on order", d));
      check(t_rst[d] - t_sw[d] >= 2, "reset released only after the switch acknowledged");
      get(32'h80 + 32'(4 * d), r);
      check(r[1:0] == 2'b01, "status on");
    end
    // CPU: off only while sleeping, back on at wake-up
    set_ctrl(0, 3'b001);
    repeat (10) @(negedge clk);
    check(dom[0].pwr_on && !dom[0].iso, "awake CPU stays on");
    sleep = 1;
    repeat (10) @(negedge clk);
    check(!dom[0].pwr_on && dom[0].iso && !dom[0].rst_n, "sleeping CPU switched off");
    sleep = 0;                       // the CPU is being reset; sleep drops
    repeat (5) @(negedge clk);
    check(!dom[0].pwr_on, "CPU stays off until woken");
    wake = 1;
    @(negedge clk);
    wake = 0;
    repeat (10) @(negedge clk);
    check(dom[0].pwr_on && !dom[0].iso && dom[0].rst_n, "CPU back on after wake-up");
    get(32'h0, r);
    check(r[0] == 1'b0, "wake-up cleared the CPU power-off bit");
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
