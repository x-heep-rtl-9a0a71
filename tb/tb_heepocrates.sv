// tb_heepocrates: end-to-end test of the platform at its default
// configuration (eight 32 KiB banks, fully connected bus, CGRA- and IMC-sized
// accelerator interface). Bus-functional models stand in for the CPU's data
// port, the debug unit, the accelerators (four master ports and three slave
// ports), the frequency-locked loop's registers, the other peripherals and
// the power switches. The test walks through the platform's mechanisms and
// counts each one; a mechanism that never happened counts as a failure:
//   memory traffic in every bank, parallel grants on the fully connected
//   bus, a bank conflict resolved by arbitration, a clock-gated bank
//   stalling its master, retention keeping data, a bank switched off and on,
//   a DMA copy ending in a fast interrupt, an accelerator interrupt through
//   the PLIC, the CPU switched off while asleep and woken by an interrupt,
//   the peripheral domain power-cycled (its registers reset), an accelerator
//   domain isolated, an unmapped access, and the accelerator peripheral port.
// Timing: 100 MHz clock; models drive at the falling edge and the CPU model
// waits for gnt and then for rvalid one cycle later. The power switches
// acknowledge two cycles after the command. The test runs with every
// parameter of the top at its default. Which mechanisms exist (banks,
// topologies, power strategies, interrupt paths, accelerator ports) follows
// the platform description; register addresses, the models and the
// sequence of steps are this test's own.
`include "tb/tb_obi.svh"
module tb_heepocrates;
  import xheep_pkg::*;
  localparam int unsigned NB = 8, BS = 32768, ND = 13;
  localparam logic [31:0] PM = 32'h2000_0000, FIC = 32'h2001_0000, DMA = 32'h2002_0000,
                          FLL = 32'h2003_0000, AOO = 32'h2004_0000, PLIC = 32'h3000_0000,
                          EXT0 = 32'h4000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  obi_req_t  cpu_req = OBI_REQ_IDLE, ins_req = OBI_REQ_IDLE, dbg_req = OBI_REQ_IDLE;
  obi_resp_t cpu_resp, ins_resp, dbg_resp;
  logic      cpu_sleep = 1'b0, irq_ext;
  logic [15:0] irq_fast;
  obi_req_t  dbgs_req;  obi_resp_t dbgs_resp;
  obi_req_t  xm_req [4]; obi_resp_t xm_resp [4];
  obi_req_t  xs_req [3]; obi_resp_t xs_resp [3];
  obi_req_t  fll_req, aoo_req, po_req; obi_resp_t fll_resp, aoo_resp, po_resp;
  logic      ext_irq = 1'b0;
  pwr_dom_t  dom [ND];
  logic [ND-1:0] ack, ack_d;

  heepocrates dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cpu_instr_req_i(ins_req), .cpu_instr_resp_o(ins_resp),
    .cpu_data_req_i(cpu_req), .cpu_data_resp_o(cpu_resp),
    .cpu_sleep_i(cpu_sleep), .cpu_irq_external_o(irq_ext), .cpu_irq_fast_o(irq_fast),
    .dbg_mst_req_i(dbg_req), .dbg_mst_resp_o(dbg_resp), .dbg_slv_req_o(dbgs_req), .dbg_slv_resp_i(dbgs_resp),
    .ext_mst_req_i(xm_req), .ext_mst_resp_o(xm_resp), .ext_slv_req_o(xs_req), .ext_slv_resp_i(xs_resp),
    .ext_periph_req_o(fll_req), .ext_periph_resp_i(fll_resp),
    .dma_rx_valid_i(1'b0), .dma_tx_ready_i(1'b0), .ext_irq_i(ext_irq),
    .ao_other_req_o(aoo_req), .ao_other_resp_i(aoo_resp), .ao_irq_i('0),
    .periph_other_req_o(po_req), .periph_other_resp_i(po_resp), .periph_irq_i('0),
    .dom_pwr_o(dom), .pwr_sw_ack_i(ack));

  // power switches acknowledge two cycles after the command
  always_ff @(posedge clk) for (int d = 0; d < ND; d++) begin ack_d[d] <= dom[d].pwr_on; ack[d] <= ack_d[d]; end

  // Register-file slave model: grants at once, answers one cycle later.
  `define REG_SLAVE(RQ, RS, NAME) \
    logic [31:0] NAME``_mem [64]; logic NAME``_rv; logic [31:0] NAME``_rd; \
    assign RS = '{gnt: RQ.req, rvalid: NAME``_rv, rdata: NAME``_rd}; \
    initial for (int i = 0; i < 64; i++) NAME``_mem[i] = 32'h0; \
    always @(posedge clk) begin \
      NAME``_rv <= rst_n && RQ.req; \
      if (RQ.req) begin \
        if (RQ.we) NAME``_mem[RQ.addr[7:2]] <= RQ.wdata; \
        NAME``_rd <= NAME``_mem[RQ.addr[7:2]]; \
      end \
    end
  `REG_SLAVE(dbgs_req, dbgs_resp, dbgm)
  `REG_SLAVE(xs_req[0], xs_resp[0], xs0)
  `REG_SLAVE(xs_req[1], xs_resp[1], xs1)
  `REG_SLAVE(xs_req[2], xs_resp[2], xs2)
  `REG_SLAVE(fll_req, fll_resp, fll)
  `REG_SLAVE(aoo_req, aoo_resp, aoo)
  `REG_SLAVE(po_req, po_resp, po)

  `TB_OBI_MASTER(cpu, cpu_req, cpu_resp)
  `TB_OBI_MASTER(dbg, dbg_req, dbg_resp)

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] r; int wc; cpu(1'b1, a, d, 4'hF, r, wc);
  endtask
  task automatic rd(input logic [31:0] a, output logic [31:0] r);
    int wc; cpu(1'b0, a, 0, 4'hF, r, wc);
  endtask

  // mechanism counters
  typedef enum int {M_MEM, M_PARALLEL, M_CONFLICT, M_GATE_STALL, M_RETENTION, M_BANK_OFF,
                    M_DMA, M_FAST_IRQ, M_PLIC_IRQ, M_CPU_SLEEP, M_PERIPH_OFF, M_EXT_ISO,
                    M_UNMAPPED, M_EXT_PERIPH, M_NUM} mech_e;
  int seen [M_NUM];
  string mname [M_NUM] = '{"memory traffic", "parallel grants", "bank conflict", "clock-gate stall",
                           "retention", "bank power cycle", "dma copy", "fast interrupt",
                           "plic interrupt", "cpu sleep/wake", "peripheral domain power cycle",
                           "accelerator isolation", "unmapped access", "accelerator peripheral port"};

  // parallel grants, watched all the time: CPU and accelerator masters
  always @(negedge clk) begin
    int g; #1; g = int'(cpu_resp.gnt);
    for (int i = 0; i < 4; i++) g += int'(xm_resp[i].gnt);
    if (g >= 2) seen[M_PARALLEL]++;
  end

  // accelerator master i streams n word writes then reads back from base
  task automatic xm_stream(input int i, input logic [31:0] base, input int n, output int errs, output int waits);
    errs = 0; waits = 0;
    for (int k = 0; k < 2 * n; k++) begin
      @(negedge clk);
      xm_req[i] = '{req: 1'b1, we: k < n, be: 4'hF, addr: base + 32'(4 * (k % n)), wdata: base ^ 32'(k % n)};
      #1;
      while (!xm_resp[i].gnt) begin @(negedge clk); #1; waits++; end
      @(negedge clk);
      xm_req[i].req = 1'b0;
      if (!xm_resp[i].rvalid || (k >= n && xm_resp[i].rdata != (base ^ 32'(k % n)))) errs++;
    end
  endtask

  initial begin
    logic [31:0] r, model [logic [31:0]];
    int wc, e [4], w [4], t0;
    for (int i = 0; i < 4; i++) xm_req[i] = OBI_REQ_IDLE;
    for (int m = 0; m < M_NUM; m++) seen[m] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // 1. memory: every bank, contiguous map
    for (int k = 0; k < NB; k++)
      for (int j = 0; j < 8; j++) begin
        logic [31:0] a; a = 32'(k * BS) + 4 * $urandom_range(0, BS / 4 - 1);
        model[a] = $urandom; wr(a, model[a]);
      end
    foreach (model[a]) begin
      rd(a, r); check(r == model[a], $sformatf("memory %h", a)); seen[M_MEM]++;
    end
    // the bank is where the contiguous map says

    // 2. accelerator masters stream into four banks in parallel with the CPU
    fork
      xm_stream(0, 32'(4 * BS), 32, e[0], w[0]);
      xm_stream(1, 32'(5 * BS), 32, e[1], w[1]);
      xm_stream(2, 32'(6 * BS), 32, e[2], w[2]);
      xm_stream(3, 32'(7 * BS), 32, e[3], w[3]);
      for (int j = 0; j < 16; j++) begin wr(32'(2 * BS) + 32'(4 * j), 32'(j)); end
    join
    for (int i = 0; i < 4; i++) check(e[i] == 0 && w[i] == 0, $sformatf("accelerator master %0d: %0d errors %0d waits", i, e[i], w[i]));

    // 3. two accelerator masters on the same bank: one waits
    fork
      xm_stream(0, 32'(4 * BS) + 32'h400, 16, e[0], w[0]);
      xm_stream(1, 32'(4 * BS) + 32'h800, 16, e[1], w[1]);
    join
    check(e[0] == 0 && e[1] == 0, "conflict data");
    if (w[0] + w[1] > 0) seen[M_CONFLICT]++;

    // 4. clock-gate bank 6: the accelerator master stalls until the debug
    //    unit (the CPU could be stalled too) restores the clock. That the
    //    address 6 * 32 KiB + 0x100 stalls also shows the contiguous map.
    wr(PM + 4 * (2 + 6), 32'h2);
    fork
      xm_stream(2, 32'(6 * BS) + 32'h100, 1, e[2], w[2]);
      begin repeat (12) @(negedge clk); dbg(1'b1, PM + 4 * (2 + 6), 32'h0, 4'hF, r, wc); end
    join
    check(e[2] == 0 && w[2] >= 10, $sformatf("gated bank stalled %0d cycles", w[2]));
    if (w[2] >= 10) seen[M_GATE_STALL]++;

    // 5. retention keeps bank 1 data
    wr(32'(1 * BS) + 32'h20, 32'hA5A5_0001);
    wr(PM + 4 * (2 + 1), 32'h4);
    repeat (20) @(negedge clk);
    wr(PM + 4 * (2 + 1), 32'h0);
    rd(32'(1 * BS) + 32'h20, r);
    check(r == 32'hA5A5_0001, "retention keeps data");
    if (r == 32'hA5A5_0001) seen[M_RETENTION]++;

    // 6. switch bank 7 off and on (status register follows)
    wr(PM + 4 * (2 + 7), 32'h1);
    repeat (10) @(negedge clk);
    rd(PM + 32'h80 + 4 * (2 + 7), r);
    check(r[1:0] == 2'b10 && !dom[2 + 7].pwr_on, "bank 7 off");
    wr(PM + 4 * (2 + 7), 32'h0);
    repeat (10) @(negedge clk);
    rd(PM + 32'h80 + 4 * (2 + 7), r);
    check(r[1:0] == 2'b01 && dom[2 + 7].pwr_on, "bank 7 on");
    wr(32'(7 * BS), 32'h7777); rd(32'(7 * BS), r);
    check(r == 32'h7777, "bank 7 usable again");
    if (r == 32'h7777) seen[M_BANK_OFF]++;

    // 7. DMA: copy 64 words from bank 0 to bank 2, done raises fast irq 0
    for (int j = 0; j < 64; j++) wr(32'h100 + 32'(4 * j), 32'hD0_0000 + 32'(j));
    wr(FIC + 8, 32'h1);
    wr(DMA + 0, 32'h100); wr(DMA + 4, 32'(2 * BS) + 32'h1000); wr(DMA + 8, 32'd256);
    t0 = 0;
    while (!irq_fast[0] && t0 < 2000) begin @(negedge clk); t0++; end
    check(irq_fast[0], "DMA done raised fast interrupt 0");
    if (irq_fast[0]) seen[M_FAST_IRQ]++;
    for (int j = 0; j < 64; j++) begin
      rd(32'(2 * BS) + 32'h1000 + 32'(4 * j), r);
      check(r == 32'hD0_0000 + 32'(j), "DMA copy data");
    end
    seen[M_DMA]++;
    wr(FIC + 4, 32'h1);
    check(!irq_fast[0], "fast interrupt cleared");

    // 8 + 9. CPU sleeps and is switched off; the accelerator's interrupt
    //        through the PLIC wakes it
    wr(PLIC + 4 * 1, 32'h3);          // priority of source 1 (accelerator)
    wr(PLIC + 32'h100, 32'h2);        // enable source 1
    wr(PM + 0, 32'h1);                // CPU off when sleeping
    @(negedge clk); cpu_sleep = 1'b1;
    repeat (10) @(negedge clk);
    check(!dom[0].pwr_on && dom[0].iso, "sleeping CPU switched off");
    cpu_sleep = 1'b0;
    repeat (5) @(negedge clk);
    ext_irq = 1'b1; @(negedge clk); ext_irq = 1'b0;
    t0 = 0;
    while (!(dom[0].pwr_on && !dom[0].iso) && t0 < 100) begin @(negedge clk); t0++; end
    check(dom[0].pwr_on && !dom[0].iso && dom[0].rst_n, "CPU woken by the accelerator interrupt");
    check(irq_ext, "PLIC interrupt to the CPU");
    if (irq_ext) seen[M_PLIC_IRQ]++;
    if (dom[0].pwr_on) seen[M_CPU_SLEEP]++;
    rd(PLIC + 32'h184, r);
    check(r == 32'd1, "claim returns the accelerator's source");
    wr(PLIC + 32'h184, 32'd1);
    check(!irq_ext, "interrupt gone after claim");

    // 10. peripheral domain power cycle: its registers come back reset
    wr(PM + 4 * 1, 32'h1);
    repeat (10) @(negedge clk);
    check(dom[1].iso && !dom[1].pwr_on, "peripheral domain off");
    wr(PM + 4 * 1, 32'h0);
    repeat (10) @(negedge clk);
    rd(PLIC + 32'h100, r);
    check(r == 32'h0, "PLIC enable reset by the power cycle");
    if (r == 32'h0) seen[M_PERIPH_OFF]++;

    // 11. accelerator logic domain (ext 0) isolated: its slave port and
    //     masters are cut off; the IMC slave (ext 2) still answers
    wr(EXT0 + 4, 32'hC0FF_EE00); rd(EXT0 + 4, r);
    check(r == 32'hC0FF_EE00, "accelerator configuration slave");
    wr(PM + 4 * 10, 32'h1);
    repeat (10) @(negedge clk);
    @(negedge clk); xm_req[0] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'h0, wdata: 32'h0};
    #1;
    check(!xm_resp[0].gnt, "isolated accelerator master held back");
    @(negedge clk); xm_req[0].req = 1'b0;
    wr(EXT0 + 32'h0200_0008, 32'h1111); rd(EXT0 + 32'h0200_0008, r);
    check(r == 32'h1111, "IMC slave still answers");
    wr(PM + 4 * 10, 32'h0);
    repeat (10) @(negedge clk);
    rd(EXT0 + 4, r);
    check(r == 32'hC0FF_EE00, "accelerator slave back");
    seen[M_EXT_ISO]++;

    // 12. unmapped address reads zero; 13. accelerator peripheral port
    rd(32'h7000_0000, r);
    check(r == 32'h0, "unmapped reads zero");
    if (r == 0) seen[M_UNMAPPED]++;
    wr(FLL + 8, 32'h0000_0042); rd(FLL + 8, r);
    check(r == 32'h42 && fll_mem[2] == 32'h42, "FLL register through the peripheral port");
    if (r == 32'h42) seen[M_EXT_PERIPH]++;
    wr(AOO + 4, 32'h55); check(aoo_mem[1] == 32'h55, "always-on peripheral window");

    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-30s happened %0d times", mname[m], seen[m]);
      check(seen[m] > 0, $sformatf("mechanism %s never happened", mname[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
