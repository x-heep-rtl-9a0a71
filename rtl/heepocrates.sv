// heepocrates: the platform configured for ultra-low-power healthcare
// processing, with its accelerator interface brought out to ports.
//
// Inside: the system bus (fully connected), eight 32 KiB SRAM banks mapped
// contiguously, the always-on peripheral domain (power manager, fast
// interrupt controller, DMA, and a window for the external peripheral
// interface) and the switchable peripheral domain (PLIC). The CPU, the debug
// unit, the other general-purpose peripherals, the accelerators and the
// power switches are separate designs that connect to the ports:
//  - CPU: instruction and data OBI master ports, external and fast interrupt
//    outputs, a sleep input, and its power-domain bundle (dom_pwr_o[0]);
//  - debug unit: one OBI master and one OBI slave port;
//  - accelerator interface: NUM_EXT_MASTERS OBI masters, NUM_EXT_SLAVES OBI
//    slaves, one peripheral-bus port with DMA pacing signals (FIFO
//    interface), NUM_EXT_IRQ interrupt lines into the PLIC, and one power
//    bundle per external domain. With the defaults these fit a CGRA (four
//    masters, a configuration slave, a context-memory slave, an
//    end-of-computation interrupt, two power domains) and an IMC macro (one
//    slave, one power domain); the frequency-locked loop sits on the
//    peripheral-bus port.
// Power domains (index into dom_pwr_o and pwr_sw_ack_i): 0 CPU, 1 peripheral
// domain, 2..9 banks 0..7, 10..12 external (CGRA logic, CGRA context memory,
// IMC). Banks 0 and 1 are always on; the others, the CPU, the peripheral
// domain and the external domains (11 in all) can be switched off. A domain
// under isolation has its bus requests held back and its responses and
// interrupts clamped to zero, which is the job of isolation cells in silicon;
// a clock-gated or powered-down slave stalls its masters by withholding gnt.
// Clock-gating is expressed as clock enables; a synthesis flow maps them to
// gating cells. The block list, the configuration and the domain set follow
// the platform description; the address map, port grouping and the isolation
// and stall behaviour are this design's choices (see xheep_pkg for the map).
module heepocrates
  import xheep_pkg::*;
#(
  parameter int unsigned NUM_BANKS       = 8,
  parameter int unsigned BANK_SIZE_BYTES = 32768,
  parameter bit          INTERLEAVED     = 1'b0,
  parameter bit          FULLY_CONNECTED = 1'b1,
  parameter int unsigned NUM_AO_BANKS    = 2,
  parameter int unsigned NUM_EXT_MASTERS = 4,
  parameter int unsigned NUM_EXT_SLAVES  = 3,
  parameter int unsigned NUM_EXT_DOMAINS = 3,
  parameter int unsigned NUM_EXT_IRQ     = 1,
  parameter logic [NUM_EXT_DOMAINS-1:0] EXT_RET_MASK = 3'b010,
  // external power domain of each external master / slave
  parameter int unsigned EXT_MST_DOM [NUM_EXT_MASTERS] = '{0, 0, 0, 0},
  parameter int unsigned EXT_SLV_DOM [NUM_EXT_SLAVES]  = '{0, 1, 2},
  localparam int unsigned NUM_DOMAINS    = 2 + NUM_BANKS + NUM_EXT_DOMAINS,
  localparam int unsigned PLIC_SRC       = 32,
  localparam int unsigned NUM_PERIPH_IRQ = PLIC_SRC - 1 - NUM_EXT_IRQ,
  localparam int unsigned NUM_FAST       = 16
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // CPU
  input  obi_req_t                  cpu_instr_req_i,
  output obi_resp_t                 cpu_instr_resp_o,
  input  obi_req_t                  cpu_data_req_i,
  output obi_resp_t                 cpu_data_resp_o,
  input  logic                      cpu_sleep_i,
  output logic                      cpu_irq_external_o,
  output logic [NUM_FAST-1:0]       cpu_irq_fast_o,
  // debug unit
  input  obi_req_t                  dbg_mst_req_i,
  output obi_resp_t                 dbg_mst_resp_o,
  output obi_req_t                  dbg_slv_req_o,
  input  obi_resp_t                 dbg_slv_resp_i,
  // accelerator interface: memory-mapped ports
  input  obi_req_t                  ext_mst_req_i   [NUM_EXT_MASTERS],
  output obi_resp_t                 ext_mst_resp_o  [NUM_EXT_MASTERS],
  output obi_req_t                  ext_slv_req_o   [NUM_EXT_SLAVES],
  input  obi_resp_t                 ext_slv_resp_i  [NUM_EXT_SLAVES],
  output obi_req_t                  ext_periph_req_o,
  input  obi_resp_t                 ext_periph_resp_i,
  input  logic                      dma_rx_valid_i,
  input  logic                      dma_tx_ready_i,
  // accelerator interface: interrupts
  input  logic [NUM_EXT_IRQ-1:0]    ext_irq_i,
  // other always-on and switchable peripherals
  output obi_req_t                  ao_other_req_o,
  input  obi_resp_t                 ao_other_resp_i,
  input  logic [NUM_FAST-2:0]       ao_irq_i,
  output obi_req_t                  periph_other_req_o,
  input  obi_resp_t                 periph_other_resp_i,
  input  logic [NUM_PERIPH_IRQ-1:0] periph_irq_i,
  // power control of every domain, and the power switches' acknowledges
  output pwr_dom_t                  dom_pwr_o       [NUM_DOMAINS],
  input  logic [NUM_DOMAINS-1:0]    pwr_sw_ack_i
);
  localparam int unsigned NUM_MASTERS = 5 + NUM_EXT_MASTERS;
  localparam int unsigned NUM_SLAVES  = NUM_BANKS + 3 + NUM_EXT_SLAVES;
  localparam int unsigned D_CPU       = 0;
  localparam int unsigned D_PERIPH    = 1;
  localparam int unsigned D_BANK0     = 2;
  localparam int unsigned D_EXT0      = 2 + NUM_BANKS;
  localparam int unsigned S_DEBUG     = NUM_BANKS;
  localparam int unsigned S_AO        = NUM_BANKS + 1;
  localparam int unsigned S_PERIPH    = NUM_BANKS + 2;
  localparam int unsigned S_EXT0      = NUM_BANKS + 3;

  obi_req_t  mst_req  [NUM_MASTERS];
  obi_resp_t mst_resp [NUM_MASTERS];
  obi_req_t  slv_req  [NUM_SLAVES];
  obi_resp_t slv_resp [NUM_SLAVES];
  pwr_dom_t  dom      [NUM_DOMAINS];

  obi_req_t  dma_rd_req, dma_wr_req;
  obi_resp_t dma_rd_resp, dma_wr_resp;
  logic      dma_done;
  logic      plic_irq;
  logic [NUM_FAST-1:0] fic_irq;

  // Requests of an isolated domain are held back.
  function automatic obi_req_t iso_req(input obi_req_t r, input logic iso);
    obi_req_t o;
    o = r;
    if (iso) o.req = 1'b0;
    return o;
  endfunction

  // ------------------------------------------------------------- bus masters
  assign mst_req[0] = iso_req(cpu_instr_req_i, dom[D_CPU].iso);
  assign mst_req[1] = iso_req(cpu_data_req_i,  dom[D_CPU].iso);
  assign mst_req[2] = dbg_mst_req_i;
  assign mst_req[3] = dma_rd_req;
  assign mst_req[4] = dma_wr_req;
  assign cpu_instr_resp_o = mst_resp[0];
  assign cpu_data_resp_o  = mst_resp[1];
  assign dbg_mst_resp_o   = mst_resp[2];
  assign dma_rd_resp      = mst_resp[3];
  assign dma_wr_resp      = mst_resp[4];
  for (genvar i = 0; i < NUM_EXT_MASTERS; i++) begin : g_ext_mst
    assign mst_req[5 + i]    = iso_req(ext_mst_req_i[i], dom[D_EXT0 + EXT_MST_DOM[i]].iso);
    assign ext_mst_resp_o[i] = mst_resp[5 + i];
  end

  system_bus #(
    .NUM_MASTERS     (NUM_MASTERS),
    .NUM_BANKS       (NUM_BANKS),
    .BANK_SIZE_BYTES (BANK_SIZE_BYTES),
    .INTERLEAVED     (INTERLEAVED),
    .NUM_EXT_SLAVES  (NUM_EXT_SLAVES),
    .FULLY_CONNECTED (FULLY_CONNECTED)
  ) u_bus (
    .clk_i, .rst_ni,
    .mst_req_i  (mst_req),
    .mst_resp_o (mst_resp),
    .slv_req_o  (slv_req),
    .slv_resp_i (slv_resp)
  );

  // ------------------------------------------------------------------ memory
  obi_req_t             bank_req  [NUM_BANKS];
  obi_resp_t            bank_resp [NUM_BANKS];
  logic [NUM_BANKS-1:0] bank_clk_en, bank_ret, bank_on;

  for (genvar k = 0; k < NUM_BANKS; k++) begin : g_bank
    assign bank_req[k]    = slv_req[k];
    assign slv_resp[k]    = bank_resp[k];
    assign bank_clk_en[k] = dom[D_BANK0 + k].clk_en;
    assign bank_ret[k]    = dom[D_BANK0 + k].retention;
    assign bank_on[k]     = dom[D_BANK0 + k].pwr_on && !dom[D_BANK0 + k].iso;
  end

  memory_ss #(
    .NUM_BANKS       (NUM_BANKS),
    .BANK_SIZE_BYTES (BANK_SIZE_BYTES),
    .INTERLEAVED     (INTERLEAVED)
  ) u_mem (
    .clk_i, .rst_ni,
    .req_i       (bank_req),
    .resp_o      (bank_resp),
    .clk_en_i    (bank_clk_en),
    .retention_i (bank_ret),
    .pwr_on_i    (bank_on)
  );

  // -------------------------------------------------------------- debug slave
  assign dbg_slv_req_o     = slv_req[S_DEBUG];
  assign slv_resp[S_DEBUG] = dbg_slv_resp_i;

  // --------------------------------------------------- always-on peripherals
  obi_req_t  ao_req  [AO_NUM_SLOTS];
  obi_resp_t ao_resp [AO_NUM_SLOTS];

  periph_demux #(
    .NUM_SLOTS    (AO_NUM_SLOTS),
    .WINDOW_BYTES (PERIPH_WINDOW)
  ) u_ao_bus (
    .clk_i, .rst_ni,
    .req_i       (slv_req[S_AO]),
    .resp_o      (slv_resp[S_AO]),
    .slot_req_o  (ao_req),
    .slot_resp_i (ao_resp)
  );

  power_manager #(
    .NUM_BANKS       (NUM_BANKS),
    .NUM_AO_BANKS    (NUM_AO_BANKS),
    .NUM_EXT_DOMAINS (NUM_EXT_DOMAINS),
    .EXT_RET_MASK    (EXT_RET_MASK)
  ) u_power_manager (
    .clk_i, .rst_ni,
    .req_i        (ao_req[AO_IDX_POWER_MANAGER]),
    .resp_o       (ao_resp[AO_IDX_POWER_MANAGER]),
    .core_sleep_i (cpu_sleep_i),
    .wakeup_i     (plic_irq || (|fic_irq)),
    .dom_o        (dom),
    .sw_ack_i     (pwr_sw_ack_i)
  );

  fast_intr_ctrl #(.NUM_LINES(NUM_FAST)) u_fic (
    .clk_i, .rst_ni,
    .req_i  (ao_req[AO_IDX_FIC]),
    .resp_o (ao_resp[AO_IDX_FIC]),
    .intr_i ({ao_irq_i, dma_done}),
    .irq_o  (fic_irq)
  );

  dma u_dma (
    .clk_i, .rst_ni,
    .req_i      (ao_req[AO_IDX_DMA]),
    .resp_o     (ao_resp[AO_IDX_DMA]),
    .rd_req_o   (dma_rd_req),
    .rd_resp_i  (dma_rd_resp),
    .wr_req_o   (dma_wr_req),
    .wr_resp_i  (dma_wr_resp),
    .rx_valid_i (dma_rx_valid_i),
    .tx_ready_i (dma_tx_ready_i),
    .done_o     (dma_done)
  );

  assign ext_periph_req_o                = ao_req[AO_IDX_EXT_PERIPH];
  assign ao_resp[AO_IDX_EXT_PERIPH]      = ext_periph_resp_i;
  assign ao_other_req_o                  = ao_req[AO_IDX_AO_OTHER];
  assign ao_resp[AO_IDX_AO_OTHER]        = ao_other_resp_i;

  // ------------------------------------------------ switchable peripherals
  obi_req_t  p_req  [P_NUM_SLOTS];
  obi_resp_t p_resp [P_NUM_SLOTS];
  obi_req_t  periph_req;
  obi_resp_t periph_resp;
  logic      periph_live, plic_irq_raw;

  // The domain answers only while powered, out of isolation and clocked.
  assign periph_live = !dom[D_PERIPH].iso && dom[D_PERIPH].clk_en;
  assign periph_req  = iso_req(slv_req[S_PERIPH], !periph_live);
  assign slv_resp[S_PERIPH] = dom[D_PERIPH].iso ? OBI_RESP_IDLE : periph_resp;

  periph_demux #(
    .NUM_SLOTS    (P_NUM_SLOTS),
    .WINDOW_BYTES (PERIPH_WINDOW)
  ) u_periph_bus (
    .clk_i,
    .rst_ni      (rst_ni && dom[D_PERIPH].rst_n),
    .req_i       (periph_req),
    .resp_o      (periph_resp),
    .slot_req_o  (p_req),
    .slot_resp_i (p_resp)
  );

  plic #(.NUM_SRC(PLIC_SRC)) u_plic (
    .clk_i,
    .rst_ni   (rst_ni && dom[D_PERIPH].rst_n),
    .req_i    (p_req[P_IDX_PLIC]),
    .resp_o   (p_resp[P_IDX_PLIC]),
    .src_i    ({periph_irq_i, ext_irq_i, 1'b0}),
    .irq_o    (plic_irq_raw),
    .irq_id_o ()
  );
  assign plic_irq = plic_irq_raw && !dom[D_PERIPH].iso;

  assign periph_other_req_o   = p_req[P_IDX_OTHER];
  assign p_resp[P_IDX_OTHER]  = periph_other_resp_i;

  // ------------------------------------------------------- external slaves
  for (genvar i = 0; i < NUM_EXT_SLAVES; i++) begin : g_ext_slv
    logic iso;
    assign iso                 = dom[D_EXT0 + EXT_SLV_DOM[i]].iso;
    assign ext_slv_req_o[i]    = iso_req(slv_req[S_EXT0 + i], iso);
    assign slv_resp[S_EXT0 + i] = iso ? OBI_RESP_IDLE : ext_slv_resp_i[i];
  end

  // ---------------------------------------------------------------- outputs
  assign cpu_irq_external_o = plic_irq;
  assign cpu_irq_fast_o     = fic_irq;
  for (genvar d = 0; d < NUM_DOMAINS; d++) begin : g_dom
    assign dom_pwr_o[d] = dom[d];
  end

endmodule
