// xheep_pkg: types and constants shared by the platform.
//
// The platform's interconnect uses the Open Bus Interface (OBI) protocol. A
// request is an address phase (req/gnt handshake, addr, we, be, wdata); the
// response is a single rvalid pulse carrying rdata. In this implementation
// every slave raises rvalid exactly one clock cycle after it granted a
// request, which lets the bus route responses back without a response queue.
// That fixed one-cycle latency is this design's choice; the bus protocol (OBI)
// is the one the platform is built on.
//
// The address map below is also this design's choice: the platform is
// configurable and its exact map is not part of the description it follows.
package xheep_pkg;

  // ---------------------------------------------------------------- OBI types
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } obi_resp_t;

  localparam obi_req_t  OBI_REQ_IDLE  = '{req: 1'b0, we: 1'b0, be: 4'h0, addr: 32'h0, wdata: 32'h0};
  localparam obi_resp_t OBI_RESP_IDLE = '{gnt: 1'b0, rvalid: 1'b0, rdata: 32'h0};

  // --------------------------------------------------------- system address map
  localparam logic [31:0] MEM_START        = 32'h0000_0000;
  localparam logic [31:0] DEBUG_START      = 32'h1000_0000;
  localparam logic [31:0] DEBUG_SIZE       = 32'h0010_0000;
  localparam logic [31:0] AO_PERIPH_START  = 32'h2000_0000;
  localparam logic [31:0] AO_PERIPH_SIZE   = 32'h0010_0000;
  localparam logic [31:0] PERIPH_START     = 32'h3000_0000;
  localparam logic [31:0] PERIPH_SIZE      = 32'h0010_0000;
  localparam logic [31:0] EXT_SLAVE_START  = 32'h4000_0000;
  localparam logic [31:0] EXT_SLAVE_SIZE   = 32'h0100_0000;  // window of each external slave

  // Peripheral windows inside the two peripheral domains (64 KiB each).
  localparam logic [31:0] PERIPH_WINDOW    = 32'h0001_0000;
  // Always-on domain: 0 power manager, 1 fast interrupt controller, 2 DMA,
  // 3 external peripheral (XAIF peripheral interface), 4 other always-on
  // peripherals (SoC controller, boot ROM, UART, SPI, GPIO, timer).
  localparam int unsigned AO_IDX_POWER_MANAGER = 0;
  localparam int unsigned AO_IDX_FIC           = 1;
  localparam int unsigned AO_IDX_DMA           = 2;
  localparam int unsigned AO_IDX_EXT_PERIPH    = 3;
  localparam int unsigned AO_IDX_AO_OTHER      = 4;
  localparam int unsigned AO_NUM_SLOTS         = 5;
  // Switchable peripheral domain: 0 PLIC, 1 other peripherals (timer, GPIO,
  // I2C, SPI).
  localparam int unsigned P_IDX_PLIC           = 0;
  localparam int unsigned P_IDX_OTHER          = 1;
  localparam int unsigned P_NUM_SLOTS          = 2;

  // ------------------------------------------------------------ power domains
  // Control register bits of one power domain in the power manager.
  typedef struct packed {
    logic retention;   // bit 2: memory kept in its low-leakage retention state
    logic clk_gate;    // bit 1: clock gated
    logic power_off;   // bit 0: domain switched off
  } pwr_ctrl_t;

  // Signals from the power manager to one power domain.
  typedef struct packed {
    logic pwr_on;      // close the power switch
    logic iso;         // clamp the domain's outputs
    logic rst_n;       // domain reset, active low
    logic clk_en;      // clock enable (clock gate)
    logic retention;   // memory retention
  } pwr_dom_t;

  // State of one power-switch sequencer.
  typedef enum logic [2:0] {
    PS_ON, PS_ISO, PS_RST, PS_SW_OFF, PS_OFF, PS_SW_ON, PS_RST_REL, PS_ISO_REL
  } pwr_state_e;

  // Merge the byte lanes of a write, selected by be, into an old word.
  function automatic logic [31:0] sel_word(input logic [31:0] old_v, input logic [31:0] new_v,
                                           input logic [3:0] be);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = be[b] ? new_v[8*b +: 8] : old_v[8*b +: 8];
    return r;
  endfunction

endpackage
