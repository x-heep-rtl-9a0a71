// sram_bank: one bank of on-chip SRAM with an OBI slave port and power states.
//
// The platform's main memory is built from several such banks, each in its
// own power domain. A bank can be clock-gated, put in retention (contents
// kept, no access, lower leakage) or, for switchable banks, powered off.
// Those three states come from the platform description; how the bank
// behaves in them is this design's choice: while the bank is not fully
// active (clk_en low, retention high or pwr_on low) it withholds gnt, so a
// master that touches it stalls until software wakes the bank. Loss of
// contents at power-off is not modelled (a two-state simulator cannot show
// undefined data).
//
// Interface: OBI slave with a word address local to the bank (word_addr_i).
// Timing: gnt in the cycle of the request when active; rvalid with rdata one
// cycle later, for reads and writes alike. The array is a plain memory array
// (a synthesis or SRAM compiler maps it to a macro).
module sram_bank
  import xheep_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  obi_req_t                          req_i,
  input  logic [$clog2(SIZE_BYTES/4)-1:0]   word_addr_i,
  output obi_resp_t                         resp_o,
  // power state, from the power manager
  input  logic                              clk_en_i,
  input  logic                              retention_i,
  input  logic                              pwr_on_i
);
  localparam int unsigned WORDS = SIZE_BYTES / 4;

  logic [31:0] mem [WORDS];
  logic        active;
  logic        rvalid_q;
  logic [31:0] rdata_q;

  assign active = clk_en_i && pwr_on_i && !retention_i;

  always_ff @(posedge clk_i) begin
    if (active && req_i.req && req_i.we) begin
      for (int b = 0; b < 4; b++)
        if (req_i.be[b]) mem[word_addr_i][8*b +: 8] <= req_i.wdata[8*b +: 8];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= active && req_i.req;
      if (active && req_i.req && !req_i.we) rdata_q <= mem[word_addr_i];
    end
  end

  assign resp_o.gnt    = active && req_i.req;
  assign resp_o.rvalid = rvalid_q;
  assign resp_o.rdata  = rdata_q;

endmodule
