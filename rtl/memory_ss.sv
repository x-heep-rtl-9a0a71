// memory_ss: the platform's main memory, NUM_BANKS SRAM banks side by side.
//
// Each bank has its own OBI slave port on the system bus and its own power
// domain signals. The bus decides which bank an address belongs to; this
// block turns the system address into the word address inside that bank,
// according to the addressing mode:
//   contiguous  (INTERLEAVED = 0): bank k holds bytes [k*SIZE, (k+1)*SIZE);
//                                  word = addr[2 +: log2(words per bank)]
//   interleaved (INTERLEAVED = 1): consecutive words rotate over the banks;
//                                  word = addr >> (2 + log2(NUM_BANKS))
// The number and size of banks and the two addressing modes follow the
// platform description; the main configuration is 8 banks of 32 KiB in
// contiguous mode. The address arithmetic is this design's own.
// Timing: that of sram_bank (gnt in the request cycle, rvalid one cycle on).
module memory_ss
  import xheep_pkg::*;
#(
  parameter int unsigned NUM_BANKS       = 8,
  parameter int unsigned BANK_SIZE_BYTES = 32768,
  parameter bit          INTERLEAVED     = 1'b0
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  obi_req_t              req_i       [NUM_BANKS],
  output obi_resp_t             resp_o      [NUM_BANKS],
  input  logic [NUM_BANKS-1:0]  clk_en_i,
  input  logic [NUM_BANKS-1:0]  retention_i,
  input  logic [NUM_BANKS-1:0]  pwr_on_i
);
  localparam int unsigned WORDS   = BANK_SIZE_BYTES / 4;
  localparam int unsigned WAW     = $clog2(WORDS);
  localparam int unsigned BANK_W  = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 0;
  localparam int unsigned SHIFT   = INTERLEAVED ? 2 + BANK_W : 2;

  for (genvar k = 0; k < NUM_BANKS; k++) begin : g_bank
    logic [WAW-1:0] word_addr;
    assign word_addr = req_i[k].addr[SHIFT +: WAW];

    sram_bank #(.SIZE_BYTES(BANK_SIZE_BYTES)) u_bank (
      .clk_i,
      .rst_ni,
      .req_i       (req_i[k]),
      .word_addr_i (word_addr),
      .resp_o      (resp_o[k]),
      .clk_en_i    (clk_en_i[k]),
      .retention_i (retention_i[k]),
      .pwr_on_i    (pwr_on_i[k])
    );
  end

endmodule
