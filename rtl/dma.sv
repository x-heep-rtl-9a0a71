// dma: the platform's direct-memory-access engine.
//
// It copies SIZE bytes, one 32-bit word at a time, from a source to a
// destination through two OBI master ports of the system bus, one that reads
// and one that writes, so a read and a write can be in flight in the same
// cycle. Words travel through a FIFO_DEPTH-entry buffer. Each pointer steps by
// its own increment, so an increment of 0 reads from or writes to a fixed
// peripheral register. For transfers to or from an external peripheral, the
// FIFO interface of the peripheral bus can pace the engine: in receive mode a
// word is read only while rx_valid_i is high, in transmit mode a word is
// written only while tx_ready_i is high, one word at a time. The end of a
// transfer raises done_o for one cycle (an interrupt to the CPU).
// That the platform has a DMA, that peripherals hand data to it through a
// FIFO interface and that it moves samples to memory follows the platform
// description; word-only transfers, the registers and the buffer are this
// design's choices.
// Registers (OBI slave, gnt with req, rvalid one cycle later):
//   0x00 SRC_PTR  0x04 DST_PTR  0x08 SIZE (bytes; writing it starts the copy)
//   0x0C STATUS (bit0 ready)  0x10 SRC_INC  0x14 DST_INC (bytes, reset 4)
//   0x18 SLOT (bit0 wait for rx_valid_i, bit1 wait for tx_ready_i)
// Throughput: one word per cycle from and to slaves that grant at once.
module dma
  import xheep_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  obi_req_t  req_i,
  output obi_resp_t resp_o,
  output obi_req_t  rd_req_o,
  input  obi_resp_t rd_resp_i,
  output obi_req_t  wr_req_o,
  input  obi_resp_t wr_resp_i,
  input  logic      rx_valid_i,
  input  logic      tx_ready_i,
  output logic      done_o
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  logic [31:0] src_q, dst_q, src_inc_q, dst_inc_q;
  logic [1:0]  slot_q;
  logic [31:0] rd_left_q, wr_left_q;          // words still to read / write
  logic        busy_q, done_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;

  // buffer
  logic [31:0]   fifo_q [FIFO_DEPTH];
  logic [PW-1:0] wptr_q, rptr_q;
  logic [CW-1:0] count_q;
  logic [CW-1:0] rd_out_q;                   // reads granted, data not back
  logic          wr_out_q;                   // a write granted, answer not back
  logic          rd_hold_q, wr_hold_q;       // a request waits for its grant

  logic rd_req, wr_req, rd_go, wr_go, push, pop;
  logic reg_wr;
  logic [2:0] reg_idx;

  assign reg_idx = req_i.addr[4:2];
  assign reg_wr  = req_i.req && req_i.we;

  // ------------------------------------------------------------ read side
  assign rd_req = rd_hold_q ||
                  (busy_q && rd_left_q != 0 && (32'(count_q) + 32'(rd_out_q)) < FIFO_DEPTH &&
                   (!slot_q[0] || (rx_valid_i && rd_out_q == 0)));
  assign rd_go  = rd_req && rd_resp_i.gnt;
  assign push   = rd_resp_i.rvalid;

  assign rd_req_o = '{req: rd_req, we: 1'b0, be: 4'hF, addr: src_q, wdata: 32'h0};

  // ------------------------------------------------------------ write side
  assign wr_req = wr_hold_q ||
                  (busy_q && wr_left_q != 0 && count_q != 0 &&
                   (!slot_q[1] || (tx_ready_i && !wr_out_q)));
  assign wr_go  = wr_req && wr_resp_i.gnt;
  assign pop    = wr_go;

  assign wr_req_o = '{req: wr_req, we: 1'b1, be: 4'hF, addr: dst_q, wdata: fifo_q[rptr_q]};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q     <= '0;
      dst_q     <= '0;
      src_inc_q <= 32'd4;
      dst_inc_q <= 32'd4;
      slot_q    <= '0;
      rd_left_q <= '0;
      wr_left_q <= '0;
      busy_q    <= 1'b0;
      done_q    <= 1'b0;
      wptr_q    <= '0;
      rptr_q    <= '0;
      count_q   <= '0;
      rd_out_q  <= '0;
      wr_out_q  <= 1'b0;
      rd_hold_q <= 1'b0;
      wr_hold_q <= 1'b0;
      rvalid_q  <= 1'b0;
      rdata_q   <= '0;
    end else begin
      done_q    <= 1'b0;
      rd_hold_q <= rd_req && !rd_resp_i.gnt;
      wr_hold_q <= wr_req && !wr_resp_i.gnt;

      // configuration (ignored while a copy runs, except reading)
      if (reg_wr && !busy_q) begin
        unique case (reg_idx)
          3'd0: src_q     <= sel_word(src_q, req_i.wdata, req_i.be);
          3'd1: dst_q     <= sel_word(dst_q, req_i.wdata, req_i.be);
          3'd2: begin
            rd_left_q <= req_i.wdata >> 2;
            wr_left_q <= req_i.wdata >> 2;
            busy_q    <= (req_i.wdata >> 2) != 0;
          end
          3'd4: src_inc_q <= sel_word(src_inc_q, req_i.wdata, req_i.be);
          3'd5: dst_inc_q <= sel_word(dst_inc_q, req_i.wdata, req_i.be);
          3'd6: slot_q    <= req_i.wdata[1:0];
          default: ;
        endcase
      end

      if (rd_go) begin
        src_q     <= src_q + src_inc_q;
        rd_left_q <= rd_left_q - 1;
      end
      if (wr_go) begin
        dst_q     <= dst_q + dst_inc_q;
        wr_left_q <= wr_left_q - 1;
      end
      rd_out_q <= rd_out_q + CW'(rd_go) - CW'(push);
      if (wr_go)                       wr_out_q <= 1'b1;
      else if (wr_resp_i.rvalid)       wr_out_q <= 1'b0;

      if (push) begin
        fifo_q[wptr_q] <= rd_resp_i.rdata;
        wptr_q <= (wptr_q == PW'(FIFO_DEPTH - 1)) ? '0 : wptr_q + 1'b1;
      end
      if (pop) rptr_q <= (rptr_q == PW'(FIFO_DEPTH - 1)) ? '0 : rptr_q + 1'b1;
      count_q <= count_q + CW'(push) - CW'(pop);

      // finished when the last write has been answered
      if (busy_q && wr_left_q == 0 && !wr_out_q) begin
        busy_q <= 1'b0;
        done_q <= 1'b1;
      end

      rvalid_q <= req_i.req;
      if (req_i.req && !req_i.we) begin
        unique case (reg_idx)
          3'd0:    rdata_q <= src_q;
          3'd1:    rdata_q <= dst_q;
          3'd2:    rdata_q <= wr_left_q << 2;
          3'd3:    rdata_q <= {31'h0, !busy_q};
          3'd4:    rdata_q <= src_inc_q;
          3'd5:    rdata_q <= dst_inc_q;
          3'd6:    rdata_q <= {30'h0, slot_q};
          default: rdata_q <= '0;
        endcase
      end
    end
  end

  assign done_o        = done_q;
  assign resp_o.gnt    = req_i.req;
  assign resp_o.rvalid = rvalid_q;
  assign resp_o.rdata  = rdata_q;

  // The buffer never overflows or underflows.
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    32'(count_q) + 32'(rd_out_q) <= FIFO_DEPTH);

endmodule
