// tb_bus_env: one system_bus under random traffic, for tb_system_bus.
//
// NM masters issue random reads and writes, back to back, to random slaves;
// slave models grant at random and answer one cycle after the grant. Each
// master only touches addresses that carry its own index, so its expected
// read data are known from its own writes. Each slave model checks that
// every request it receives was meant for it. A second phase has master m
// stream to slave m with every slave granting at once and counts grants per
// cycle: the bus's bandwidth in words per cycle. Results come out on ports.
module tb_bus_env
  import xheep_pkg::*;
#(
  parameter bit FC = 1'b1,
  parameter bit IL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   max_grants,    // most grants seen in one cycle, phase 2
  output int   phase2_grants, // grants during phase 2
  output logic done
);
  localparam int unsigned NM = 3, NB = 2, BS = 1024, NE = 1;
  localparam int unsigned NS = NB + 3 + NE;
  localparam int unsigned N_OPS = 300;

  obi_req_t  mreq [NM];
  obi_resp_t mresp [NM];
  obi_req_t  sreq [NS];
  obi_resp_t sresp [NS];

  system_bus #(.NUM_MASTERS(NM), .NUM_BANKS(NB), .BANK_SIZE_BYTES(BS), .INTERLEAVED(IL),
               .NUM_EXT_SLAVES(NE), .FULLY_CONNECTED(FC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_resp_o(mresp),
    .slv_req_o(sreq), .slv_resp_i(sresp));

  // address of slot r of master m in slave s (s == NS means no slave)
  function automatic logic [31:0] addr_of(int s, int m, int r);
    int w;
    w = m + NM * r;                      // word index, carries the master
    if (s < NB) return IL ? 32'(4 * (s + NB * w)) : 32'(s * BS + 4 * w);
    case (s - NB)
      0: return 32'h1000_0000 + 32'(4 * w);
      1: return 32'h2000_0000 + 32'(4 * w);
      2: return 32'h3000_0000 + 32'(4 * w);
      3: return 32'h4000_0000 + 32'(4 * w);
      default: return 32'h7000_0000 + 32'(4 * w);
    endcase
  endfunction

  // ---------------------------------------------------------- slave models
  logic [31:0] smem [logic [31:0]];
  int          tgt  [logic [31:0]];
  logic [NS-1:0] gnt_en;
  logic          random_gnt;
  int c_slv = 0, f_slv = 0;

  for (genvar s = 0; s < NS; s++) begin : g_slv
    logic        rv_q;
    logic [31:0] rd_q;
    assign sresp[s].gnt    = sreq[s].req && gnt_en[s];
    assign sresp[s].rvalid = rv_q;
    assign sresp[s].rdata  = rd_q;
    // Sample the request in the second half of the cycle, where it is
    // stable, and act on it at the rising edge.
    obi_req_t smp;
    logic     smp_g;
    always @(negedge clk) begin
      #3;
      smp   = sreq[s];
      smp_g = sreq[s].req && gnt_en[s];
    end
    always @(posedge clk) begin
      rv_q <= 1'b0;
      if (rst_n && smp_g) begin
        rv_q <= 1'b1;
        c_slv++;
        if (!tgt.exists(smp.addr) || tgt[smp.addr] != s) begin
          f_slv++;
          $display("FAIL: slave %0d got address %h meant for another slave", s, smp.addr);
        end
        if (smp.we) smem[smp.addr] = smp.wdata;
        rd_q <= smem.exists(smp.addr) ? smem[smp.addr] : 32'h0;
      end
    end
  end

  always @(posedge clk) begin
    #1;
    for (int s = 0; s < NS; s++) gnt_en[s] = random_gnt ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  // --------------------------------------------------------------- masters
  int c_m [NM], f_m [NM], ops_done [NM];
  logic [31:0] model [NM][logic [31:0]];
  logic phase2;
  int grants_now;

  for (genvar m = 0; m < NM; m++) begin : g_mst
    initial begin
      logic gnt_prev;
      logic [31:0] pend_exp, pend_addr;
      int s, r;
      mreq[m] = OBI_REQ_IDLE;
      c_m[m] = 0; f_m[m] = 0; ops_done[m] = 0;
      gnt_prev = 0; pend_exp = 0; pend_addr = 0;
      @(posedge rst_n);
      forever begin
        @(negedge clk);
        // the request accepted at the last rising edge is answered now
        if (mreq[m].req && gnt_prev) begin
          pend_addr = mreq[m].addr;
          pend_exp = model[m].exists(pend_addr) ? model[m][pend_addr] : 32'h0;
          c_m[m]++;
          if (!mresp[m].rvalid || (!mreq[m].we && mresp[m].rdata != pend_exp)) begin
            f_m[m]++;
            $display("FAIL %m: master %0d addr %h rvalid %0d rdata %h want %h", m, pend_addr,
                     mresp[m].rvalid, mresp[m].rdata, pend_exp);
          end
          if (mreq[m].we) model[m][pend_addr] = mreq[m].wdata;
          mreq[m].req = 1'b0;
          ops_done[m]++;
        end
        if (!mreq[m].req && !(ops_done[m] >= N_OPS && !phase2)) begin
          s = phase2 ? m : $urandom_range(0, NS);          // NS: unmapped
          r = $urandom_range(0, 15);
          mreq[m].addr  = addr_of(s, m, r);
          mreq[m].we    = phase2 ? 1'b1 : 1'($urandom_range(0, 1));
          mreq[m].wdata = $urandom;
          mreq[m].be    = 4'hF;
          mreq[m].req   = 1'b1;
          tgt[mreq[m].addr] = s;
          if (s == NS) model[m][mreq[m].addr] = 32'h0;     // unmapped reads zero
        end
        #1;
        gnt_prev = mresp[m].gnt;
      end
    end
  end

  // unmapped writes must not be remembered: the error slave reads zero
  // (model entries for unmapped addresses are cleared after each write)
  always @(negedge clk) begin
    #2;
    for (int m = 0; m < NM; m++)
      if (mreq[m].req && tgt.exists(mreq[m].addr) && tgt[mreq[m].addr] == NS)
        model[m][mreq[m].addr] = 32'h0;
  end

  // ------------------------------------------------------------ sequencing
  initial begin
    done = 0; phase2 = 0; random_gnt = 1; max_grants = 0; phase2_grants = 0;
    @(posedge rst_n);
    wait (ops_done[0] >= N_OPS && ops_done[1] >= N_OPS && ops_done[2] >= N_OPS);
    repeat (3) @(negedge clk);
    random_gnt = 0;
    phase2 = 1;
    repeat (5) @(negedge clk);
    for (int c = 0; c < 40; c++) begin
      @(negedge clk);
      #1;
      grants_now = 0;
      for (int m = 0; m < NM; m++) grants_now += int'(mresp[m].gnt);
      phase2_grants += grants_now;
      if (grants_now > max_grants) max_grants = grants_now;
    end
    phase2 = 0;
    repeat (5) @(negedge clk);
    checks = c_slv; failures = f_slv;
    for (int m = 0; m < NM; m++) begin checks += c_m[m]; failures += f_m[m]; end
    done = 1;
  end
endmodule
