// obi_xbar: fully connected OBI crossbar of the system bus.
//
// Every master can reach every slave in the same cycle as long as no other
// master asks for that slave, so the CPU fetching from one RAM bank while a
// DMA channel writes the other never stalls. When several masters want the
// same slave, the one with the lowest index wins (fixed priority, this
// design's choice; the reference design uses a fully connected bus but its
// arbitration is not published). The losers keep req high and are granted in
// a later cycle.
//
// Timing: request and grant in cycle t; the slave answers in cycle t+1 and the
// crossbar routes that answer back to the master it granted in cycle t, kept
// in a one-entry register per slave. A slave must therefore answer exactly one
// cycle after each grant; an assertion checks it.
module obi_xbar
  import heep_pkg::*;
#(
  parameter int unsigned NM = SYS_NM,
  parameter int unsigned NS = SYS_NS
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  obi_req_t [NM-1:0]  m_req_i,
  output obi_rsp_t [NM-1:0]  m_rsp_o,
  output obi_req_t [NS-1:0]  s_req_o,
  input  obi_rsp_t [NS-1:0]  s_rsp_i
);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = (NS > 1) ? $clog2(NS) : 1;

  logic [NM-1:0][SW-1:0] tgt;        // slave addressed by each master
  logic [NS-1:0][MW-1:0] winner;     // master granted at each slave
  logic [NS-1:0]         any_req;
  logic [NS-1:0]         pend_q;     // response expected next cycle
  logic [NS-1:0][MW-1:0] owner_q;    // master the response belongs to

  always_comb begin
    for (int m = 0; m < NM; m++) tgt[m] = SW'(sys_decode(m_req_i[m].addr));
  end

  // per-slave fixed-priority arbitration
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      any_req[s] = 1'b0;
      winner[s]  = '0;
      for (int m = NM - 1; m >= 0; m--) begin
        if (m_req_i[m].req && tgt[m] == SW'(s)) begin
          any_req[s] = 1'b1;
          winner[s]  = MW'(m);
        end
      end
      s_req_o[s]     = m_req_i[winner[s]];
      s_req_o[s].req = any_req[s];
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp_o[m] = OBI_RSP_IDLE;
      m_rsp_o[m].gnt = m_req_i[m].req && winner[tgt[m]] == MW'(m) && s_rsp_i[tgt[m]].gnt;
      for (int s = 0; s < NS; s++) begin
        if (pend_q[s] && owner_q[s] == MW'(m)) begin
          m_rsp_o[m].rvalid = s_rsp_i[s].rvalid;
          m_rsp_o[m].rdata  = s_rsp_i[s].rdata;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q  <= '0;
      owner_q <= '0;
    end else begin
      for (int s = 0; s < NS; s++) begin
        pend_q[s]  <= s_req_o[s].req && s_rsp_i[s].gnt;
        owner_q[s] <= winner[s];
      end
    end
  end

  // every slave answers exactly one cycle after a grant
  for (genvar s = 0; s < NS; s++) begin : g_chk
    a_one_cycle: assert property (@(posedge clk_i) disable iff (!rst_ni)
      pend_q[s] |-> s_rsp_i[s].rvalid)
      else $error("slave %0d did not answer one cycle after its grant", s);
    a_no_spurious: assert property (@(posedge clk_i) disable iff (!rst_ni)
      s_rsp_i[s].rvalid |-> pend_q[s])
      else $error("slave %0d answered without a grant", s);
  end

endmodule
