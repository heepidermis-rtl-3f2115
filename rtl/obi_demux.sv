// obi_demux: peripheral bus that splits one OBI port into register windows.
//
// The window number is the address field above the WIN_BITS-byte offset
// (addr[WIN_BITS +: 8]). Window i < N goes to slave i. Windows beyond the
// last slave either go to the last slave (DEFAULT_LAST = 1, used where the
// rest of a bus is served outside this design) or are answered locally with
// read data 0 and writes dropped. The paper shows this bus as the link between
// the system bus and the front-end controllers; window size and decode are
// this design's choice.
//
// Timing: the request passes through combinationally; every slave answers one
// cycle after its grant, and the answers are ORed (only one is valid at a time).
module obi_demux
  import heep_pkg::*;
#(
  parameter int unsigned N            = EXT_N,
  parameter int unsigned WIN_BITS_P   = WIN_BITS,
  parameter bit          DEFAULT_LAST = 1'b0
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  obi_req_t          req_i,
  output obi_rsp_t          rsp_o,
  output obi_req_t [N-1:0]  s_req_o,
  input  obi_rsp_t [N-1:0]  s_rsp_i
);
  logic [7:0] win;
  logic       hit;
  logic [7:0] sel;
  logic       dummy_q;

  assign win = req_i.addr[WIN_BITS_P +: 8];

  always_comb begin
    hit = 1'b1;
    sel = win;
    if (win >= 8'(N)) begin
      if (DEFAULT_LAST) sel = 8'(N - 1);
      else              hit = 1'b0;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      s_req_o[i]     = req_i;
      s_req_o[i].req = req_i.req && hit && sel == 8'(i);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) dummy_q <= 1'b0;
    else         dummy_q <= req_i.req && !hit;
  end

  always_comb begin
    rsp_o = OBI_RSP_IDLE;
    rsp_o.gnt    = !hit;
    rsp_o.rvalid = dummy_q;
    for (int i = 0; i < N; i++) begin
      if (hit && sel == 8'(i)) rsp_o.gnt = s_rsp_i[i].gnt;
      rsp_o.rvalid = rsp_o.rvalid | s_rsp_i[i].rvalid;
      if (s_rsp_i[i].rvalid) rsp_o.rdata = rsp_o.rdata | s_rsp_i[i].rdata;
    end
  end

endmodule
