// amux_ctrl: control registers of the analog multiplexer.
//
// The chip's block diagram shows an analog multiplexer driven by an enable,
// a select and a refresh line from its own controller on the external
// peripheral bus; its function is not described further. This block holds
// the enable and the select code and pulses refresh_o for one cycle in the
// cycle after either of them changes, so the analog side can re-latch.
// Select width and refresh meaning are this design's choices.
// Registers: 0x00 CTRL {en[0]}; 0x04 SEL. OBI answers one cycle after grant.
module amux_ctrl
  import heep_pkg::*;
#(
  parameter int unsigned SEL_W = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  obi_req_t         reg_req_i,
  output obi_rsp_t         reg_rsp_o,
  output logic             en_o,
  output logic [SEL_W-1:0] sel_o,
  output logic             refresh_o
);
  logic             en_q;
  logic [SEL_W-1:0] sel_q;
  logic [31:0]      rdata_q;
  logic             rvalid_q;
  logic             wr, rd;
  logic [7:0]       off;

  assign wr  = reg_req_i.req && reg_req_i.we;
  assign rd  = reg_req_i.req && !reg_req_i.we;
  assign off = reg_req_i.addr[7:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q      <= 1'b0;
      sel_q     <= '0;
      refresh_o <= 1'b0;
      rdata_q   <= '0;
      rvalid_q  <= 1'b0;
    end else begin
      rvalid_q  <= reg_req_i.req;
      refresh_o <= 1'b0;
      if (rd) rdata_q <= (off == 8'h00) ? 32'(en_q) : (off == 8'h04) ? 32'(sel_q) : '0;
      if (wr && off == 8'h00 && reg_req_i.be[0]) begin
        en_q      <= reg_req_i.wdata[0];
        refresh_o <= reg_req_i.wdata[0] != en_q;
      end
      if (wr && off == 8'h04) begin
        sel_q     <= SEL_W'(apply_be(32'(sel_q), reg_req_i.wdata, reg_req_i.be));
        refresh_o <= SEL_W'(apply_be(32'(sel_q), reg_req_i.wdata, reg_req_i.be)) != sel_q;
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;
  assign en_o  = en_q;
  assign sel_o = sel_q;

endmodule
