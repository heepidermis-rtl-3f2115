// refs_ctrl: calibration registers of the on-chip references.
//
// The two 400 nA current references (iREF1, iREF2) and the 0.8 V voltage
// reference (vREF) are trimmed through the register interface; this block
// holds the three trim codes and drives them to the analog side, which takes
// them over at once. The paper states that each reference can be trimmed to
// 1 %; the code width (CAL_W) and the mid-scale reset value are this design's
// choices. Registers: 0x00 IREF1_CAL, 0x04 IREF2_CAL, 0x08 VREF_CAL.
// OBI answers one cycle after the grant; writes honour byte enables.
module refs_ctrl
  import heep_pkg::*;
#(
  parameter int unsigned CAL_W = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  obi_req_t         reg_req_i,
  output obi_rsp_t         reg_rsp_o,
  output logic [CAL_W-1:0] iref1_cal_o,
  output logic [CAL_W-1:0] iref2_cal_o,
  output logic [CAL_W-1:0] vref_cal_o
);
  localparam logic [CAL_W-1:0] MID = CAL_W'(1) << (CAL_W - 1);

  logic [2:0][CAL_W-1:0] cal_q;
  logic [31:0]           rdata_q;
  logic                  rvalid_q;
  logic [1:0]            idx;

  assign idx = reg_req_i.addr[3:2];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cal_q    <= {3{MID}};
      rdata_q  <= '0;
      rvalid_q <= 1'b0;
    end else begin
      rvalid_q <= reg_req_i.req;
      if (reg_req_i.req && reg_req_i.addr[7:4] == 4'h0 && idx != 2'd3) begin
        if (reg_req_i.we) cal_q[idx] <= CAL_W'(apply_be(32'(cal_q[idx]), reg_req_i.wdata, reg_req_i.be));
        else              rdata_q    <= 32'(cal_q[idx]);
      end else if (reg_req_i.req && !reg_req_i.we) begin
        rdata_q <= '0;
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;
  assign iref1_cal_o = cal_q[0];
  assign iref2_cal_o = cal_q[1];
  assign vref_cal_o  = cal_q[2];

endmodule
