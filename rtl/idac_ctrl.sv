// idac_ctrl: register interface and update timer of the two current DACs.
//
// Both iDACs take their 8-bit codes from one 16-bit CURRENT register (bits
// 7:0 drive iDAC1, bits 15:8 iDAC2) and always change together, as in the
// paper. Two update modes, also from the paper:
//  - on demand (CTRL.timer_en = 0): a write to CURRENT reaches the iDACs in
//    the next cycle, for DC levels and stimulation pulses;
//  - periodic (CTRL.timer_en = 1): writes to CURRENT only stage the value;
//    an integrated timer copies it to the iDACs every PERIOD clock cycles and
//    at the same tick pulses dma_slot_o, so a DMA channel can stream the next
//    sample of an arbitrary waveform from memory.
// refresh_o pulses in the cycle the codes change. The calibration codes of
// the two current-mirror reference branches are plain registers. The code
// byte order, calibration width and register map are this design's choice.
//
// Registers (byte offsets): 0x00 CTRL {timer_en, en2, en1}; 0x04 CAL1;
// 0x08 CAL2; 0x0C CURRENT (staged value); 0x10 PERIOD (cycles, >= 1);
// 0x14 CODES (read-only, codes now driven). OBI answers one cycle after grant.
module idac_ctrl
  import heep_pkg::*;
#(
  parameter int unsigned CODE_W = 8,
  parameter int unsigned CAL_W  = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  obi_req_t          reg_req_i,
  output obi_rsp_t          reg_rsp_o,
  output logic              idac1_en_o,
  output logic              idac2_en_o,
  output logic [CAL_W-1:0]  idac1_cal_o,
  output logic [CAL_W-1:0]  idac2_cal_o,
  output logic [CODE_W-1:0] idac1_code_o,
  output logic [CODE_W-1:0] idac2_code_o,
  output logic              refresh_o,
  output logic              dma_slot_o
);
  logic [2:0]          ctrl_q;
  logic [CAL_W-1:0]    cal1_q, cal2_q;
  logic [2*CODE_W-1:0] cur_q;     // staged codes
  logic [2*CODE_W-1:0] codes_q;   // codes at the iDACs
  logic [31:0]         period_q;
  logic [31:0]         cnt_q;
  logic                tick;
  logic                wr, rd;
  logic [7:0]          off;
  logic [31:0]         rval;
  logic                cur_wr;
  logic [31:0]         rdata_q;
  logic                rvalid_q;

  assign wr   = reg_req_i.req && reg_req_i.we;
  assign rd   = reg_req_i.req && !reg_req_i.we;
  assign off  = reg_req_i.addr[7:0];
  assign cur_wr = wr && off == 8'h0C;

  always_comb begin
    rval = '0;
    unique case (off)
      8'h00: rval = 32'(ctrl_q);
      8'h04: rval = 32'(cal1_q);
      8'h08: rval = 32'(cal2_q);
      8'h0C: rval = 32'(cur_q);
      8'h10: rval = period_q;
      8'h14: rval = 32'(codes_q);
      default: rval = '0;
    endcase
  end

  assign tick = ctrl_q[2] && cnt_q == 32'd0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctrl_q    <= '0;
      cal1_q    <= '0;
      cal2_q    <= '0;
      cur_q     <= '0;
      codes_q   <= '0;
      period_q  <= 32'd1;
      cnt_q     <= '0;
      refresh_o <= 1'b0;
      dma_slot_o <= 1'b0;
      rdata_q   <= '0;
      rvalid_q  <= 1'b0;
    end else begin
      refresh_o  <= 1'b0;
      dma_slot_o <= 1'b0;
      rvalid_q   <= reg_req_i.req;
      if (rd) rdata_q <= rval;
      if (wr) begin
        unique case (off)
          8'h00: ctrl_q   <= 3'(apply_be(32'(ctrl_q), reg_req_i.wdata, reg_req_i.be));
          8'h04: cal1_q   <= CAL_W'(apply_be(32'(cal1_q), reg_req_i.wdata, reg_req_i.be));
          8'h08: cal2_q   <= CAL_W'(apply_be(32'(cal2_q), reg_req_i.wdata, reg_req_i.be));
          8'h0C: cur_q    <= (2*CODE_W)'(apply_be(32'(cur_q), reg_req_i.wdata, reg_req_i.be));
          8'h10: period_q <= apply_be(period_q, reg_req_i.wdata, reg_req_i.be);
          default: ;
        endcase
      end
      // timer: counts PERIOD cycles between ticks
      if (!ctrl_q[2])  cnt_q <= period_q - 32'd1;
      else if (tick)   cnt_q <= period_q - 32'd1;
      else             cnt_q <= cnt_q - 32'd1;
      // code update: on each tick in periodic mode, on each write otherwise
      if (tick) begin
        codes_q    <= cur_q;
        refresh_o  <= 1'b1;
        dma_slot_o <= 1'b1;
      end else if (!ctrl_q[2] && cur_wr) begin
        codes_q   <= (2*CODE_W)'(apply_be(32'(cur_q), reg_req_i.wdata, reg_req_i.be));
        refresh_o <= 1'b1;
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

  assign idac1_en_o   = ctrl_q[0];
  assign idac2_en_o   = ctrl_q[1];
  assign idac1_cal_o  = cal1_q;
  assign idac2_cal_o  = cal2_q;
  assign idac1_code_o = codes_q[CODE_W-1:0];
  assign idac2_code_o = codes_q[2*CODE_W-1:CODE_W];

endmodule
