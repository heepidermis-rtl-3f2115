// dlc: digital level-crossing sub-sampler.
//
// Slowly varying signals such as skin conductance produce long runs of
// nearly equal samples. The dLC keeps only what changed: it holds a level L
// on a grid of step 2^LOG_DELTA and, for each incoming sample x,
//  - if |x - L| < 2^LOG_DELTA, discards the sample;
//  - otherwise emits one 8-bit word {dir, n}, where dir = 1 for upward,
//    n = number of whole steps crossed (1..127, saturating), and moves L by
//    n steps towards x.
// The first sample after enabling only sets L. Separately, every sample is
// compared with the LOW and HIGH thresholds: leaving that range sets the
// interrupt (used to wake the CPU to re-bias the current source); with
// CTRL.xing_irq set, every crossing does too. The paper gives the
// behaviour (thresholds, discarding small changes, 8-bit output words,
// out-of-range interrupt, direction and crossing signals); the word format,
// the power-of-two step and the register map are this design's choices.
//
// Stream interface (from the ADC-side DMA channel): in_valid_i with
// in_data_i (signed) in cycle t; out_valid_o in t+1 with out_event_o and
// out_data_o. dir_o holds the last direction and req_o pulses with each
// emitted word (the DLC_DIR and DLC_REQ pads).
// Registers: 0x00 CTRL {xing_irq_en[2], range_irq_en[1], en[0]};
// 0x04 LOG_DELTA (0..30); 0x08 LOW; 0x0C HIGH (signed); 0x10 LEVEL (ro);
// 0x14 STATUS {irq pending[0]}, write 1 to clear; 0x18 EVENTS (ro count).
module dlc
  import heep_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  obi_req_t    reg_req_i,
  output obi_rsp_t    reg_rsp_o,
  input  logic        in_valid_i,
  input  logic [31:0] in_data_i,
  output logic        out_valid_o,
  output logic        out_event_o,
  output logic [7:0]  out_data_o,
  output logic        dir_o,
  output logic        req_o,
  output logic        irq_o
);
  logic [2:0]         ctrl_q;
  logic [4:0]         logd_q;
  logic signed [31:0] low_q, high_q, level_q;
  logic               init_q;
  logic               irq_q;
  logic [31:0]        events_q;
  logic signed [32:0] diff;
  logic [32:0]        mag;
  logic [32:0]        nsteps;
  logic [6:0]         n;
  logic               up, xing, out_of_range;
  logic signed [32:0] move;
  logic               wr, rd;
  logic [7:0]         off;
  logic [31:0]        rval, rdata_q;
  logic               rvalid_q;

  assign wr  = reg_req_i.req && reg_req_i.we;
  assign rd  = reg_req_i.req && !reg_req_i.we;
  assign off = reg_req_i.addr[7:0];

  // crossing arithmetic
  always_comb begin
    diff   = 33'(signed'(in_data_i)) - 33'(level_q);
    up     = !diff[32];
    mag    = up ? diff : -diff;
    nsteps = mag >> logd_q;
    n      = (nsteps > 33'd127) ? 7'd127 : nsteps[6:0];
    xing  = init_q && nsteps != '0;
    move   = 33'(n) <<< logd_q;
    out_of_range = signed'(in_data_i) < low_q || signed'(in_data_i) > high_q;
  end

  always_comb begin
    unique case (off)
      8'h00: rval = 32'(ctrl_q);
      8'h04: rval = 32'(logd_q);
      8'h08: rval = low_q;
      8'h0C: rval = high_q;
      8'h10: rval = level_q;
      8'h14: rval = 32'(irq_q);
      8'h18: rval = events_q;
      default: rval = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctrl_q      <= '0;
      logd_q      <= '0;
      low_q       <= 32'sh8000_0000;
      high_q      <= 32'sh7FFF_FFFF;
      level_q     <= '0;
      init_q      <= 1'b0;
      irq_q       <= 1'b0;
      events_q    <= '0;
      out_valid_o <= 1'b0;
      out_event_o <= 1'b0;
      out_data_o  <= '0;
      dir_o       <= 1'b0;
      req_o       <= 1'b0;
      rdata_q     <= '0;
      rvalid_q    <= 1'b0;
    end else begin
      rvalid_q    <= reg_req_i.req;
      out_valid_o <= in_valid_i;
      out_event_o <= 1'b0;
      req_o       <= 1'b0;
      if (rd) rdata_q <= rval;
      if (wr) begin
        unique case (off)
          8'h00: begin
            ctrl_q <= 3'(apply_be(32'(ctrl_q), reg_req_i.wdata, reg_req_i.be));
            init_q <= 1'b0;   // (re)enabling restarts from the next sample
          end
          8'h04: logd_q <= (reg_req_i.wdata[4:0] > 5'd30) ? 5'd30 : reg_req_i.wdata[4:0];
          8'h08: low_q  <= apply_be(low_q, reg_req_i.wdata, reg_req_i.be);
          8'h0C: high_q <= apply_be(high_q, reg_req_i.wdata, reg_req_i.be);
          8'h14: if (reg_req_i.wdata[0]) irq_q <= 1'b0;
          default: ;
        endcase
      end
      if (in_valid_i && ctrl_q[0]) begin
        if (!init_q) begin
          level_q <= in_data_i;
          init_q  <= 1'b1;
        end else if (xing) begin
          level_q     <= up ? 32'(33'(level_q) + move) : 32'(33'(level_q) - move);
          out_event_o <= 1'b1;
          out_data_o  <= {up, n};
          dir_o       <= up;
          req_o       <= 1'b1;
          events_q    <= events_q + 32'd1;
          if (ctrl_q[2]) irq_q <= 1'b1;
        end
        if (ctrl_q[1] && out_of_range) irq_q <= 1'b1;
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;
  assign irq_o = irq_q;

endmodule
