// dma_channel: one DMA channel of the HEEPidermis back-end.
//
// HEEPidermis has two independent channels: one streams waveform samples
// from RAM to the iDAC controller, the other moves ADC samples from the VCO
// decoder to RAM through the level-crossing sub-sampler (dLC). Each channel
// copies SIZE elements from SRC to DST, advancing the pointers by SRC_INC
// and DST_INC bytes, with element size word, half-word or byte. With
// MODE.slot_en, each element waits for a pulse on slot_i (the trigger from
// the iDAC timer or from the ADC side), so the transfer runs at the rate of
// the front-end without the CPU. A slot that arrives while an earlier one is
// still pending sets STATUS.overrun (the extra slot is lost).
// With MODE.dlc_en the word read is handed to the dLC instead of being
// written; only when the dLC emits an 8-bit word is that byte written to DST.
// SIZE counts writes, so the channel interrupts the CPU after a fixed number
// of dLC output words. This is the simplest channel that does what the paper
// describes (one read and one write per element, no bursts); its register
// map and element handling are this design's own.
//
// Ports: a configuration OBI slave, separate OBI read and write masters
// (one outstanding request each), the slot input, the dLC stream pair and a
// level interrupt (done and MODE.irq_en). An element takes, without waiting,
// 2 cycles read + 2 cycles write + 1 cycle through the dLC when enabled.
// Registers: 0x00 SRC; 0x04 DST; 0x08 SIZE (a non-zero write starts);
// 0x0C SRC_INC; 0x10 DST_INC; 0x14 MODE {irq_en[4], dlc_en[3], slot_en[2],
// dtype[1:0]: 0 word, 1 half, 2 byte}; 0x18 STATUS {overrun[2], done[1],
// busy[0]}, write 1 to clear done/overrun; 0x1C COUNT (writes done).
module dma_channel
  import heep_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  obi_req_t    reg_req_i,
  output obi_rsp_t    reg_rsp_o,
  output obi_req_t    rd_req_o,
  input  obi_rsp_t    rd_rsp_i,
  output obi_req_t    wr_req_o,
  input  obi_rsp_t    wr_rsp_i,
  input  logic        slot_i,
  output logic        dlc_valid_o,
  output logic [31:0] dlc_data_o,
  input  logic        dlc_valid_i,
  input  logic        dlc_event_i,
  input  logic [7:0]  dlc_data_i,
  output logic        irq_o
);
  typedef enum logic [2:0] {IDLE, WAIT_SLOT, RD, RD_WAIT, DLC_WAIT, WR, WR_WAIT} state_e;
  typedef enum logic [1:0] {DT_WORD = 2'd0, DT_HALF = 2'd1, DT_BYTE = 2'd2} dtype_e;

  state_e      state_q;
  logic [31:0] src_q, dst_q, size_q, sinc_q, dinc_q, count_q;
  logic [4:0]  mode_q;
  logic        done_q, overrun_q, slot_pend_q;
  logic [31:0] elem_q;
  dtype_e      wtype_q;
  dtype_e      dtype;
  logic [31:0] rd_elem;
  logic        wr, rd, slot_take;
  logic [7:0]  off;
  logic [31:0] rval, rdata_q;
  logic        rvalid_q;

  assign wr    = reg_req_i.req && reg_req_i.we;
  assign rd    = reg_req_i.req && !reg_req_i.we;
  assign off   = reg_req_i.addr[7:0];
  assign dtype = (mode_q[1:0] == 2'd3) ? DT_BYTE : dtype_e'(mode_q[1:0]);
  assign slot_take = state_q == WAIT_SLOT && (!mode_q[2] || slot_pend_q);

  // element taken from the read word
  always_comb begin
    logic [31:0] sh;
    sh = rd_rsp_i.rdata >> (8 * src_q[1:0]);
    unique case (dtype)
      DT_WORD: rd_elem = rd_rsp_i.rdata;
      DT_HALF: rd_elem = {16'h0, sh[15:0]};
      default: rd_elem = {24'h0, sh[7:0]};
    endcase
  end

  always_comb begin
    rd_req_o       = OBI_REQ_IDLE;
    rd_req_o.req   = state_q == RD;
    rd_req_o.addr  = {src_q[31:2], 2'b00};
    rd_req_o.be    = 4'hF;
    wr_req_o       = OBI_REQ_IDLE;
    wr_req_o.req   = state_q == WR;
    wr_req_o.we    = 1'b1;
    wr_req_o.addr  = {dst_q[31:2], 2'b00};
    unique case (wtype_q)
      DT_WORD: begin wr_req_o.be = 4'hF;                   wr_req_o.wdata = elem_q; end
      DT_HALF: begin wr_req_o.be = 4'h3 << (2 * dst_q[1]); wr_req_o.wdata = {2{elem_q[15:0]}}; end
      default: begin wr_req_o.be = 4'h1 << dst_q[1:0];     wr_req_o.wdata = {4{elem_q[7:0]}}; end
    endcase
  end

  always_comb begin
    unique case (off)
      8'h00: rval = src_q;
      8'h04: rval = dst_q;
      8'h08: rval = size_q;
      8'h0C: rval = sinc_q;
      8'h10: rval = dinc_q;
      8'h14: rval = 32'(mode_q);
      8'h18: rval = {29'h0, overrun_q, done_q, state_q != IDLE};
      8'h1C: rval = count_q;
      default: rval = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= IDLE;
      src_q       <= '0;
      dst_q       <= '0;
      size_q      <= '0;
      sinc_q      <= '0;
      dinc_q      <= '0;
      count_q     <= '0;
      mode_q      <= '0;
      done_q      <= 1'b0;
      overrun_q   <= 1'b0;
      slot_pend_q <= 1'b0;
      elem_q      <= '0;
      wtype_q     <= DT_WORD;
      dlc_valid_o <= 1'b0;
      dlc_data_o  <= '0;
      rdata_q     <= '0;
      rvalid_q    <= 1'b0;
    end else begin
      rvalid_q    <= reg_req_i.req;
      dlc_valid_o <= 1'b0;
      if (rd) rdata_q <= rval;

      // slot bookkeeping: one pending slot; another one while pending overruns
      if (slot_take && mode_q[2]) slot_pend_q <= 1'b0;
      if (slot_i && mode_q[2] && state_q != IDLE) begin
        slot_pend_q <= 1'b1;
        if (slot_pend_q && !slot_take) overrun_q <= 1'b1;
      end

      if (wr) begin
        unique case (off)
          8'h00: src_q  <= reg_req_i.wdata;
          8'h04: dst_q  <= reg_req_i.wdata;
          8'h08: begin
            size_q <= reg_req_i.wdata;
            if (reg_req_i.wdata != '0 && state_q == IDLE) begin
              state_q     <= WAIT_SLOT;
              count_q     <= '0;
              done_q      <= 1'b0;
              slot_pend_q <= 1'b0;
            end
          end
          8'h0C: sinc_q <= reg_req_i.wdata;
          8'h10: dinc_q <= reg_req_i.wdata;
          8'h14: mode_q <= reg_req_i.wdata[4:0];
          8'h18: begin
            if (reg_req_i.wdata[1]) done_q    <= 1'b0;
            if (reg_req_i.wdata[2]) overrun_q <= 1'b0;
          end
          default: ;
        endcase
      end

      unique case (state_q)
        IDLE: ;
        WAIT_SLOT: if (slot_take) state_q <= RD;
        RD: if (rd_rsp_i.gnt) state_q <= RD_WAIT;
        RD_WAIT: if (rd_rsp_i.rvalid) begin
          if (mode_q[3]) begin
            dlc_valid_o <= 1'b1;
            dlc_data_o  <= rd_elem;
            state_q     <= DLC_WAIT;
          end else begin
            elem_q  <= rd_elem;
            wtype_q <= dtype;
            state_q <= WR;
          end
        end
        DLC_WAIT: if (dlc_valid_i) begin
          if (dlc_event_i) begin
            elem_q  <= {24'h0, dlc_data_i};
            wtype_q <= DT_BYTE;
            state_q <= WR;
          end else begin
            src_q   <= src_q + sinc_q;   // sample discarded by the dLC
            state_q <= WAIT_SLOT;
          end
        end
        WR: if (wr_rsp_i.gnt) state_q <= WR_WAIT;
        WR_WAIT: if (wr_rsp_i.rvalid) begin
          src_q   <= src_q + sinc_q;
          dst_q   <= dst_q + dinc_q;
          count_q <= count_q + 32'd1;
          if (count_q + 32'd1 >= size_q) begin
            state_q <= IDLE;
            done_q  <= 1'b1;
          end else begin
            state_q <= WAIT_SLOT;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;
  assign irq_o = done_q && mode_q[4];

  a_one_read: assert property (@(posedge clk_i) disable iff (!rst_ni)
    rd_rsp_i.rvalid |-> state_q == RD_WAIT) else $error("unexpected read response");
  a_one_write: assert property (@(posedge clk_i) disable iff (!rst_ni)
    wr_rsp_i.rvalid |-> state_q == WR_WAIT) else $error("unexpected write response");

endmodule
