// dsm_decimator: decimation of an external Delta-Sigma bit stream.
//
// An external Delta-Sigma modulator delivers one bit per DSM_CLK period on
// DSM_IN. Both pins are synchronised to the system clock (which must run at
// more than twice DSM_CLK), and each rising DSM_CLK edge takes in one bit
// (1 -> +1, 0 -> 0). A CIC filter of order ORDER decimates the stream by R:
// ORDER integrators run at the input rate, and every R input bits ORDER comb
// stages (differential delay 1) produce one output, y = sum of the input
// weighted by the ORDER-fold convolution of an R-long box. All stages use
// ACC_W-bit wrap-around arithmetic, exact as long as R^ORDER < 2^ACC_W
// (R <= 1024 for the defaults). Each output is stored in OUT and pulses
// data_ready_o, which can request the ADC-side DMA channel.
//
// The paper names two decimation filters, CIC and SES; only the CIC is built
// here because the SES filter is not described. Order, width and register
// map are this design's choices.
// Registers: 0x00 CTRL {en[0]} (enabling clears the filter state);
// 0x04 DECIM (R, 2..1024); 0x08 OUT; 0x0C STATUS {new[0]}, cleared by
// reading OUT. OUT changes one cycle after the R-th input bit is taken in.
module dsm_decimator
  import heep_pkg::*;
#(
  parameter int unsigned ORDER = 3,
  parameter int unsigned ACC_W = 32
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t reg_req_i,
  output obi_rsp_t reg_rsp_o,
  input  logic     dsm_clk_i,
  input  logic     dsm_in_i,
  output logic     data_ready_o
);
  logic                        en_q;
  logic [10:0]                 decim_q;
  logic [10:0]                 phase_q;
  logic [2:0]                  clk_sync_q;
  logic [1:0]                  in_sync_q;
  logic                        strobe;
  logic [ORDER-1:0][ACC_W-1:0] integ_q;
  logic [ORDER-1:0][ACC_W-1:0] comb_dly_q;
  logic [ORDER-1:0][ACC_W-1:0] integ_next;
  logic [ORDER:0][ACC_W-1:0]   comb;
  logic [ACC_W-1:0]            out_q;
  logic                        new_q;
  logic                        wr, rd;
  logic [7:0]                  off;
  logic [31:0]                 rdata_q;
  logic                        rvalid_q;

  assign wr  = reg_req_i.req && reg_req_i.we;
  assign rd  = reg_req_i.req && !reg_req_i.we;
  assign off = reg_req_i.addr[7:0];
  assign strobe = en_q && clk_sync_q[1] && !clk_sync_q[2];

  // integrator chain and comb chain, one continuous assignment per stage
  assign integ_next[0] = integ_q[0] + ACC_W'(in_sync_q[1]);
  for (genvar i = 1; i < ORDER; i++) begin : g_integ
    assign integ_next[i] = integ_q[i] + integ_next[i-1];
  end
  assign comb[0] = integ_next[ORDER-1];
  for (genvar i = 0; i < ORDER; i++) begin : g_comb
    assign comb[i+1] = comb[i] - comb_dly_q[i];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      clk_sync_q <= '0;
      in_sync_q  <= '0;
    end else begin
      clk_sync_q <= {clk_sync_q[1:0], dsm_clk_i};
      in_sync_q  <= {in_sync_q[0], dsm_in_i};
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q         <= 1'b0;
      decim_q      <= 11'd64;
      phase_q      <= '0;
      integ_q      <= '0;
      comb_dly_q   <= '0;
      out_q        <= '0;
      new_q        <= 1'b0;
      data_ready_o <= 1'b0;
      rdata_q      <= '0;
      rvalid_q     <= 1'b0;
    end else begin
      rvalid_q     <= reg_req_i.req;
      data_ready_o <= 1'b0;
      if (rd) begin
        unique case (off)
          8'h00: rdata_q <= 32'(en_q);
          8'h04: rdata_q <= 32'(decim_q);
          8'h08: rdata_q <= 32'(out_q);
          8'h0C: rdata_q <= 32'(new_q);
          default: rdata_q <= '0;
        endcase
        if (off == 8'h08) new_q <= 1'b0;
      end
      if (wr && off == 8'h00) begin
        en_q       <= reg_req_i.wdata[0];
        integ_q    <= '0;
        comb_dly_q <= '0;
        phase_q    <= '0;
      end
      if (wr && off == 8'h04) begin
        if (reg_req_i.wdata[15:0] < 16'd2)         decim_q <= 11'd2;
        else if (reg_req_i.wdata[15:0] > 16'd1024) decim_q <= 11'd1024;
        else                                        decim_q <= reg_req_i.wdata[10:0];
      end
      if (strobe) begin
        integ_q <= integ_next;
        if (phase_q == decim_q - 11'd1) begin
          phase_q <= '0;
          for (int i = 0; i < ORDER; i++) comb_dly_q[i] <= comb[i];
          out_q        <= comb[ORDER];
          new_q        <= 1'b1;
          data_ready_o <= 1'b1;
        end else begin
          phase_q <= phase_q + 11'd1;
        end
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = 32'(rdata_q);

endmodule
