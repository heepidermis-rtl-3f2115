// heepidermis_top: digital back-end and front-end control of the HEEPidermis
// bio-impedance SoC.
//
// The chip injects a programmable current into tissue with two 8-bit current
// DACs and reads the resulting voltage with two VCO-based ADCs; a small
// microcontroller system stores, sub-samples and processes the data. This
// module holds everything of that system that is described well enough to be
// written as RTL:
//  - the fully connected system bus (obi_xbar) with two 16 KiB RAM banks;
//  - two DMA channels: DMA_dac streams waveform samples from RAM to the iDAC
//    controller, one per iDAC timer tick (slot ext_dma_slot_tx[1]);
//    DMA_adc moves ADC samples to RAM, one per VCO-decoder or DSM-decimator
//    result (slot ext_dma_slot_rx[0]), through the level-crossing sub-sampler
//    (dLC) when enabled; their registers sit on the always-on bus;
//  - the external peripheral bus with the front-end controllers: iDAC ctrl,
//    VCO decoder, dLC, Refs ctrl, aMUX ctrl and DSM decimation;
//  - the two never-reset 26-bit oscillator counters, clocked by tap 0 of each
//    ring oscillator.
// The CPU, the debug/host path and the rest of the X-HEEP peripherals are
// not part of this RTL: their bus ports are ports of this module, and the
// interrupt lines go out on irq_o. The analog macros (iDACs, VCOs,
// references, aMUX, LDO) are outside too; their digital controls are ports.
//
// Block structure, slot and interrupt wiring and the counter/pad names follow
// the paper's system diagram. How the two slot sources are combined (OR), the
// memory map (see heep_pkg), the register maps and the bus protocol details
// are this design's choices. DMA_dac has no sub-sampler: its dLC port is
// looped back so every sample it reads is written.
//
// Lint notes: the n-side counter overflow, the decoder's sample bus (the
// DMA reads OUT over the bus instead) and the upper bits of DMA_dac's
// looped-back dLC stream are deliberately left unused; the bus byte enables
// are ignored by word-only register files; the concurrent assertions use
// rst_ni in "disable iff", which lint reports as a synchronous use of the
// asynchronous reset. None of these is a circuit problem.
//
// Timing: one clock domain (clk_i) plus the two oscillator taps, which clock
// only the counters; their values cross into clk_i in Gray code. Every bus
// slave answers one cycle after its grant.
module heepidermis_top
  import heep_pkg::*;
#(
  parameter int unsigned CNT_W     = 26,
  parameter int unsigned RAM_WORDS = 4096
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // CPU and host/debug masters (cores outside this RTL)
  input  obi_req_t    cpu_instr_req_i,
  output obi_rsp_t    cpu_instr_rsp_o,
  input  obi_req_t    cpu_data_req_i,
  output obi_rsp_t    cpu_data_rsp_o,
  input  obi_req_t    dbg_req_i,
  output obi_rsp_t    dbg_rsp_o,
  // bus windows served outside this RTL
  output obi_req_t    ao_ext_req_o,
  input  obi_rsp_t    ao_ext_rsp_i,
  output obi_req_t    periph_req_o,
  input  obi_rsp_t    periph_rsp_i,
  // interrupts: [0] dLC, [1] DMA_adc done, [2] DMA_dac done
  output logic [2:0]  irq_o,
  // iDACs
  output logic        idac1_en_o,
  output logic        idac2_en_o,
  output logic [7:0]  idac1_cal_o,
  output logic [7:0]  idac2_cal_o,
  output logic [7:0]  idac1_code_o,
  output logic [7:0]  idac2_code_o,
  output logic        idac_refresh_o,
  // VCOs
  input  logic [30:0] vcop_taps_i,
  input  logic [30:0] vcon_taps_i,
  output logic        vcop_en_o,
  output logic        vcon_en_o,
  output logic        vcop_counter_ovf_o,
  // references
  output logic [7:0]  iref1_cal_o,
  output logic [7:0]  iref2_cal_o,
  output logic [7:0]  vref_cal_o,
  // analog multiplexer
  output logic        amux_en_o,
  output logic [3:0]  amux_sel_o,
  output logic        amux_refresh_o,
  // dLC pads
  output logic        dlc_dir_o,
  output logic        dlc_req_o,
  // external Delta-Sigma modulator
  input  logic        dsm_clk_i,
  input  logic        dsm_in_i
);
  // ------------------------------------------------------------ system bus
  obi_req_t [SYS_NM-1:0] m_req;
  obi_rsp_t [SYS_NM-1:0] m_rsp;
  obi_req_t [SYS_NS-1:0] s_req;
  obi_rsp_t [SYS_NS-1:0] s_rsp;

  assign m_req[M_CPU_INSTR] = cpu_instr_req_i;
  assign m_req[M_CPU_DATA]  = cpu_data_req_i;
  assign m_req[M_DEBUG]     = dbg_req_i;
  assign cpu_instr_rsp_o    = m_rsp[M_CPU_INSTR];
  assign cpu_data_rsp_o     = m_rsp[M_CPU_DATA];
  assign dbg_rsp_o          = m_rsp[M_DEBUG];

  obi_xbar u_xbar (
    .clk_i, .rst_ni, .m_req_i(m_req), .m_rsp_o(m_rsp), .s_req_o(s_req), .s_rsp_i(s_rsp)
  );

  sram_bank #(.NUM_WORDS(RAM_WORDS)) u_ram_i (
    .clk_i, .rst_ni, .req_i(s_req[S_RAM_I]), .rsp_o(s_rsp[S_RAM_I])
  );
  sram_bank #(.NUM_WORDS(RAM_WORDS)) u_ram_d (
    .clk_i, .rst_ni, .req_i(s_req[S_RAM_D]), .rsp_o(s_rsp[S_RAM_D])
  );

  assign periph_req_o     = s_req[S_PERIPH];
  assign s_rsp[S_PERIPH]  = periph_rsp_i;

  // ------------------------------------------------------- always-on bus
  obi_req_t [AO_N-1:0] ao_req;
  obi_rsp_t [AO_N-1:0] ao_rsp;

  obi_demux #(.N(AO_N), .DEFAULT_LAST(1'b1)) u_ao_bus (
    .clk_i, .rst_ni, .req_i(s_req[S_AO]), .rsp_o(s_rsp[S_AO]), .s_req_o(ao_req), .s_rsp_i(ao_rsp)
  );
  assign ao_ext_req_o     = ao_req[AO_OTHER];
  assign ao_rsp[AO_OTHER] = ao_ext_rsp_i;

  // ------------------------------------------------ external peripheral bus
  obi_req_t [EXT_N-1:0] ext_req;
  obi_rsp_t [EXT_N-1:0] ext_rsp;

  obi_demux #(.N(EXT_N)) u_ext_bus (
    .clk_i, .rst_ni, .req_i(s_req[S_EXT]), .rsp_o(s_rsp[S_EXT]), .s_req_o(ext_req), .s_rsp_i(ext_rsp)
  );

  // --------------------------------------------------------------- iDACs
  logic idac_slot;

  idac_ctrl u_idac_ctrl (
    .clk_i, .rst_ni, .reg_req_i(ext_req[EXT_IDAC]), .reg_rsp_o(ext_rsp[EXT_IDAC]),
    .idac1_en_o, .idac2_en_o, .idac1_cal_o, .idac2_cal_o, .idac1_code_o, .idac2_code_o,
    .refresh_o(idac_refresh_o), .dma_slot_o(idac_slot)
  );

  // ---------------------------------------------------------------- VCOs
  logic [CNT_W-1:0] gray_p, gray_n;
  logic             vcon_ovf;
  logic             vco_notif;
  logic [31:0]      vco_data;

  vco_counter #(.W(CNT_W)) u_vcop_cnt (.tap_i(vcop_taps_i[0]), .gray_o(gray_p), .ovf_o(vcop_counter_ovf_o));
  vco_counter #(.W(CNT_W)) u_vcon_cnt (.tap_i(vcon_taps_i[0]), .gray_o(gray_n), .ovf_o(vcon_ovf));

  vco_decoder #(.CNT_W(CNT_W)) u_vco_dec (
    .clk_i, .rst_ni, .reg_req_i(ext_req[EXT_VCO]), .reg_rsp_o(ext_rsp[EXT_VCO]),
    .gray_p_i(gray_p), .gray_n_i(gray_n), .taps_p_i(vcop_taps_i), .taps_n_i(vcon_taps_i),
    .vco_en_p_o(vcop_en_o), .vco_en_n_o(vcon_en_o), .notif_o(vco_notif), .data_o(vco_data)
  );

  // ------------------------------------------------------------------ dLC
  logic       dlc_in_valid;
  logic [31:0] dlc_in_data;
  logic       dlc_out_valid, dlc_out_event;
  logic [7:0] dlc_out_data;

  dlc u_dlc (
    .clk_i, .rst_ni, .reg_req_i(ext_req[EXT_DLC]), .reg_rsp_o(ext_rsp[EXT_DLC]),
    .in_valid_i(dlc_in_valid), .in_data_i(dlc_in_data), .out_valid_o(dlc_out_valid),
    .out_event_o(dlc_out_event), .out_data_o(dlc_out_data), .dir_o(dlc_dir_o), .req_o(dlc_req_o),
    .irq_o(irq_o[0])
  );

  // ----------------------------------------------------- references, aMUX
  refs_ctrl u_refs_ctrl (
    .clk_i, .rst_ni, .reg_req_i(ext_req[EXT_REFS]), .reg_rsp_o(ext_rsp[EXT_REFS]),
    .iref1_cal_o, .iref2_cal_o, .vref_cal_o
  );

  amux_ctrl u_amux_ctrl (
    .clk_i, .rst_ni, .reg_req_i(ext_req[EXT_AMUX]), .reg_rsp_o(ext_rsp[EXT_AMUX]),
    .en_o(amux_en_o), .sel_o(amux_sel_o), .refresh_o(amux_refresh_o)
  );

  // ------------------------------------------------------ DSM decimation
  logic dsm_ready;

  dsm_decimator u_dsm (
    .clk_i, .rst_ni, .reg_req_i(ext_req[EXT_DSM]), .reg_rsp_o(ext_rsp[EXT_DSM]),
    .dsm_clk_i, .dsm_in_i, .data_ready_o(dsm_ready)
  );

  // ----------------------------------------------------------------- DMAs
  logic       adc_slot;
  logic       dac_loop_valid;
  logic [31:0] dac_loop_data;

  assign adc_slot = vco_notif | dsm_ready;   // ext_dma_slot_rx[0]

  dma_channel u_dma_adc (
    .clk_i, .rst_ni, .reg_req_i(ao_req[AO_DMA_ADC]), .reg_rsp_o(ao_rsp[AO_DMA_ADC]),
    .rd_req_o(m_req[M_DMA_ADC_R]), .rd_rsp_i(m_rsp[M_DMA_ADC_R]),
    .wr_req_o(m_req[M_DMA_ADC_W]), .wr_rsp_i(m_rsp[M_DMA_ADC_W]),
    .slot_i(adc_slot),
    .dlc_valid_o(dlc_in_valid), .dlc_data_o(dlc_in_data),
    .dlc_valid_i(dlc_out_valid), .dlc_event_i(dlc_out_event), .dlc_data_i(dlc_out_data),
    .irq_o(irq_o[1])
  );

  dma_channel u_dma_dac (
    .clk_i, .rst_ni, .reg_req_i(ao_req[AO_DMA_DAC]), .reg_rsp_o(ao_rsp[AO_DMA_DAC]),
    .rd_req_o(m_req[M_DMA_DAC_R]), .rd_rsp_i(m_rsp[M_DMA_DAC_R]),
    .wr_req_o(m_req[M_DMA_DAC_W]), .wr_rsp_i(m_rsp[M_DMA_DAC_W]),
    .slot_i(idac_slot),
    .dlc_valid_o(dac_loop_valid), .dlc_data_o(dac_loop_data),
    .dlc_valid_i(dac_loop_valid), .dlc_event_i(1'b1), .dlc_data_i(dac_loop_data[7:0]),
    .irq_o(irq_o[2])
  );

endmodule
