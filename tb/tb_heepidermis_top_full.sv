// tb_heepidermis_top_full: the end-to-end test of tb_heepidermis_top run on
// the design at its default (chip) sizes: 26-bit oscillator counters and
// two 16 KiB RAM banks. The counters do not wrap within the test, so the
// wrap mechanism is not required here (it is covered by tb_heepidermis_top).
// Everything else is identical:
// The testbench plays the CPU (on the data port) and the host (on the debug
// port), and closes the analog loop with behavioural models: two current
// DACs (idac_model) sink current through a skin impedance (20 kOhm) and a
// reference resistor (25 kOhm) from a 0.8 V supply; the two node voltages
// drive the two VCO models (vco_model), whose taps feed the chip. Clock:
// 10 MHz. Sequence:
//  1. calibrate references, select an aMUX input, load a program word and
//     fetch it on the instruction port, read the peripheral and always-on
//     windows served outside the design;
//  2. bio-impedance use case: a 64-point quadrature sine table (2 periods)
//     in RAM; DMA_dac streams it to the iDACs one sample per iDAC timer tick
//     (1 kHz period 1000 cycles = 10 kHz update); the VCO decoder samples
//     p - n every 2000 cycles; DMA_adc passes each sample through the dLC
//     and stores the emitted words; the CPU is woken by the DMA_adc
//     interrupt and compares the buffer with a reference dLC run on the
//     samples seen at the decoder output. Meanwhile the host reads RAM on
//     the debug port, competing with both DMA channels for the data bank.
//     Then the CPU changes the phase difference (90 to 45 degrees),
//     rewrites the table and re-launches both channels for a second run;
//  3. GSR use case: DC current on-demand, single-ended sampling, dLC with a
//     LOW/HIGH window; a jump of the skin current pushes the sample out of
//     range, the dLC interrupt wakes the CPU, which re-biases the iDAC;
//  4. the external Delta-Sigma path: bit streams into the CIC decimator,
//     whose outputs DMA_adc stores, one per data-ready slot.
// Checks: every iDAC code change and its spacing, every ADC sample against
// the oscillator edges counted here (within +-3), every DMA_adc read against
// the decoder's sample sequence, the stored dLC words, the interrupts, the
// CIC outputs and all register read-backs. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_heepidermis_top_full;
  import heep_pkg::*;

  localparam int CNT_W       = 26;          // the chip's counter width
  localparam bit EXPECT_WRAP = CNT_W < 16;
  localparam int P_DAC       = 1000;        // iDAC timer period (cycles)
  localparam int Q_ADC       = 2000;        // VCO sampling period (cycles)
  localparam int NTAB        = 128;         // waveform samples (2 periods of 64)
  localparam int M_ADC       = 32;          // dLC words stored in the use case
  localparam real Z_SKIN     = 20.0e3;
  localparam real R_REF      = 25.0e3;
  localparam real VDD        = 0.8;

  localparam logic [31:0] A_IDAC = EXT_BASE + 32'h000;
  localparam logic [31:0] A_VCO  = EXT_BASE + 32'h100;
  localparam logic [31:0] A_DLC  = EXT_BASE + 32'h200;
  localparam logic [31:0] A_REFS = EXT_BASE + 32'h300;
  localparam logic [31:0] A_AMUX = EXT_BASE + 32'h400;
  localparam logic [31:0] A_DSM  = EXT_BASE + 32'h500;
  localparam logic [31:0] A_DADC = AO_BASE + 32'h000;
  localparam logic [31:0] A_DDAC = AO_BASE + 32'h100;
  localparam logic [31:0] TAB    = RAM_D_BASE + 32'h100;
  localparam logic [31:0] BUF1   = RAM_D_BASE + 32'h800;
  localparam logic [31:0] BUF2   = RAM_D_BASE + 32'hC00;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #50 clk = ~clk;

  obi_req_t instr_req = OBI_REQ_IDLE, cpu_req = OBI_REQ_IDLE, dbg_req = OBI_REQ_IDLE;
  obi_rsp_t instr_rsp, cpu_rsp, dbg_rsp;
  obi_req_t ao_req, per_req;
  obi_rsp_t ao_rsp, per_rsp;
  logic [2:0]  irq;
  logic        i1_en, i2_en, i_ref, vp_en, vn_en, p_ovf, amux_en, amux_ref, dlc_dir, dlc_req;
  logic [7:0]  i1_cal, i2_cal, i1_code, i2_code, iref1, iref2, vref;
  logic [3:0]  amux_sel;
  logic [30:0] vp_taps, vn_taps;
  logic        dsm_clk = 1'b0, dsm_in = 1'b0;
  real         i1, i2, vp, vn;

  heepidermis_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cpu_instr_req_i(instr_req), .cpu_instr_rsp_o(instr_rsp),
    .cpu_data_req_i(cpu_req), .cpu_data_rsp_o(cpu_rsp),
    .dbg_req_i(dbg_req), .dbg_rsp_o(dbg_rsp),
    .ao_ext_req_o(ao_req), .ao_ext_rsp_i(ao_rsp),
    .periph_req_o(per_req), .periph_rsp_i(per_rsp),
    .irq_o(irq),
    .idac1_en_o(i1_en), .idac2_en_o(i2_en), .idac1_cal_o(i1_cal), .idac2_cal_o(i2_cal),
    .idac1_code_o(i1_code), .idac2_code_o(i2_code), .idac_refresh_o(i_ref),
    .vcop_taps_i(vp_taps), .vcon_taps_i(vn_taps), .vcop_en_o(vp_en), .vcon_en_o(vn_en),
    .vcop_counter_ovf_o(p_ovf),
    .iref1_cal_o(iref1), .iref2_cal_o(iref2), .vref_cal_o(vref),
    .amux_en_o(amux_en), .amux_sel_o(amux_sel), .amux_refresh_o(amux_ref),
    .dlc_dir_o(dlc_dir), .dlc_req_o(dlc_req),
    .dsm_clk_i(dsm_clk), .dsm_in_i(dsm_in)
  );

  // ------------------------------------------------------ analog loop
  idac_model u_idac1 (.en_i(i1_en), .code_i(i1_code), .cal_i(i1_cal), .i_o(i1));
  idac_model u_idac2 (.en_i(i2_en), .code_i(i2_code), .cal_i(i2_cal), .i_o(i2));
  always_comb vp = VDD - i1 * Z_SKIN;
  always_comb vn = VDD - i2 * R_REF;
  vco_model u_vcop (.en_i(vp_en), .vin_i(vp), .taps_o(vp_taps));
  vco_model u_vcon (.en_i(vn_en), .vin_i(vn), .taps_o(vn_taps));

  // ------------------------------------------------- outside bus slaves
  logic ao_v = 1'b0, per_v = 1'b0;
  logic [31:0] ao_d = '0, per_d = '0;
  int n_ao = 0, n_per = 0;
  assign ao_rsp  = '{gnt: 1'b1, rvalid: ao_v, rdata: ao_d};
  assign per_rsp = '{gnt: 1'b1, rvalid: per_v, rdata: per_d};
  always @(posedge clk) begin
    ao_v  <= ao_req.req;
    per_v <= per_req.req;
    ao_d  <= 32'hA0A0_0000 | {16'h0, ao_req.addr[15:0]};
    per_d <= 32'h5E50_0000 | {16'h0, per_req.addr[15:0]};
    if (ao_req.req)  n_ao++;
    if (per_req.req) n_per++;
  end

  // ------------------------------------------------------- bookkeeping
  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %h expected %h (t=%0t)", what, got, exp, $time);
    end
  endtask

  task automatic check_near(input string what, input int got, input int exp, input int tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0d expected %0d+-%0d (t=%0t)", what, got, exp, tol, $time);
    end
  endtask

  // mechanism counters
  typedef enum int {
    MC_REFS_CAL, MC_AMUX, MC_INSTR_FETCH, MC_AO_EXT, MC_PERIPH, MC_IDAC_ON_DEMAND,
    MC_IDAC_TIMER, MC_DMA_DAC_STREAM, MC_DMA_DAC_IRQ, MC_VCO_DIFF, MC_VCO_SINGLE,
    MC_VCO_WRAP, MC_DLC_DISCARD, MC_DLC_EVENT, MC_DLC_PADS, MC_DMA_ADC_IRQ,
    MC_DLC_RANGE_IRQ, MC_REBIAS, MC_DSM_CIC, MC_BUS_CONTENTION, MC_PHASE_RELAUNCH, MC_DSM_DMA, MC_N
  } mech_e;
  int mech [MC_N];
  initial for (int i = 0; i < MC_N; i++) mech[i] = 0;

  // ------------------------------------------------------- CPU (data port)
  task automatic bus(input obi_req_t r, output logic [31:0] q);
    @(negedge clk);
    cpu_req = r;
    #1;
    while (!cpu_rsp.gnt) begin
      @(negedge clk); #1;
    end
    @(negedge clk);
    cpu_req = OBI_REQ_IDLE;
    checks++;
    if (!cpu_rsp.rvalid) begin
      failures++;
      $display("FAIL no response to CPU access at %h", r.addr);
    end
    q = cpu_rsp.rdata;
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d, input logic [3:0] be = 4'hF);
    logic [31:0] q;
    bus('{req: 1'b1, we: 1'b1, be: be, addr: a, wdata: d}, q);
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    bus('{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: 32'h0}, d);
  endtask

  task automatic rd_check(input string what, input logic [31:0] a, input logic [31:0] exp);
    logic [31:0] d;
    rd(a, d);
    check(what, d, exp);
  endtask

  // ------------------------------------------------------ waveform table
  // code1 = 128 + 100 sin(2 pi k / 64), code2 the same shifted by phi
  logic [7:0] tab1 [NTAB], tab2 [NTAB];
  task automatic fill_table(input real phi);
    for (int k = 0; k < NTAB; k++) begin
      tab1[k] = 8'($rtoi(128.0 + 100.0 * $sin(2.0 * 3.14159265 * k / 64.0) + 0.5));
      tab2[k] = 8'($rtoi(128.0 + 100.0 * $sin(2.0 * 3.14159265 * k / 64.0 + phi) + 0.5));
    end
  endtask
  function automatic logic [31:0] tab_word(int w);
    return {tab2[2*w+1], tab1[2*w+1], tab2[2*w], tab1[2*w]};
  endfunction

  // ------------------------------------------------------ iDAC monitor
  bit timer_phase = 0;
  int n_tick = 0;
  int unsigned last_tick = 0;
  always @(posedge clk) if (rst_n && i_ref) begin
    if (timer_phase) begin
      if (n_tick > 0) check("iDAC update spacing", cycle - last_tick, P_DAC);
      if (n_tick == 0) begin
        check("first tick applies staged DC code1", 32'(i1_code), 32'h80);
        check("first tick applies staged DC code2", 32'(i2_code), 32'h80);
      end else if (n_tick <= NTAB) begin
        check($sformatf("iDAC1 code %0d", n_tick), 32'(i1_code), 32'(tab1[n_tick-1]));
        check($sformatf("iDAC2 code %0d", n_tick), 32'(i2_code), 32'(tab2[n_tick-1]));
      end
      last_tick <= cycle;
      n_tick++;
      mech[MC_IDAC_TIMER]++;
    end else begin
      mech[MC_IDAC_ON_DEMAND]++;
    end
  end

  // DMA_dac writes into the iDAC staging register
  always @(posedge clk)
    if (dut.m_req[M_DMA_DAC_W].req && dut.m_rsp[M_DMA_DAC_W].gnt &&
        dut.m_req[M_DMA_DAC_W].addr == A_IDAC + 32'h0C)
      mech[MC_DMA_DAC_STREAM]++;

  // ------------------------------------------------------ ADC monitor
  int unsigned ep = 0, en = 0, ep_last = 0, en_last = 0;
  always @(posedge vp_taps[0]) ep++;
  always @(posedge vn_taps[0]) en++;
  always @(posedge p_ovf) mech[MC_VCO_WRAP]++;

  int samples [$];        // decoder samples taken while DMA_adc runs
  bit capture = 0;
  bit first_sample = 1;
  always @(posedge clk) if (rst_n && dut.u_vco_dec.notif_o) begin
    int unsigned dp, dn;
    int got;
    dp = ep - ep_last;  dn = en - en_last;
    ep_last <= ep;      en_last <= en;
    got = int'(dut.u_vco_dec.data_o);
    if (!first_sample) begin
      unique case (dut.u_vco_dec.ctrl_q[3:2])
        2'd0: begin check_near("ADC p sample", got, int'(dp), 3); mech[MC_VCO_SINGLE]++; end
        2'd1: check_near("ADC n sample", got, int'(dn), 3);
        default: begin check_near("ADC p-n sample", got, int'(dp) - int'(dn), 4); mech[MC_VCO_DIFF]++; end
      endcase
    end
    first_sample <= 0;
    if (capture) samples.push_back(got);
  end

  // DMA_adc reads must follow the decoder's sample sequence
  int fed [$];
  always @(posedge clk) if (rst_n && dut.dlc_in_valid) begin
    checks++;
    if (samples.size() == 0) begin
      failures++;
      $display("FAIL DMA_adc read a sample the decoder never produced");
    end else begin
      int s;
      s = samples.pop_front();
      check("DMA_adc sample order", dut.dlc_in_data, 32'(s));
      fed.push_back(s);
    end
  end
  always @(posedge clk) if (rst_n && dut.dlc_out_valid) begin
    if (dut.dlc_out_event) mech[MC_DLC_EVENT]++;
    else                   mech[MC_DLC_DISCARD]++;
  end
  always @(posedge dlc_req) mech[MC_DLC_PADS]++;

  // reference dLC over the samples fed to it
  function automatic void dlc_ref(input int logd, input int xs [$], ref logic [7:0] words [$]);
    longint lvl, d, n;
    bit init;
    init = 0;
    lvl = 0;
    foreach (xs[i]) begin
      if (!init) begin
        lvl = xs[i]; init = 1;
      end else begin
        d = longint'(xs[i]) - lvl;
        n = (d < 0 ? -d : d) >>> logd;
        if (n > 127) n = 127;
        if (n != 0) begin
          words.push_back({d >= 0, 7'(n)});
          lvl = d >= 0 ? lvl + (n <<< logd) : lvl - (n <<< logd);
        end
      end
    end
  endfunction

  // ----------------------------------------------------- bus contention
  always @(posedge clk) if (rst_n) begin
    int users [SYS_NS];
    for (int s = 0; s < SYS_NS; s++) users[s] = 0;
    for (int m = 0; m < SYS_NM; m++)
      if (dut.m_req[m].req) users[sys_decode(dut.m_req[m].addr)]++;
    for (int s = 0; s < SYS_NS; s++) if (users[s] > 1) mech[MC_BUS_CONTENTION]++;
  end

  // -------------------------------------------- host on the debug port
  bit dbg_run = 0;
  int n_dbg = 0;
  task automatic dbg_traffic();
    while (dbg_run) begin
      int w;
      w = $urandom_range(0, NTAB / 2 - 1);
      @(negedge clk);
      dbg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: TAB + 32'(4 * w), wdata: 32'h0};
      #1;
      while (!dbg_rsp.gnt) begin
        @(negedge clk); #1;
      end
      @(negedge clk);
      dbg_req = OBI_REQ_IDLE;
      check("host read of the waveform table", dbg_rsp.rdata, tab_word(w));
      n_dbg++;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  // ------------------------------------------------------ DSM stimulus
  bit dsm_pattern [$];
  logic [31:0] dsm_outs [$];
  always @(posedge dut.dsm_ready) begin
    @(negedge clk);
    dsm_outs.push_back(dut.u_dsm.out_q);
  end

  task automatic dsm_drive(input int nbits);
    for (int i = 0; i < nbits; i++) begin
      dsm_in = dsm_pattern[i % dsm_pattern.size()];
      #450 dsm_clk = 1'b1;
      #500 dsm_clk = 1'b0;
      #50;
    end
  endtask

  task automatic wait_irq(input int b, input int max_cycles);
    int c;
    c = 0;
    while (!irq[b] && c < max_cycles) begin
      @(posedge clk);
      c++;
    end
    checks++;
    if (!irq[b]) begin
      failures++;
      $display("FAIL interrupt %0d never rose", b);
    end
  endtask

  task automatic check_buffer(input string what, input logic [31:0] base, input int nwords, input int logd);
    logic [7:0] exp [$];
    logic [31:0] d;
    dlc_ref(logd, fed, exp);
    checks++;
    if (exp.size() < nwords) begin
      failures++;
      $display("FAIL %s: reference produced only %0d words", what, exp.size());
    end
    for (int i = 0; i < nwords && i < exp.size(); i++) begin
      rd(base + 32'(i & ~3), d);
      check($sformatf("%s word %0d", what, i), 32'(d[8*(i%4) +: 8]), 32'(exp[i]));
    end
  endtask

  // ------------------------------------------------------------ main
  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // 1. set-up paths
    wr(A_REFS + 32'h0, 32'h81);
    wr(A_REFS + 32'h4, 32'h7D);
    wr(A_REFS + 32'h8, 32'h84);
    @(negedge clk);
    check("IREF1 trim", 32'(iref1), 32'h81);
    check("IREF2 trim", 32'(iref2), 32'h7D);
    check("VREF trim", 32'(vref), 32'h84);
    if (iref1 == 8'h81 && iref2 == 8'h7D && vref == 8'h84) mech[MC_REFS_CAL]++;

    fork
      begin
        wr(A_AMUX + 32'h4, 32'h5);
        wr(A_AMUX + 32'h0, 32'h1);
      end
      begin
        int seen;
        seen = 0;
        repeat (12) begin
          @(posedge clk);
          if (amux_ref) seen++;
        end
        check("aMUX refresh pulses", 32'(seen), 2);
      end
    join
    check("aMUX select", 32'(amux_sel), 32'h5);
    check("aMUX enable", 32'(amux_en), 1);
    if (amux_sel == 4'h5 && amux_en) mech[MC_AMUX]++;

    wr(RAM_I_BASE + 32'h80, 32'h0010_0073);
    @(negedge clk);
    instr_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: RAM_I_BASE + 32'h80, wdata: 32'h0};
    #1;
    check("instruction port granted", 32'(instr_rsp.gnt), 1);
    @(negedge clk);
    instr_req = OBI_REQ_IDLE;
    check("instruction fetch", instr_rsp.rdata, 32'h0010_0073);
    if (instr_rsp.rvalid && instr_rsp.rdata == 32'h0010_0073) mech[MC_INSTR_FETCH]++;

    rd_check("always-on window outside the design", AO_BASE + 32'h0400, 32'hA0A0_0400);
    rd_check("peripheral bus", PERIPH_BASE + 32'h0010, 32'h5E50_0010);
    mech[MC_AO_EXT] = n_ao;
    mech[MC_PERIPH] = n_per;
    rd_check("unused external window reads zero", EXT_BASE + 32'h0700, 32'h0);

    // 2. bio-impedance use case, first run: sines 90 degrees apart
    fill_table(3.14159265 / 2.0);
    for (int w = 0; w < NTAB / 2; w++) wr(TAB + 32'(4 * w), tab_word(w));
    wr(A_IDAC + 32'h04, 32'h80);             // CAL1
    wr(A_IDAC + 32'h08, 32'h80);             // CAL2
    wr(A_IDAC + 32'h00, 32'h3);              // both iDACs on, on-demand mode
    wr(A_IDAC + 32'h0C, 32'h8080);           // DC 5.12 uA on both
    @(negedge clk);
    check("on-demand code1", 32'(i1_code), 32'h80);
    check("on-demand code2", 32'(i2_code), 32'h80);
    rd_check("iDAC CODES", A_IDAC + 32'h14, 32'h8080);

    wr(A_DDAC + 32'h00, TAB);
    wr(A_DDAC + 32'h04, A_IDAC + 32'h0C);
    wr(A_DDAC + 32'h0C, 32'd2);
    wr(A_DDAC + 32'h10, 32'd0);
    wr(A_DDAC + 32'h14, 32'h15);             // irq, slot, half-word
    wr(A_DDAC + 32'h08, 32'(NTAB));          // start: waits for the first slot
    wr(A_IDAC + 32'h10, 32'(P_DAC));
    timer_phase = 1;
    wr(A_IDAC + 32'h00, 32'h7);              // timer mode

    wr(A_VCO + 32'h04, 32'(Q_ADC));
    wr(A_VCO + 32'h00, 32'h1B);              // timer, p-n, both VCOs on
    wr(A_DLC + 32'h04, 32'd2);               // step 4 counts
    wr(A_DLC + 32'h00, 32'h1);
    @(posedge dut.u_vco_dec.notif_o);        // discard the start-up sample
    @(negedge dut.u_vco_dec.notif_o);        // this sample is not for the DMA
    capture = 1;
    wr(A_DADC + 32'h00, A_VCO + 32'h0C);
    wr(A_DADC + 32'h04, BUF1);
    wr(A_DADC + 32'h0C, 32'd0);
    wr(A_DADC + 32'h10, 32'd1);
    wr(A_DADC + 32'h14, 32'h1C);             // irq, dLC, slot, word
    wr(A_DADC + 32'h08, 32'(M_ADC));
    dbg_run = 1;
    fork dbg_traffic(); join_none

    wait_irq(1, 100 * P_DAC * NTAB);
    mech[MC_DMA_ADC_IRQ]++;
    capture = 0;
    rd_check("DMA_adc STATUS done", A_DADC + 32'h18, 32'h2);
    rd_check("DMA_adc COUNT", A_DADC + 32'h1C, 32'(M_ADC));
    check_buffer("use-case buffer", BUF1, M_ADC, 2);
    wr(A_DADC + 32'h18, 32'h6);
    @(negedge clk);
    check("DMA_adc irq cleared", 32'(irq[1]), 0);

    wait_irq(2, 2 * P_DAC * NTAB);
    mech[MC_DMA_DAC_IRQ]++;
    rd_check("DMA_dac STATUS done, no overrun", A_DDAC + 32'h18, 32'h2);
    dbg_run = 0;
    repeat (P_DAC + 20) @(negedge clk);      // the last sample is applied one tick later
    check("host traffic ran", 32'(n_dbg > 50), 1);
    check("every table sample reached the iDAC", 32'(n_tick > NTAB), 1);
    wr(A_DDAC + 32'h18, 32'h6);
    @(negedge clk);
    check("DMA_dac irq cleared", 32'(irq[2]), 0);

    // second run: the CPU changes the phase difference to 45 degrees and
    // re-launches both channels (the VCO decoder keeps running)
    timer_phase = 0;
    wr(A_IDAC + 32'h00, 32'h3);              // timer off while the table changes
    wr(A_IDAC + 32'h0C, 32'h8080);
    fill_table(3.14159265 / 4.0);
    for (int w = 0; w < NTAB / 2; w++) wr(TAB + 32'(4 * w), tab_word(w));
    n_tick = 0;
    wr(A_DDAC + 32'h00, TAB);
    wr(A_DDAC + 32'h08, 32'(NTAB));
    timer_phase = 1;
    wr(A_IDAC + 32'h00, 32'h7);
    wr(A_DLC + 32'h00, 32'h1);               // the dLC restarts from the next sample
    @(negedge dut.u_vco_dec.notif_o);
    samples.delete();
    fed.delete();
    capture = 1;
    wr(A_DADC + 32'h04, BUF1 + 32'h100);
    wr(A_DADC + 32'h08, 32'(M_ADC));
    dbg_run = 1;
    fork dbg_traffic(); join_none
    wait_irq(1, 100 * P_DAC * NTAB);
    capture = 0;
    rd_check("re-launched DMA_adc COUNT", A_DADC + 32'h1C, 32'(M_ADC));
    check_buffer("second-run buffer", BUF1 + 32'h100, M_ADC, 2);
    wr(A_DADC + 32'h18, 32'h6);
    wait_irq(2, 2 * P_DAC * NTAB);
    rd_check("re-launched DMA_dac done", A_DDAC + 32'h18, 32'h2);
    wr(A_DDAC + 32'h18, 32'h6);
    dbg_run = 0;
    repeat (P_DAC + 20) @(negedge clk);
    check("every second-run sample reached the iDAC", 32'(n_tick > NTAB), 1);
    if (n_tick > NTAB) mech[MC_PHASE_RELAUNCH]++;

    // 3. GSR use case
    timer_phase = 0;
    wr(A_IDAC + 32'h00, 32'h3);              // back to on-demand
    wr(A_IDAC + 32'h0C, 32'h4040);           // 2.56 uA
    wr(A_VCO + 32'h00, 32'h13);              // p only
    wr(A_DLC + 32'h04, 32'd3);
    wr(A_DLC + 32'h08, 32'd100);             // LOW
    wr(A_DLC + 32'h0C, 32'd170);             // HIGH
    wr(A_DLC + 32'h14, 32'h1);
    wr(A_DLC + 32'h00, 32'h3);               // range interrupt
    repeat (2) @(negedge dut.u_vco_dec.notif_o);
    samples.delete();
    fed.delete();
    capture = 1;
    wr(A_DADC + 32'h04, BUF2);
    wr(A_DADC + 32'h08, 32'd2);
    repeat (4) @(posedge dut.u_vco_dec.notif_o);
    check("in range: no dLC interrupt", 32'(irq[0]), 0);
    wr(A_IDAC + 32'h0C, 32'h40F0);           // skin current jumps to 9.6 uA
    wait_irq(0, 10 * Q_ADC);
    mech[MC_DLC_RANGE_IRQ]++;
    rd(A_VCO + 32'h0C, d);
    check("sample below LOW", 32'(signed'(d) < 100), 1);
    wr(A_IDAC + 32'h0C, 32'h4040);           // CPU re-biases the current
    repeat (3) @(posedge dut.u_vco_dec.notif_o);
    wr(A_DLC + 32'h14, 32'h1);
    repeat (3) @(posedge dut.u_vco_dec.notif_o);
    @(negedge clk);
    check("back in range after re-bias", 32'(irq[0]), 0);
    if (!irq[0]) mech[MC_REBIAS]++;
    wait_irq(1, 10 * Q_ADC);
    capture = 0;
    check_buffer("GSR buffer", BUF2, 2, 3);
    wr(A_DADC + 32'h18, 32'h6);
    wr(A_VCO + 32'h00, 32'h0);
    wr(A_DLC + 32'h00, 32'h0);
    check("VCOs off", 32'({vp_en, vn_en}), 0);

    // 4. Delta-Sigma decimation, R = 8, order 3: in steady state the output
    //    is R^3 times the input density: all ones gives 512, 1010... 256.
    //    DMA_adc stores the 16 outputs raw, one per data-ready slot.
    wr(A_DSM + 32'h04, 32'd8);
    wr(A_DSM + 32'h00, 32'h1);
    wr(A_DADC + 32'h00, A_DSM + 32'h08);
    wr(A_DADC + 32'h04, BUF2 + 32'h100);
    wr(A_DADC + 32'h10, 32'd4);
    wr(A_DADC + 32'h14, 32'h14);             // irq, slot, word, no dLC
    wr(A_DADC + 32'h08, 32'd16);
    dsm_outs.delete();
    for (int pat = 0; pat < 2; pat++) begin
      int outs;
      dsm_pattern.delete();
      if (pat == 0) dsm_pattern.push_back(1'b1);
      else begin dsm_pattern.push_back(1'b1); dsm_pattern.push_back(1'b0); end
      outs = 0;
      fork
        dsm_drive(8 * 8);
        begin
          repeat (8) begin
            @(posedge dut.dsm_ready);
            outs++;
            if (outs >= 4) begin
              @(negedge clk);
              check("CIC output", dut.u_dsm.out_q, pat == 0 ? 32'd512 : 32'd256);
              mech[MC_DSM_CIC]++;
            end
          end
        end
      join
    end
    rd(A_DSM + 32'h08, d);
    check("CIC output read by the CPU", d, 32'd256);
    wait_irq(1, 1000);
    check("16 CIC outputs seen", 32'(dsm_outs.size()), 32'd16);
    for (int i = 0; i < 16 && i < dsm_outs.size(); i++) begin
      rd(BUF2 + 32'h100 + 32'(4 * i), d);
      check($sformatf("CIC output %0d stored by DMA_adc", i), d, dsm_outs[i]);
      if (d == dsm_outs[i]) mech[MC_DSM_DMA]++;
    end
    wr(A_DADC + 32'h18, 32'h6);

    // summary
    repeat (10) @(negedge clk);
    for (int i = 0; i < MC_N; i++) begin
      mech_e m;
      m = mech_e'(i);
      $display("mechanism %-20s %0d", m.name(), mech[i]);
      if (mech[i] == 0 && (m != MC_VCO_WRAP || EXPECT_WRAP)) begin
        failures++;
        $display("FAIL mechanism %s never happened", m.name());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400ms;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
