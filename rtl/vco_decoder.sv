// vco_decoder: turns the two VCO counters into ADC samples.
//
// A VCO-based ADC measures voltage as frequency: the count of oscillator
// edges in a sampling interval is the sample. The decoder synchronises both
// Gray-coded counters (two flip-flops per bit), converts them to binary and,
// on each sampling event, subtracts the previous reading of each counter
// (differentiation, modulo 2^CNT_W). MODE selects what is placed in the
// 32-bit OUT register: the p difference, the n difference, or p minus n
// (pseudo-differential mode, both channels at once). All of that follows
// the paper. Sampling events come from an integrated timer (every PERIOD
// cycles when CTRL.timer_en = 1) or from a CPU write to TRIGGER. Each new
// sample pulses notif_o, which requests the ADC-side DMA channel.
//
// The 31 inverter outputs of each ring are captured into FINE_P / FINE_N at
// every sample, and decoded into a ring phase PHASE_P / PHASE_N in 0..61
// (6 bits): in a ring of an odd number of inverters exactly one pair of
// neighbouring taps holds equal values, and that pair marks where the edge
// is travelling. With tap i+1 driven by tap i, the phase is the index of the
// next tap to switch (the tap just after the equal pair) plus 31 when the
// last tap is high; it advances by one per inverter delay, 62 per period,
// and is 0 just before tap 0 rises (the edge that advances the counter).
// Software can combine it with the count (count * 62 + phase difference)
// for the finer resolution the paper mentions; the paper says only that the
// taps are exposed for that, so the decoding rule here is this design's.
//
// Registers: 0x00 CTRL {timer_en[4], mode[3:2] (0 p, 1 n, 2/3 p-n), en_n[1],
// en_p[0]}; 0x04 PERIOD; 0x08 TRIGGER (write); 0x0C OUT (signed);
// 0x10 STATUS {new sample, cleared by reading OUT}; 0x14 COUNT_P;
// 0x18 COUNT_N; 0x1C FINE_P; 0x20 FINE_N; 0x24 PHASE_P; 0x28 PHASE_N.
// Latency: OUT and notif_o change one cycle after the sampling event; the
// counters are seen three cycles late through the synchronisers.
module vco_decoder
  import heep_pkg::*;
#(
  parameter int unsigned CNT_W = 26,
  parameter int unsigned TAPS  = 31
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  obi_req_t          reg_req_i,
  output obi_rsp_t          reg_rsp_o,
  input  logic [CNT_W-1:0]  gray_p_i,
  input  logic [CNT_W-1:0]  gray_n_i,
  input  logic [TAPS-1:0]   taps_p_i,
  input  logic [TAPS-1:0]   taps_n_i,
  output logic              vco_en_p_o,
  output logic              vco_en_n_o,
  output logic              notif_o,
  output logic [31:0]       data_o
);
  typedef enum logic [1:0] {MODE_P = 2'd0, MODE_N = 2'd1, MODE_DIFF = 2'd2, MODE_DIFF2 = 2'd3} mode_e;

  logic [4:0]       ctrl_q;
  logic [31:0]      period_q, cnt_q;
  logic [31:0]      out_q;
  logic             new_q;
  logic [CNT_W-1:0] sp1_q, sp2_q, sn1_q, sn2_q;   // synchronisers
  logic [CNT_W-1:0] bin_p, bin_n;
  logic [CNT_W-1:0] prev_p_q, prev_n_q;
  logic [CNT_W-1:0] dp, dn;
  logic [TAPS-1:0]  tp1_q, tp2_q, tn1_q, tn2_q, fine_p_q, fine_n_q;
  logic [31:0]      sample;
  logic             wr, rd, sample_ev, tick;
  logic [7:0]       off;
  logic [31:0]      rval, rdata_q;
  logic             rvalid_q;
  mode_e            mode;

  // ring phase 0..2*TAPS-1 from the tap values (see above)
  function automatic logic [5:0] ring_phase(logic [TAPS-1:0] t);
    logic [5:0] nxt;
    nxt = '0;
    for (int i = TAPS - 1; i >= 0; i--)
      if (t[i] == t[(i + TAPS - 1) % TAPS]) nxt = 6'(i);
    return t[TAPS-1] ? nxt + 6'(TAPS) : nxt;
  endfunction

  function automatic logic [CNT_W-1:0] gray2bin(logic [CNT_W-1:0] g);
    logic [CNT_W-1:0] b;
    b[CNT_W-1] = g[CNT_W-1];
    for (int i = CNT_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  assign wr   = reg_req_i.req && reg_req_i.we;
  assign rd   = reg_req_i.req && !reg_req_i.we;
  assign off  = reg_req_i.addr[7:0];
  assign mode = mode_e'(ctrl_q[3:2]);
  assign tick = ctrl_q[4] && cnt_q == 32'd0;
  assign sample_ev = tick || (wr && off == 8'h08);

  assign bin_p = gray2bin(sp2_q);
  assign bin_n = gray2bin(sn2_q);
  assign dp    = bin_p - prev_p_q;
  assign dn    = bin_n - prev_n_q;

  always_comb begin
    unique case (mode)
      MODE_P:  sample = 32'(dp);
      MODE_N:  sample = 32'(dn);
      default: sample = 32'(dp) - 32'(dn);
    endcase
  end

  always_comb begin
    unique case (off)
      8'h00: rval = 32'(ctrl_q);
      8'h04: rval = period_q;
      8'h0C: rval = out_q;
      8'h10: rval = 32'(new_q);
      8'h14: rval = 32'(bin_p);
      8'h18: rval = 32'(bin_n);
      8'h1C: rval = 32'(fine_p_q);
      8'h20: rval = 32'(fine_n_q);
      8'h24: rval = 32'(ring_phase(fine_p_q));
      8'h28: rval = 32'(ring_phase(fine_n_q));
      default: rval = '0;
    endcase
  end

  // clock-domain crossing of the oscillator-side values
  always_ff @(posedge clk_i) begin
    sp1_q <= gray_p_i;  sp2_q <= sp1_q;
    sn1_q <= gray_n_i;  sn2_q <= sn1_q;
    tp1_q <= taps_p_i;  tp2_q <= tp1_q;
    tn1_q <= taps_n_i;  tn2_q <= tn1_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctrl_q   <= '0;
      period_q <= 32'd1;
      cnt_q    <= '0;
      out_q    <= '0;
      new_q    <= 1'b0;
      prev_p_q <= '0;
      prev_n_q <= '0;
      fine_p_q <= '0;
      fine_n_q <= '0;
      notif_o  <= 1'b0;
      rdata_q  <= '0;
      rvalid_q <= 1'b0;
    end else begin
      notif_o  <= 1'b0;
      rvalid_q <= reg_req_i.req;
      if (rd) rdata_q <= rval;
      if (rd && off == 8'h0C) new_q <= 1'b0;
      if (wr) begin
        unique case (off)
          8'h00: ctrl_q   <= 5'(apply_be(32'(ctrl_q), reg_req_i.wdata, reg_req_i.be));
          8'h04: period_q <= apply_be(period_q, reg_req_i.wdata, reg_req_i.be);
          default: ;
        endcase
      end
      if (!ctrl_q[4] || tick) cnt_q <= period_q - 32'd1;
      else                    cnt_q <= cnt_q - 32'd1;
      if (sample_ev) begin
        prev_p_q <= bin_p;
        prev_n_q <= bin_n;
        fine_p_q <= tp2_q;
        fine_n_q <= tn2_q;
        out_q    <= sample;
        new_q    <= 1'b1;
        notif_o  <= 1'b1;
      end
    end
  end

  assign reg_rsp_o.gnt    = 1'b1;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;
  assign vco_en_p_o = ctrl_q[0];
  assign vco_en_n_o = ctrl_q[1];
  assign data_o     = out_q;

endmodule
