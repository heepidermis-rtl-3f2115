// tb_vco_decoder: self-checking test of the VCO decoder.
// The testbench plays the two oscillator counters: it keeps its own binary
// counts, advances them by random amounts and drives them in Gray code. For
// each sample it predicts the differentiated value (p, n, or p - n in the
// pseudo-differential mode, all modulo 2^26, including a counter wrap) and
// compares it with OUT. It checks on-demand triggering, the timer period
// between notif pulses, STATUS, that the raw taps are captured and that the
// ring phase is decoded: the tap states are generated by letting an edge run
// round a 31-inverter ring (tap i+1 follows tap i) for s inverter delays
// from the state with taps alternating 0,1,0,... and the decoded phase must
// be s mod 62.
module tb_vco_decoder;
  import heep_pkg::*;
  localparam int W = 26;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE;
  obi_rsp_t rsp;
  logic [W-1:0] cp, cn;        // testbench counters (binary)
  logic [30:0]  taps_p, taps_n;
  logic en_p, en_n, notif;
  logic [31:0] data;
  int checks = 0, failures = 0;

  vco_decoder dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .gray_p_i(cp ^ (cp >> 1)), .gray_n_i(cn ^ (cn >> 1)), .taps_p_i(taps_p), .taps_n_i(taps_n),
    .vco_en_p_o(en_p), .vco_en_n_o(en_n), .notif_o(notif), .data_o(data));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(a), wdata: d};
    @(negedge clk);
    req = OBI_REQ_IDLE;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'(a), wdata: 32'h0};
    @(negedge clk);
    req = OBI_REQ_IDLE;
    d = rsp.rdata;
  endtask

  int n_notif = 0;
  longint cyc = 0, last_notif = 0, gap = 0;
  always @(posedge clk) begin
    cyc++;
    if (notif) begin
      gap = cyc - last_notif;
      last_notif = cyc;
      n_notif++;
    end
  end

  // ring state after s inverter delays
  function automatic logic [30:0] ring_state(int s);
    logic [30:0] t;
    for (int i = 0; i < 31; i++) t[i] = i[0];
    for (int k = 0; k < s; k++) t[k % 31] = ~t[k % 31];
    return t;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  logic [W-1:0] lp, ln, ap, an;
  logic [31:0] expv;
  initial begin
    cp = W'(2 ** W - 40);      // close to the wrap
    cn = W'(12345);
    taps_p = 31'h2AAA_5555;
    taps_n = 31'h1234_5678;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wr(8'h00, 32'h0000_000B);  // en_p, en_n, pseudo-differential
    check("en_p", 32'(en_p), 1);
    check("en_n", 32'(en_n), 1);
    repeat (4) @(negedge clk);
    wr(8'h08, 32'h1);          // first trigger sets the reference
    repeat (2) @(negedge clk);
    lp = cp; ln = cn;
    for (int i = 0; i < 12; i++) begin
      int mode;
      mode = i % 3;             // 0 p, 1 n, 2 p - n
      wr(8'h00, 32'(3 | (mode << 2)));
      ap = W'($urandom_range(0, 5000));
      an = W'($urandom_range(0, 5000));
      cp = cp + ap;
      cn = cn + an;
      repeat (4) @(negedge clk);   // let the synchronisers settle
      wr(8'h08, 32'h1);
      @(negedge clk);
      expv = (mode == 0) ? 32'(ap) : (mode == 1) ? 32'(an) : 32'(ap) - 32'(an);
      rd(8'h10, d); check("status new", d, 32'h1);
      rd(8'h0C, d); check($sformatf("OUT mode %0d", mode), d, expv);
      check("data_o", data, expv);
      rd(8'h10, d); check("status cleared", d, 32'h0);
    end
    rd(8'h1C, d); check("fine p", d, 32'(taps_p));
    rd(8'h20, d); check("fine n", d, 32'(taps_n));
    rd(8'h14, d); check("count p", d, 32'(cp));
    check("notif count", 32'(n_notif), 13);

    // periodic sampling every 50 cycles, counters run at 3 and 1 per cycle
    wr(8'h04, 32'd50);
    wr(8'h00, 32'h0000_001B);
    fork
      begin
        repeat (600) begin
          @(negedge clk);
          cp = cp + 3;
          cn = cn + 1;
        end
      end
    join
    wr(8'h00, 32'h0000_000B);
    check("timer period", 32'(gap), 32'd50);
    check("periodic p-n", data, 32'd100);

    // ring phase decoding
    for (int k = 0; k < 30; k++) begin
      int sp, sn;
      sp = (k < 8) ? k * 9 % 62 : $urandom_range(0, 61);
      sn = $urandom_range(0, 200);
      taps_p = ring_state(sp);
      taps_n = ring_state(sn);
      repeat (3) @(negedge clk);
      wr(8'h08, 32'h1);
      rd(8'h24, d); check($sformatf("phase p after %0d delays", sp), d, 32'(sp % 62));
      rd(8'h28, d); check($sformatf("phase n after %0d delays", sn), d, 32'(sn % 62));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
