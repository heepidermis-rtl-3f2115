// tb_idac_ctrl: self-checking test of the iDAC controller.
//
// Checks register read-back, the on-demand path (a CURRENT write reaches both
// codes in the next cycle, together, with one refresh pulse), and the
// periodic path: with the timer on, writes only stage the value, and the
// codes, refresh and DMA slot change exactly every PERIOD cycles.
module tb_idac_ctrl;
  import heep_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE;
  obi_rsp_t rsp;
  logic en1, en2, refresh, slot;
  logic [7:0] cal1, cal2, code1, code2;
  int checks = 0, failures = 0;

  idac_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .idac1_en_o(en1), .idac2_en_o(en2), .idac1_cal_o(cal1), .idac2_cal_o(cal2),
    .idac1_code_o(code1), .idac2_code_o(code2), .refresh_o(refresh), .dma_slot_o(slot));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] be = 4'hF);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b1, be: be, addr: 32'(a), wdata: d};
    @(negedge clk);
    req = OBI_REQ_IDLE;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'(a), wdata: 32'h0};
    @(negedge clk);
    req = OBI_REQ_IDLE;
    check("rvalid", 32'(rsp.rvalid), 32'd1);
    d = rsp.rdata;
  endtask

  // count refresh and slot pulses, remember when they happen
  int n_refresh = 0, n_slot = 0;
  longint cyc = 0, last_slot = -1;
  int bad_period = 0;
  int exp_period = 0;
  always @(posedge clk) begin
    cyc++;
    if (refresh) n_refresh++;
    if (slot) begin
      if (last_slot >= 0 && exp_period != 0 && cyc - last_slot != exp_period) bad_period++;
      last_slot = cyc;
      n_slot++;
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // registers
    wr(8'h00, 32'h3);
    wr(8'h04, 32'h5A);
    wr(8'h08, 32'hA5);
    rd(8'h00, d); check("ctrl", d, 32'h3);
    rd(8'h04, d); check("cal1", d, 32'h5A);
    rd(8'h08, d); check("cal2", d, 32'hA5);
    check("en1", 32'(en1), 1); check("en2", 32'(en2), 1);
    check("cal1 out", 32'(cal1), 32'h5A); check("cal2 out", 32'(cal2), 32'hA5);

    // on-demand update: both codes together, one cycle after the write
    n_refresh = 0;
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'h0C, wdata: 32'h0000_C312};
    @(posedge clk); #1;
    check("on-demand code1", 32'(code1), 32'h12);
    check("on-demand code2", 32'(code2), 32'hC3);
    check("refresh pulse", 32'(refresh), 1);
    @(negedge clk); req = OBI_REQ_IDLE;
    // half-word write of the upper byte only
    wr(8'h0C, 32'h0000_7700, 4'h2);
    check("byte-enable code1", 32'(code1), 32'h12);
    check("byte-enable code2", 32'(code2), 32'h77);
    @(negedge clk);
    check("refresh count", 32'(n_refresh), 2);
    check("no slot on demand", 32'(n_slot), 0);

    // periodic update every 7 cycles
    wr(8'h10, 32'd7);
    exp_period = 7;
    wr(8'h00, 32'h7);
    wr(8'h0C, 32'h0000_0102);
    check("staged only code1", 32'(code1), 32'h12);   // timer has not ticked yet
    wait (slot === 1'b1);
    #1;
    check("tick code1", 32'(code1), 32'h02);
    check("tick code2", 32'(code2), 32'h01);
    rd(8'h14, d); check("CODES", d, 32'h0102);
    // stream 5 new values, each written right after a slot as a DMA would
    for (int i = 0; i < 5; i++) begin
      @(posedge clk); #1;
      wait (slot === 1'b1);
      @(negedge clk);
      req = '{req: 1'b1, we: 1'b1, be: 4'h3, addr: 32'h0C, wdata: 32'(16'h1010 * (i + 3))};
      @(negedge clk); req = OBI_REQ_IDLE;
      wait (slot === 1'b1); #1;
      check("stream code1", 32'(code1), 32'((8'h10 * (i + 3)) & 8'hFF));
      check("stream code2", 32'(code2), 32'((8'h10 * (i + 3)) & 8'hFF));
    end
    check("slot period", 32'(bad_period), 0);
    check("slots seen", 32'(n_slot >= 6), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
