// tb_dlc: self-checking test of the level-crossing sub-sampler.
// A reference model written with plain integers follows the same rule
// (level on a 2^k grid, discard within one step, emit {dir, steps} with the
// step count saturating at 127). The stream is a slow random walk with
// occasional large jumps, fed with random gaps. The testbench compares every
// answer (one cycle after each sample), the DLC_DIR/DLC_REQ outputs, the
// event counter, and the out-of-range and per-crossing interrupts.
module tb_dlc;
  import heep_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE;
  obi_rsp_t rsp;
  logic in_valid = 1'b0;
  logic [31:0] in_data = '0;
  logic out_valid, out_event, dir, dreq, irq;
  logic [7:0] out_data;
  int checks = 0, failures = 0;

  dlc dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .in_valid_i(in_valid), .in_data_i(in_data), .out_valid_o(out_valid),
    .out_event_o(out_event), .out_data_o(out_data), .dir_o(dir), .req_o(dreq), .irq_o(irq));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
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

  // reference model state
  longint lvl;
  bit     started;
  int     k;
  int     n_events = 0, n_discard = 0, n_up = 0, n_down = 0, n_sat = 0;

  // send one sample and compare the answer
  task automatic send(input int x);
    longint d, n;
    bit ev, up;
    ev = 0; up = 0; n = 0;
    if (!started) begin
      lvl = x;
      started = 1;
    end else begin
      d = longint'(x) - lvl;
      if (d >= (longint'(1) << k)) begin
        n = d >> k; if (n > 127) n = 127;
        lvl = lvl + (n << k); ev = 1; up = 1;
      end else if (-d >= (longint'(1) << k)) begin
        n = (-d) >> k; if (n > 127) n = 127;
        lvl = lvl - (n << k); ev = 1; up = 0;
      end
    end
    @(negedge clk);
    in_valid = 1'b1;
    in_data  = 32'(x);
    @(negedge clk);
    in_valid = 1'b0;
    check("out_valid", 32'(out_valid), 1);
    check("out_event", 32'(out_event), 32'(ev));
    check("req pad", 32'(dreq), 32'(ev));
    if (ev) begin
      check("out_data", 32'(out_data), 32'({up, 7'(n)}));
      check("dir pad", 32'(dir), 32'(up));
      n_events++;
      if (up) n_up++; else n_down++;
      if (n == 127) n_sat++;
    end else begin
      n_discard++;
    end
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  int x;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    k = 4;
    wr(8'h04, 32'(k));
    wr(8'h00, 32'h1);          // enable, no interrupts
    started = 0;
    x = 1000;
    for (int i = 0; i < 1500; i++) begin
      if ($urandom_range(0, 99) == 0) x = x + $urandom_range(0, 8000) - 4000;
      else                            x = x + $urandom_range(0, 20) - 10;
      send(x);
    end
    rd(8'h10, d); check("LEVEL", d, 32'(lvl));
    rd(8'h18, d); check("EVENTS", d, 32'(n_events));
    check("interrupt stays low", 32'(irq), 0);

    // out-of-range interrupt (GSR use: wake the CPU to re-bias)
    wr(8'h08, 32'(x - 200));
    wr(8'h0C, 32'(x + 200));
    wr(8'h00, 32'h3);
    started = 0;
    send(x); send(x + 50); send(x - 150);
    check("in range: no interrupt", 32'(irq), 0);
    send(x + 300);
    check("out of range interrupt", 32'(irq), 1);
    rd(8'h14, d); check("STATUS pending", d, 32'h1);
    wr(8'h14, 32'h1);
    check("cleared", 32'(irq), 0);
    send(x - 400);
    check("low side interrupt", 32'(irq), 1);
    wr(8'h14, 32'h1);
    // per-crossing interrupt
    wr(8'h00, 32'h5);
    started = 0;
    send(x); send(x + 3);
    check("no crossing, no interrupt", 32'(irq), 0);
    send(x + 40);
    check("crossing interrupt", 32'(irq), 1);

    check("mechanisms: discards, up, down, saturation",
          32'(n_discard > 0 && n_up > 0 && n_down > 0 && n_sat > 0), 1);
    $display("dlc: %0d events (%0d up, %0d down, %0d saturated), %0d discarded",
             n_events, n_up, n_down, n_sat, n_discard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
