// tb_amux_ctrl: self-checking test of the analog-multiplexer controller.
// Checks enable and select outputs and read-back, and that refresh pulses
// exactly once for each change of enable or select and never for a write
// that leaves them as they were.
module tb_amux_ctrl;
  import heep_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE;
  obi_rsp_t rsp;
  logic en, refresh;
  logic [3:0] sel;
  int checks = 0, failures = 0;
  int n_refresh = 0;

  amux_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .en_o(en), .sel_o(sel), .refresh_o(refresh));

  always @(posedge clk) if (refresh) n_refresh++;

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
    @(negedge clk);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'(a), wdata: 32'h0};
    @(negedge clk);
    req = OBI_REQ_IDLE;
    d = rsp.rdata;
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  int exp_refresh = 0;
  logic [3:0] cur = 4'h0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wr(8'h00, 32'h1); exp_refresh++;
    check("enable", 32'(en), 1);
    check("refresh on enable", 32'(n_refresh), 32'(exp_refresh));
    for (int i = 0; i < 12; i++) begin
      logic [3:0] s;
      s = 4'($urandom_range(0, 3));
      wr(8'h04, 32'(s));
      if (s != cur) exp_refresh++;
      cur = s;
      check("sel", 32'(sel), 32'(s));
      check("refresh count", 32'(n_refresh), 32'(exp_refresh));
    end
    rd(8'h04, d); check("sel readback", d, 32'(cur));
    rd(8'h00, d); check("en readback", d, 32'h1);
    wr(8'h00, 32'h0); exp_refresh++;
    check("disable", 32'(en), 0);
    check("refresh on disable", 32'(n_refresh), 32'(exp_refresh));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
