// tb_refs_ctrl: self-checking test of the reference calibration registers.
// Checks the mid-scale reset values, writes and read-back of each of the
// three codes, byte enables, and that every code reaches its output.
module tb_refs_ctrl;
  import heep_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE;
  obi_rsp_t rsp;
  logic [7:0] i1, i2, v;
  int checks = 0, failures = 0;

  refs_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .iref1_cal_o(i1), .iref2_cal_o(i2), .vref_cal_o(v));

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

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  logic [7:0] val [3];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check("reset iref1", 32'(i1), 32'h80);
    check("reset iref2", 32'(i2), 32'h80);
    check("reset vref", 32'(v), 32'h80);
    for (int round = 0; round < 4; round++) begin
      for (int k = 0; k < 3; k++) begin
        val[k] = 8'($urandom);
        wr(8'(4 * k), 32'(val[k]));
      end
      for (int k = 0; k < 3; k++) begin
        rd(8'(4 * k), d);
        check("readback", d, 32'(val[k]));
      end
      check("iref1 out", 32'(i1), 32'(val[0]));
      check("iref2 out", 32'(i2), 32'(val[1]));
      check("vref out", 32'(v), 32'(val[2]));
    end
    wr(8'h04, 32'h0000_00FF, 4'h0);
    check("no byte enable", 32'(i2), 32'(val[1]));
    rd(8'h0C, d);
    check("unmapped reads 0", d, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
