// tb_sram_bank: self-checking test of a 16 KiB RAM bank at its full size.
// Random word, half-word and byte writes over the whole bank are mirrored in
// a testbench array; reads return data exactly one cycle after the grant and
// must match the mirror. The last word and aliasing above the bank are
// exercised too.
module tb_sram_bank;
  import heep_pkg::*;
  localparam int NW = 4096;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE;
  obi_rsp_t rsp;
  int checks = 0, failures = 0;

  sram_bank dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [31:0] mirror [NW];

  task automatic wr(input logic [31:0] a, input logic [31:0] d, input logic [3:0] be);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b1, be: be, addr: a, wdata: d};
    #1 check("grant", 32'(rsp.gnt), 1);
    @(negedge clk);
    req = OBI_REQ_IDLE;
    check("write ack", 32'(rsp.rvalid), 1);
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: 32'h0};
    @(negedge clk);
    req = OBI_REQ_IDLE;
    check("read rvalid", 32'(rsp.rvalid), 1);
    d = rsp.rdata;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NW; i += 1) begin
      mirror[i] = $urandom;
      wr(32'(i * 4), mirror[i], 4'hF);
    end
    for (int n = 0; n < 3000; n++) begin
      int w;
      logic [3:0] be;
      logic [31:0] v;
      w  = $urandom_range(0, NW - 1);
      be = 4'($urandom);
      v  = $urandom;
      wr(32'(w * 4), v, be);
      for (int b = 0; b < 4; b++) if (be[b]) mirror[w][8*b +: 8] = v[8*b +: 8];
      w = $urandom_range(0, NW - 1);
      rd(32'(w * 4), d);
      check("read", d, mirror[w]);
    end
    rd(32'((NW - 1) * 4), d); check("last word", d, mirror[NW - 1]);
    rd(32'(NW * 4 + 8), d);   check("aliases to word 2", d, mirror[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
