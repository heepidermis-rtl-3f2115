// tb_obi_demux: self-checking test of the peripheral-bus demultiplexer.
// Two instances: the external-bus configuration (six windows, unmapped
// windows answered locally with zero) and the always-on configuration (three
// windows, everything past the second window going to the last port). Each
// slave model answers with its own index and the offset, so the testbench can
// tell which slave served each access; writes must reach only their slave.
module tb_obi_demux;
  import heep_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req_a = OBI_REQ_IDLE, req_b = OBI_REQ_IDLE;
  obi_rsp_t rsp_a, rsp_b;
  obi_req_t [5:0] sa_req;
  obi_rsp_t [5:0] sa_rsp;
  obi_req_t [2:0] sb_req;
  obi_rsp_t [2:0] sb_rsp;
  int checks = 0, failures = 0;

  obi_demux #(.N(6)) dut_a (.clk_i(clk), .rst_ni(rst_n), .req_i(req_a), .rsp_o(rsp_a),
    .s_req_o(sa_req), .s_rsp_i(sa_rsp));
  obi_demux #(.N(3), .DEFAULT_LAST(1'b1)) dut_b (.clk_i(clk), .rst_ni(rst_n), .req_i(req_b),
    .rsp_o(rsp_b), .s_req_o(sb_req), .s_rsp_i(sb_rsp));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // slave models: read data = {index, low address byte}, count writes
  int wr_a [6], wr_b [3];
  logic [5:0] rva = '0;
  logic [2:0] rvb = '0;
  logic [31:0] rda [6], rdb [3];
  always_comb begin
    for (int i = 0; i < 6; i++) sa_rsp[i] = '{gnt: 1'b1, rvalid: rva[i], rdata: rda[i]};
    for (int i = 0; i < 3; i++) sb_rsp[i] = '{gnt: 1'b1, rvalid: rvb[i], rdata: rdb[i]};
  end
  always @(posedge clk) begin
    for (int i = 0; i < 6; i++) begin
      rva[i] <= sa_req[i].req;
      rda[i] <= {16'(i + 1), 8'h0, sa_req[i].addr[7:0]};
      if (sa_req[i].req && sa_req[i].we) wr_a[i]++;
    end
    for (int i = 0; i < 3; i++) begin
      rvb[i] <= sb_req[i].req;
      rdb[i] <= {16'(i + 1), 8'h0, sb_req[i].addr[7:0]};
      if (sb_req[i].req && sb_req[i].we) wr_b[i]++;
    end
  end

  task automatic acc_a(input logic [31:0] a, input bit we, output logic [31:0] d);
    @(negedge clk);
    req_a = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: 32'h1};
    #1 check("grant a", 32'(rsp_a.gnt), 1);
    @(negedge clk);
    req_a = OBI_REQ_IDLE;
    check("rvalid a", 32'(rsp_a.rvalid), 1);
    d = rsp_a.rdata;
  endtask

  task automatic acc_b(input logic [31:0] a, input bit we, output logic [31:0] d);
    @(negedge clk);
    req_b = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: 32'h1};
    #1 check("grant b", 32'(rsp_b.gnt), 1);
    @(negedge clk);
    req_b = OBI_REQ_IDLE;
    check("rvalid b", 32'(rsp_b.rvalid), 1);
    d = rsp_b.rdata;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  int exp_wa [6], exp_wb [3];
  initial begin
    for (int i = 0; i < 6; i++) begin wr_a[i] = 0; exp_wa[i] = 0; end
    for (int i = 0; i < 3; i++) begin wr_b[i] = 0; exp_wb[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      int w, o;
      bit we;
      w  = $urandom_range(0, 9);
      o  = $urandom_range(0, 63) * 4;
      we = $urandom_range(0, 1);
      acc_a(EXT_BASE + 32'(w * 256 + o), we, d);
      if (w < 6) begin
        if (we) exp_wa[w]++;
        else check("ext routing", d, {16'(w + 1), 8'h0, 8'(o)});
      end else if (!we) begin
        check("unmapped reads zero", d, 32'h0);
      end
      acc_b(AO_BASE + 32'(w * 256 + o), we, d);
      if (we) exp_wb[(w < 2) ? w : 2]++;
      else check("ao routing", d, {16'(((w < 2) ? w : 2) + 1), 8'h0, 8'(o)});
    end
    @(negedge clk);
    for (int i = 0; i < 6; i++) check("ext writes", 32'(wr_a[i]), 32'(exp_wa[i]));
    for (int i = 0; i < 3; i++) check("ao writes", 32'(wr_b[i]), 32'(exp_wb[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
