// tb_dma_channel: self-checking test of one DMA channel.
// The testbench provides a word memory behind the read and write masters,
// with grants withheld at random (bus stalls) and answers one cycle after
// each grant, and a stand-in for the dLC that keeps odd samples and drops
// even ones. Three transfers are checked against values computed here:
//  1. 16 words copied without slots;
//  2. 12 half-words to one fixed register address, one per slot, with the
//     write count following the slots and an overrun flagged when two slots
//     arrive with one still pending;
//  3. 10 samples through the dLC path: only emitted bytes are written,
//     SIZE counts writes, and the interrupt rises at the end.
module tb_dma_channel;
  import heep_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE, rd_req, wr_req;
  obi_rsp_t rsp, rd_rsp, wr_rsp;
  logic slot = 1'b0, dlc_v, dlc_vi = 1'b0, dlc_ev = 1'b0, irq;
  logic [31:0] dlc_d;
  logic [7:0] dlc_di = '0;
  int checks = 0, failures = 0;

  dma_channel dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .rd_req_o(rd_req), .rd_rsp_i(rd_rsp), .wr_req_o(wr_req), .wr_rsp_i(wr_rsp),
    .slot_i(slot), .dlc_valid_o(dlc_v), .dlc_data_o(dlc_d), .dlc_valid_i(dlc_vi),
    .dlc_event_i(dlc_ev), .dlc_data_i(dlc_di), .irq_o(irq));

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

  // memory with random stalls
  logic [31:0] mem [1024];
  logic rgnt = 1'b0, wgnt = 1'b0, rv_q = 1'b0, wv_q = 1'b0;
  logic [31:0] rdata_q = '0;
  int n_stall = 0, n_writes = 0;
  logic [31:0] last_waddr, last_wdata;
  logic [3:0]  last_be;
  always @(negedge clk) begin
    rgnt <= ($urandom_range(0, 3) != 0);
    wgnt <= ($urandom_range(0, 3) != 0);
  end
  assign rd_rsp = '{gnt: rgnt, rvalid: rv_q, rdata: rdata_q};
  assign wr_rsp = '{gnt: wgnt, rvalid: wv_q, rdata: 32'h0};
  always @(posedge clk) begin
    rv_q <= rd_req.req && rgnt;
    wv_q <= wr_req.req && wgnt;
    if ((rd_req.req && !rgnt) || (wr_req.req && !wgnt)) n_stall++;
    if (rd_req.req && rgnt) rdata_q <= mem[rd_req.addr[11:2]];
    if (wr_req.req && wgnt) begin
      for (int i = 0; i < 4; i++)
        if (wr_req.be[i]) mem[wr_req.addr[11:2]][8*i +: 8] <= wr_req.wdata[8*i +: 8];
      n_writes++;
      last_waddr = wr_req.addr;
      last_wdata = wr_req.wdata;
      last_be    = wr_req.be;
    end
  end

  // dLC stand-in: keep odd samples, answer one cycle later
  always @(posedge clk) begin
    dlc_vi <= dlc_v;
    dlc_ev <= dlc_v && dlc_d[0];
    dlc_di <= dlc_d[8:1];
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  logic [15:0] halves [12];
  int n_overrun_seen = 0;
  initial begin
    for (int i = 0; i < 1024; i++) mem[i] = 32'h1000_0000 + 32'(i * 7);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. word copy 0x000 -> 0x400
    wr(8'h00, 32'h000); wr(8'h04, 32'h400); wr(8'h0C, 32'd4); wr(8'h10, 32'd4);
    wr(8'h14, 32'h10);                 // word, no slot, irq enable
    wr(8'h08, 32'd16);
    wait (irq === 1'b1);
    for (int i = 0; i < 16; i++) check("word copy", mem[256 + i], 32'h1000_0000 + 32'(i * 7));
    rd(8'h18, d); check("status done", d, 32'h2);
    rd(8'h1C, d); check("count", d, 32'd16);
    wr(8'h18, 32'h2);
    check("irq cleared", 32'(irq), 0);

    // 2. half-words, one per slot, to a fixed address
    for (int i = 0; i < 6; i++) mem[64 + i] = {16'(16'hA000 + 2 * i + 1), 16'(16'hA000 + 2 * i)};
    for (int i = 0; i < 12; i++) halves[i] = 16'hA000 + 16'(i);
    wr(8'h00, 32'h100); wr(8'h04, 32'h802); wr(8'h0C, 32'd2); wr(8'h10, 32'd0);
    wr(8'h14, 32'h15);                 // half, slot, irq
    n_writes = 0;
    wr(8'h08, 32'd12);
    for (int i = 0; i < 12; i++) begin
      repeat (30) @(negedge clk);
      check("writes follow slots", 32'(n_writes), 32'(i));
      slot = 1'b1; @(negedge clk); slot = 1'b0;
      repeat (25) @(negedge clk);
      check("half-word data", 32'(last_wdata[31:16]), 32'(halves[i]));
      check("half-word lanes", 32'(last_be), 32'hC);
      check("fixed address", last_waddr, 32'h800);
    end
    wait (irq === 1'b1);
    rd(8'h18, d); check("no overrun", d, 32'h2);
    wr(8'h18, 32'h2);

    // overrun: three quick slots while the channel is busy
    wr(8'h00, 32'h100); wr(8'h08, 32'd4);
    @(negedge clk); slot = 1'b1; @(negedge clk); @(negedge clk); @(negedge clk); slot = 1'b0;
    repeat (40) @(negedge clk);
    rd(8'h18, d); check("overrun flagged", 32'(d[2]), 1);
    if (d[2]) n_overrun_seen++;
    repeat (4) begin
      slot = 1'b1; @(negedge clk); slot = 1'b0; repeat (20) @(negedge clk);
    end
    wait (irq === 1'b1);
    wr(8'h18, 32'h6);

    // 3. through the dLC: samples 0x300.., odd ones kept
    for (int i = 0; i < 40; i++) mem[192 + i] = 32'(i * 3);   // odd when i is odd
    for (int i = 0; i < 16; i++) mem[320 + i] = 32'h0;
    wr(8'h00, 32'h300); wr(8'h04, 32'h500); wr(8'h0C, 32'd4); wr(8'h10, 32'd1);
    wr(8'h14, 32'h18);                 // dlc, no slot, irq
    wr(8'h08, 32'd10);
    wait (irq === 1'b1);
    for (int j = 0; j < 10; j++) begin
      int i;
      i = 2 * j + 1;                     // j-th odd sample
      check("dlc byte", 32'(mem[320 + j / 4][8*(j%4) +: 8]), 32'(8'((i * 3) >> 1)));
    end
    rd(8'h00, d); check("source advanced past discards", d, 32'h300 + 32'd4 * 20);
    check("stalls exercised", 32'(n_stall > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
