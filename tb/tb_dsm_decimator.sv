// tb_dsm_decimator: self-checking test of the CIC decimator.
// A Delta-Sigma bit stream with a slowly varying density of ones is driven on
// DSM_IN, one bit per DSM_CLK period (DSM_CLK is 4x slower than the system
// clock). The testbench keeps every bit and computes each expected output
// directly as a convolution with the third-order CIC kernel (three R-long
// boxes convolved), independent of the integrator/comb structure of the
// filter. It checks every output, the number of data_ready pulses, STATUS,
// and the clamping of the decimation register.
module tb_dsm_decimator;
  import heep_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t req = OBI_REQ_IDLE;
  obi_rsp_t rsp;
  logic dsm_clk = 1'b0, dsm_in = 1'b0, ready;
  int checks = 0, failures = 0;

  dsm_decimator dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp),
    .dsm_clk_i(dsm_clk), .dsm_in_i(dsm_in), .data_ready_o(ready));

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

  localparam int R = 8;
  localparam int NBITS = 400;
  int bits [NBITS];
  int h [3*R];
  int nbits = 0, nout = 0;

  // expected output m: kernel applied to the bits ending at bit (m+1)R-1
  function automatic int expected(int m);
    int acc, j, idx;
    acc = 0;
    for (j = 0; j < 3 * R - 2; j++) begin
      idx = (m + 1) * R - 1 - j;
      if (idx >= 0 && idx < nbits) acc += h[j] * bits[idx];
    end
    return acc;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d;
  initial begin
    int b1 [R], b2 [2*R-1];
    // kernel: box * box * box
    for (int i = 0; i < R; i++) b1[i] = 1;
    for (int i = 0; i < 2 * R - 1; i++) begin
      b2[i] = 0;
      for (int j = 0; j < R; j++) if (i - j >= 0 && i - j < R) b2[i] += b1[j];
    end
    for (int i = 0; i < 3 * R - 2; i++) begin
      h[i] = 0;
      for (int j = 0; j < R; j++) if (i - j >= 0 && i - j < 2 * R - 1) h[i] += b2[i - j];
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wr(8'h04, 32'd1);     rd(8'h04, d); check("decim clamps low", d, 32'd2);
    wr(8'h04, 32'd5000);  rd(8'h04, d); check("decim clamps high", d, 32'd1024);
    wr(8'h04, 32'(R));
    wr(8'h00, 32'h1);
    fork
      for (int i = 0; i < NBITS; i++) begin
        int dens;
        dens = 50 + ((i / 50) % 2 ? 30 : -30);
        bits[i] = ($urandom_range(0, 99) < dens) ? 1 : 0;
        dsm_in = bits[i][0];
        nbits = i + 1;
        #20 dsm_clk = 1'b1;
        #20 dsm_clk = 1'b0;
      end
      // read OUT after each data_ready, as a DMA channel would
      for (int m = 0; m < NBITS / R; m++) begin
        @(posedge clk iff ready);
        rd(8'h08, d);
        check($sformatf("output %0d", m), d, 32'(expected(m)));
        nout++;
      end
    join
    repeat (10) @(posedge clk);
    check("outputs", 32'(nout), 32'(NBITS / R));
    rd(8'h0C, d); check("status cleared by the read", d, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
