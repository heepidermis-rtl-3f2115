// tb_obi_xbar: self-checking test of the system-bus crossbar.
// All seven masters issue random reads and writes at once to all five
// slaves; each master uses its own address range inside every slave, so the
// expected read data is known per master. The slaves are simple memories
// answering one cycle after the grant; one of them withholds its grant at
// random. The testbench checks every read, that each accepted request gets
// exactly one answer, and that under contention the lowest-index master
// wins; it counts contention and back-pressure cycles.
module tb_obi_xbar;
  import heep_pkg::*;
  localparam int NM = SYS_NM, NS = SYS_NS;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t [NM-1:0] m_req;
  obi_rsp_t [NM-1:0] m_rsp;
  obi_req_t [NS-1:0] s_req;
  obi_rsp_t [NS-1:0] s_rsp;
  int checks = 0, failures = 0;

  obi_xbar dut (.clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_rsp_o(m_rsp),
    .s_req_o(s_req), .s_rsp_i(s_rsp));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // slave memories
  logic [31:0] smem [NS][logic [31:0]];
  logic [NS-1:0] sgnt;
  logic [NS-1:0] srv = '0;
  logic [31:0] srd [NS];
  always @(negedge clk) for (int s = 0; s < NS; s++) sgnt[s] <= (s == 3) ? ($urandom_range(0, 2) == 0) : 1'b1;
  always_comb for (int s = 0; s < NS; s++) s_rsp[s] = '{gnt: sgnt[s], rvalid: srv[s], rdata: srd[s]};
  always @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      srv[s] <= s_req[s].req && sgnt[s];
      if (s_req[s].req && sgnt[s]) begin
        if (s_req[s].we) smem[s][s_req[s].addr] = s_req[s].wdata;
        else srd[s] <= smem[s].exists(s_req[s].addr) ? smem[s][s_req[s].addr] : 32'hDEAD_BEEF;
      end
    end
  end

  // contention and priority monitor
  int n_contention = 0, n_backpressure = 0, bad_priority = 0;
  always @(negedge clk) begin
    #2;
    for (int s = 0; s < NS; s++) begin
      int first, cnt;
      first = -1; cnt = 0;
      for (int m = 0; m < NM; m++)
        if (m_req[m].req && sys_decode(m_req[m].addr) == sys_slave_e'(s)) begin
          if (first < 0) first = m;
          cnt++;
        end
      if (cnt > 1) n_contention++;
      if (first >= 0 && !sgnt[s]) n_backpressure++;
      for (int m = 0; m < NM; m++)
        if (m_rsp[m].gnt && sys_decode(m_req[m].addr) == sys_slave_e'(s) && m != first) bad_priority++;
    end
  end

  function automatic logic [31:0] base(int s);
    case (s)
      0: return RAM_I_BASE;
      1: return RAM_D_BASE;
      2: return AO_BASE;
      3: return PERIPH_BASE;
      default: return EXT_BASE;
    endcase
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int done_cnt = 0;
  // one master: random traffic, checks its own reads
  task automatic run_master(input int m);
    logic [31:0] shadow [NS][16];
    bit written [NS][16];
    for (int s = 0; s < NS; s++) for (int k = 0; k < 16; k++) written[s][k] = 0;
    for (int n = 0; n < 400; n++) begin
      int s, k;
      bit we;
      logic [31:0] a, v;
      s  = $urandom_range(0, NS - 1);
      k  = $urandom_range(0, 15);
      we = !written[s][k] || $urandom_range(0, 1) == 1;
      a  = base(s) + 32'(m * 256 + k * 4);
      v  = $urandom;
      @(negedge clk);
      m_req[m] = '{req: 1'b1, we: we, be: 4'hF, addr: a, wdata: v};
      #1;
      while (!m_rsp[m].gnt) begin
        @(negedge clk); #1;
      end
      @(negedge clk);
      m_req[m] = OBI_REQ_IDLE;
      check("one answer per grant", 32'(m_rsp[m].rvalid), 1);
      if (we) begin
        shadow[s][k] = v; written[s][k] = 1;
      end else begin
        check($sformatf("read m%0d s%0d", m, s), m_rsp[m].rdata, shadow[s][k]);
      end
      repeat ($urandom_range(0, 1)) @(negedge clk);
    end
    done_cnt++;
  endtask

  initial begin
    m_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int mm = 0; mm < NM; mm++) begin
      fork
        automatic int m = mm;
        run_master(m);
      join_none
    end
    wait (done_cnt == NM);
    check("priority", 32'(bad_priority), 0);
    check("contention seen", 32'(n_contention > 0), 1);
    check("back-pressure seen", 32'(n_backpressure > 0), 1);
    $display("xbar: %0d contention cycles, %0d back-pressure cycles", n_contention, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
