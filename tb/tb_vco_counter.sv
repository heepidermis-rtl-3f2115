// tb_vco_counter: self-checking test of the oscillator-side counter.
// Runs the counter at W = 8 so that it wraps within the test. From the first
// value seen (the counter is never reset) it checks that every tap edge adds
// one, that consecutive outputs differ in exactly one bit (Gray code), and
// that ovf_o pulses once per wrap, exactly when the count returns to zero.
module tb_vco_counter;
  localparam int W = 8;
  logic tap = 1'b0;
  logic [W-1:0] gray;
  logic ovf;
  int checks = 0, failures = 0;

  vco_counter #(.W(W)) dut (.tap_i(tap), .gray_o(gray), .ovf_o(ovf));

  function automatic logic [W-1:0] g2b(logic [W-1:0] g);
    logic [W-1:0] b;
    b[W-1] = g[W-1];
    for (int i = W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] prev_g, exp_b;
  int n_ovf = 0;
  initial begin
    #10 tap = 1'b1; #10 tap = 1'b0;
    prev_g = gray;
    exp_b  = g2b(gray);
    for (int i = 0; i < 700; i++) begin
      #10 tap = 1'b1; #1;
      exp_b = exp_b + 1'b1;
      check("count", 32'(g2b(gray)), 32'(exp_b));
      check("one bit changes", 32'($countones(gray ^ prev_g)), 32'd1);
      check("ovf at wrap", 32'(ovf), 32'(exp_b == '0));
      if (ovf) n_ovf++;
      prev_g = gray;
      #9 tap = 1'b0;
    end
    check("wraps seen", 32'(n_ovf >= 2), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
