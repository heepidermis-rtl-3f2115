// vco_counter: the free-running counter behind each VCO-based ADC.
//
// One tap of the ring oscillator clocks a W-bit counter (26 bits in the
// paper) that is never reset: the ADC value is the difference between two
// readings, so the start value does not matter, and a wrap is harmless as long
// as fewer than 2^W edges fall between two readings. The count is published
// in Gray code, one bit changing per edge, so the system-clock side can
// synchronise it bit by bit without catching a half-updated value; Gray coding
// is this design's choice for that crossing. ovf_o pulses for one oscillator
// cycle when the count wraps (the chip brings this out on a pad).
module vco_counter #(
  parameter int unsigned W = 26
) (
  input  logic         tap_i,
  output logic [W-1:0] gray_o,
  output logic         ovf_o
);
  logic [W-1:0] bin_q;
  logic [W-1:0] bin_next;

  assign bin_next = bin_q + W'(1);

  always_ff @(posedge tap_i) begin
    bin_q  <= bin_next;
    gray_o <= bin_next ^ (bin_next >> 1);
    ovf_o  <= (bin_next == '0);
  end

endmodule
