// sram_bank: one 16 KiB RAM bank with an OBI slave port.
//
// HEEPidermis has two such banks, one mostly for instructions and one for
// data, so that fetches and data accesses proceed in parallel (size from the
// paper). The array stands in for the SRAM macro of the chip: NUM_WORDS
// 32-bit words, byte-writable. The bank always grants; read data and the
// write acknowledge come one cycle after the grant. Only the word address
// bits below log2(NUM_WORDS) are used, so the bank aliases within its window.
module sram_bank
  import heep_pkg::*;
#(
  parameter int unsigned NUM_WORDS = 4096
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t req_i,
  output obi_rsp_t rsp_o
);
  localparam int unsigned AW = $clog2(NUM_WORDS);

  logic [31:0] mem [NUM_WORDS];
  logic [31:0] rdata_q;
  logic        rvalid_q;
  logic [AW-1:0] waddr;

  assign waddr = req_i.addr[AW+1:2];

  always_ff @(posedge clk_i) begin
    if (req_i.req) begin
      if (req_i.we) begin
        for (int i = 0; i < 4; i++)
          if (req_i.be[i]) mem[waddr][8*i +: 8] <= req_i.wdata[8*i +: 8];
      end else begin
        rdata_q <= mem[waddr];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_q <= 1'b0;
    else         rvalid_q <= req_i.req;
  end

  assign rsp_o.gnt    = 1'b1;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;

endmodule
