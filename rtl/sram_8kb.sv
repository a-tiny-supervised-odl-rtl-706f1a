// sram_8kb: model of one 8 kB single-port SRAM macro (2048 x 32 bits).
//
// The core's storage is built from seventeen of these macros. The model is a
// plain array with a synchronous read: the word addressed while req.en is
// high and req.we is low appears on rdata one clock later, and rdata holds
// its value until the next read. A write (req.en and req.we high) updates
// the word at the clock edge and leaves rdata unchanged. Only the macro size
// comes from the published design; the port list and the one-cycle read
// latency are this model's choice. Contents are not reset, as in an SRAM.
module sram_8kb
  import odl_pkg::*;
#(
  parameter int unsigned WORDS = 2048
) (
  input  logic     clk,
  input  mem_req_t req,
  output logic [W-1:0] rdata
);

  localparam int unsigned IW = $clog2(WORDS);

  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (req.en) begin
      if (req.we) mem[req.addr[IW-1:0]] <= req.wdata;
      else        rdata <= mem[req.addr[IW-1:0]];
    end
  end

endmodule
