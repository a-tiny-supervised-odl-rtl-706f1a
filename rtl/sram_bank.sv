// sram_bank: one logical memory of DEPTH 32-bit words made of 8 kB macros.
//
// DEPTH is rounded up to whole 2048-word macros. The upper address bits
// select a macro, only that macro is enabled, and the select is registered so
// that the read data of the addressed macro is returned one cycle after the
// request, like a single macro. The core uses three banks: one macro for the
// input vector x and the output weights beta, and two banks of N*N words for
// the P matrix and its ping-pong partner (8 macros each at N = 128, so
// 17 macros in all). The split is this design's choice.
module sram_bank
  import odl_pkg::*;
#(
  parameter int unsigned DEPTH = 16384
) (
  input  logic     clk,
  input  mem_req_t req,
  output logic [W-1:0] rdata
);

  localparam int unsigned MW   = 2048;
  localparam int unsigned NMAC = (DEPTH + MW - 1) / MW;
  localparam int unsigned SW   = (NMAC > 1) ? $clog2(NMAC) : 1;

  logic [W-1:0]  rd [NMAC];
  logic [SW-1:0] sel, sel_q;

  always_comb begin
    sel = '0;
    if (NMAC > 1) sel = SW'(req.addr >> $clog2(MW));
  end

  for (genvar g = 0; g < NMAC; g++) begin : g_mac
    mem_req_t r;
    always_comb begin
      r      = req;
      r.en   = req.en && (sel == SW'(g));
    end
    sram_8kb #(.WORDS(MW)) u_mac (.clk(clk), .req(r), .rdata(rd[g]));
  end

  always_ff @(posedge clk) begin
    if (req.en && !req.we) sel_q <= sel;
  end

  assign rdata = rd[sel_q];

endmodule
