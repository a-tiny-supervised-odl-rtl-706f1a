// fxp_mac: the multiply-add unit of the core.
//
// Computes y = base + a*b in 32-bit Q16.16 fixed point, where base is the
// unit's own accumulator (use_acc high) or the operand c (use_acc low). The
// product is scaled back to Q16.16 (rounded to nearest, halves upward) and the
// product and the sum saturate at the limits of the 32-bit range. y is
// combinational; with en high the accumulator takes y at the clock edge.
// So the one unit serves dot products (use_acc, en), single products and
// loads (c = 0 or a = 0) and read-modify-write updates (base = a word just
// read from memory). A shared multiply-add unit follows the published
// design; this operand arrangement and saturation are this design's choice.
module fxp_mac
  import odl_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic use_acc,
  input  logic en,
  input  fxp_t a,
  input  fxp_t b,
  input  fxp_t c,
  output fxp_t y,
  output fxp_t acc
);

  assign y = fxp_add(use_acc ? acc : c, fxp_mul(a, b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= y;
  end

endmodule
