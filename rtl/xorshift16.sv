// xorshift16: pseudorandom generator that replaces the stored weights alpha.
//
// State update (one step per cycle with step high):
//   s ^= s << 7;  s ^= s >> 9;  s ^= s << 8;
// the 16-bit Xorshift with shift amounts 7, 9 and 8 named by the published
// design. load restores the seed; a zero seed, which the recurrence never
// leaves, is replaced by 16'hACE1. weight is the current state read as a
// signed Q1.15 number, i.e. a value in [-1, 1), widened to Q16.16. The seed
// handling and the mapping to a weight are this design's choice.
module xorshift16
  import odl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [15:0] seed,
  input  logic        step,
  output logic [15:0] state,
  output fxp_t        weight
);

  function automatic logic [15:0] next(logic [15:0] s);
    logic [15:0] t;
    t = s ^ (s << 7);
    t = t ^ (t >> 9);
    t = t ^ (t << 8);
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= 16'hACE1;
    else if (load)  state <= (seed == 16'h0) ? 16'hACE1 : seed;
    else if (step)  state <= next(state);
  end

  // Q1.15 -> Q16.16: sign-extend and shift left by FRAC-15.
  assign weight = fxp_t'($signed(state)) <<< (FRAC - 15);

endmodule
