// fxp_div: the division unit of the core.
//
// Computes q = a / b for Q16.16 operands by restoring division on the
// magnitudes, one quotient bit per cycle. A start pulse latches a and b;
// busy stays high for W+FRAC = 48 cycles and done pulses for one cycle when
// q is valid. q holds its value until the next start. A quotient too large
// for 32 bits, or a zero divisor, saturates to the largest value of the
// quotient's sign. The published design only names a division unit; the
// algorithm, latency and handshake are this design's choice.
module fxp_div
  import odl_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fxp_t a,
  input  fxp_t b,
  output logic busy,
  output logic done,
  output fxp_t q
);

  localparam int unsigned NW = W + FRAC;  // numerator bits after scaling

  logic [NW-1:0] num;      // remaining numerator bits, MSB first
  logic [W:0]    rem;      // partial remainder
  logic [NW-1:0] quo;      // quotient bits so far
  logic [W-1:0]  den;      // divisor magnitude
  logic          neg;      // sign of the result
  logic [5:0]    cnt;

  logic [W:0]    rem_sh;
  logic [W:0]    rem_sub;

  always_comb begin
    rem_sh  = {rem[W-1:0], num[NW-1]};
    rem_sub = rem_sh - {1'b0, den};
  end

  function automatic logic [W-1:0] mag(fxp_t v);
    return v[W-1] ? W'(-v) : W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
      num  <= '0;
      rem  <= '0;
      quo  <= '0;
      den  <= '0;
      neg  <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        num  <= {mag(a), {FRAC{1'b0}}};
        den  <= mag(b);
        neg  <= a[W-1] ^ b[W-1];
        rem  <= '0;
        quo  <= '0;
        cnt  <= 6'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        num <= num << 1;
        if (!rem_sub[W]) begin
          rem <= rem_sub;
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          quo <= {quo[NW-2:0], 1'b0};
        end
        cnt <= cnt - 6'd1;
        if (cnt == 6'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
          // The last quotient bit is being shifted in this cycle.
          q <= result(den == '0, neg,
                      {quo[NW-2:0], !rem_sub[W]});
        end
      end
    end
  end

  function automatic fxp_t result(logic zero, logic negative, logic [NW-1:0] qq);
    if (zero)                        return negative ? FXP_MIN : FXP_MAX;
    if (qq[NW-1:W-1] != '0)          return negative ? FXP_MIN : FXP_MAX;
    return negative ? -fxp_t'(qq[W-1:0]) : fxp_t'(qq[W-1:0]);
  endfunction

endmodule
