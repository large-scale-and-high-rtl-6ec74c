// radix16_unit: the 16-point number-theoretic butterfly,
//   X_k = sum_{n=0..15} x_n * W16^(n k) mod p,  W16 = 2^12.
//
// As in the shifter/sum-unit structure of the design, output k has its own
// row of 16 shifters (x_n shifted by 12 n k mod 192 bits, negated when the
// shift reaches 96 because 2^96 = -1) and a sum unit (modular adder tree).
// No general multiplier is needed. With inverse = 1 the shift is -12 n k,
// giving the INTT kernel W16^-1. Outputs are registered (latency 1).
module radix16_unit (
  input  logic           clk,
  input  logic           en,
  input  logic           inverse,
  input  pa_pkg::lanes_t x,
  output pa_pkg::lanes_t y
);
  import pa_pkg::*;

  lanes_t sum_d;

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      elem_t acc;
      acc = '0;
      for (int n = 0; n < LANES; n++) begin
        int unsigned e;
        e = (n * k) % LANES;
        if (inverse && e != 0) e = LANES - e;
        acc = modadd(acc, mulpow2(x[n], W16_SHIFT * e));
      end
      sum_d[k] = acc;
    end
  end

  always_ff @(posedge clk)
    if (en) y <= sum_d;
endmodule
