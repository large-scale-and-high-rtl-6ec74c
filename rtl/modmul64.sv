// modmul64: one lane of the post-butterfly multiplier, y = a * b mod p with
// p = 2^64 - 2^32 + 1.
//
// The 128-bit product is split into 32-bit digits a, b, c, d and folded as
// 2^32 (b + c) - a - b + d, followed by carry folding and one conditional
// subtraction, exactly the reduction the design is built around. The result
// is registered: latency 1 cycle, one result per cycle. The register stage is
// a choice of this implementation.
module modmul64 (
  input  logic               clk,
  input  logic               en,
  input  pa_pkg::elem_t      a,
  input  pa_pkg::elem_t      b,
  output pa_pkg::elem_t      y
);
  always_ff @(posedge clk)
    if (en) y <= pa_pkg::modmul(a, b);
endmodule
