// carry_op: carry resolution after the inverse transform. The INTT leaves
// convolution coefficients Z''_i of up to 64 bits, each the weight of 2^(24 i).
// The unit emits Z_i = (Z''_i + carry) mod 2^24 and passes (Z''_i + carry)
// / 2^24 on to the next coefficient, so the product leaves as plain 24-bit
// words, lowest first. One coefficient per cycle, output registered
// (latency 1). `first` marks the first coefficient of a product and clears
// the carry.
module carry_op (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  pa_pkg::elem_t       in_coef,
  output logic                out_valid,
  output logic                out_last,
  output pa_pkg::word_t       out_word
);
  import pa_pkg::*;

  logic [64:0] carry;
  logic [64:0] acc;

  assign acc = 65'(in_coef) + (in_first ? 65'd0 : carry);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      carry <= '0; out_valid <= 1'b0; out_last <= 1'b0; out_word <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        out_word <= acc[WORD-1:0];
        carry    <= acc >> WORD;
      end
    end
endmodule
