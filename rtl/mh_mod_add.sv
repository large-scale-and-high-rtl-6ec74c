// mh_mod_add: the modular-arithmetic-hash output stage,
//   z = ((b*y + c) mod 2^ALPHA) / 2^(ALPHA - beta),   ALPHA = GAMMA,
// on word streams and without a divider or any memory.
//
// b*y arrives from the multiplier as 24-bit words, lowest first; for every
// word one word of c is taken from the random stream (c_ready) and added
// with the carry of the previous word. Reduction mod 2^ALPHA is just dropping
// everything above bit ALPHA (the top word w = Q keeps R = ALPHA mod 24
// bits), and division by 2^(ALPHA - beta) is just not emitting the low bits.
// A data counter tracks the bit position 24 w of the current word: nothing is
// emitted below word (ALPHA-beta)/24; that word yields its bits from
// (ALPHA-beta) mod 24 upward, right-aligned in z_word; every following word
// yields 24 bits; word Q ends the key (z_last). z_nbits gives the number of
// valid bits in each frame, so the key is the concatenation of the frames,
// first frame least significant.
// Timing: one word per cycle, z registered (latency 1). Words after word Q
// are ignored. If c is not available when a b*y word arrives, c_underrun is
// set (sticky until start). beta must satisfy 0 < beta < GAMMA.
module mh_mod_add #(
  parameter int unsigned GAMMA = 756839
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(GAMMA+1)-1:0]  beta,
  input  logic                        in_valid,
  input  pa_pkg::word_t               in_word,
  output logic                        c_ready,
  input  logic                        c_valid,
  input  pa_pkg::word_t               c_word,
  output logic                        z_valid,
  output pa_pkg::word_t               z_word,
  output logic [4:0]                  z_nbits,
  output logic                        z_last,
  output logic                        c_underrun
);
  import pa_pkg::*;

  localparam int unsigned Q  = GAMMA / WORD;
  localparam int unsigned R  = GAMMA % WORD;
  localparam int unsigned BW = $clog2(GAMMA + WORD + 1);
  localparam word_t TOPMASK = (R == 0) ? '1 : word_t'((1 << R) - 1);

  logic [BW-1:0] lo, bitpos;
  logic          carry, active;
  logic [$clog2(Q+2)-1:0] w;

  assign c_ready = in_valid && active;

  // sum word, its valid width and the right shift that drops the low bits
  logic [WORD:0] s;
  word_t         sw;
  logic [BW-1:0] sh;
  logic [4:0]    width;
  always_comb begin
    s     = (WORD+1)'(in_word) + (WORD+1)'(c_word) + (WORD+1)'(carry);
    sw    = s[WORD-1:0];
    width = 5'(WORD);
    if (32'(w) == Q) begin
      sw    = sw & TOPMASK;
      width = 5'(R);
    end
    sh = (bitpos < lo) ? lo - bitpos : '0;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lo <= '0; bitpos <= '0; carry <= 1'b0; active <= 1'b0; w <= '0;
      z_valid <= 1'b0; z_word <= '0; z_nbits <= '0; z_last <= 1'b0; c_underrun <= 1'b0;
    end else begin
      z_valid <= 1'b0;
      z_last  <= 1'b0;
      if (start) begin
        lo <= BW'(GAMMA) - BW'(beta);
        bitpos <= '0; carry <= 1'b0; active <= 1'b1; w <= '0; c_underrun <= 1'b0;
      end else if (in_valid && active) begin
        if (!c_valid) c_underrun <= 1'b1;
        carry <= s[WORD];
        if (bitpos + BW'(WORD) > lo) begin
          z_valid   <= 1'b1;
          z_word    <= sw >> sh;
          z_nbits   <= width - 5'(sh);
          z_last    <= (32'(w) == Q);
        end
        bitpos <= bitpos + BW'(WORD);
        w      <= w + 1'b1;
        if (32'(w) == Q) active <= 1'b0;
      end
    end
endmodule
