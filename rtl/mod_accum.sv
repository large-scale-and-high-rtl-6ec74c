// mod_accum: MMH accumulation y = sum_i y_i mod (2^GAMMA - 1), built from a
// word adder, a carry register and a GAMMA-bit accumulation RAM; no divider.
//
// Because 2^GAMMA = 1 mod (2^GAMMA - 1), a product y_i < 2^(2 GAMMA) is reduced
// by adding its low GAMMA bits and its high GAMMA bits into the RAM. Products
// arrive as 24-bit words, 2Q+2 of them (GAMMA = 24 Q + R, 0 < R < 24). Words
// 0..Q are added to RAM words 0..Q (word Q holds only R bits). Bit GAMMA is not
// word aligned, so the high half is realigned with the previous input word:
// high word w = {in[R-1:0], prev[23:R]}. The carry out of RAM word Q wraps
// around into word 0 of the next sweep (end-around carry), which is what
// replaces the modular reduction. Each accepted word advances the RAM pointer
// by one, so the RAM is swept twice per product.
//
// `clear` starts a new accumulation: for the next sweep the adder takes '0'
// instead of the RAM word (the zero input of the mux), which clears the
// result without a separate clearing pass. `rd_start` first runs the
// remaining carry around the RAM (flush, stops as soon as the carry is 0),
// then streams the Q+1 result words out on y_* with valid/ready.
// The value 2^GAMMA - 1 (= 0) is not normalised to 0.
//
// Timing: one product word per cycle, no backpressure on the input; the RAM
// is read one word ahead (synchronous read), written in the cycle its word
// is added. The realignment and the flush are this implementation's own
// choices; the adder/carry/RAM/mux/switch structure follows the design.
module mod_accum #(
  parameter int unsigned GAMMA = 756839
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  input  pa_pkg::word_t  in_word,
  input  logic           rd_start,
  output logic           y_valid,
  input  logic           y_ready,
  output pa_pkg::word_t  y_word,
  output logic           y_last,
  output logic           busy
);
  import pa_pkg::*;

  localparam int unsigned Q  = GAMMA / WORD;
  localparam int unsigned R  = GAMMA % WORD;
  localparam int unsigned NW = Q + 1;
  localparam int unsigned AW = $clog2(NW);
  localparam word_t       TOPMASK = word_t'((1 << R) - 1);

  if (R == 0 || Q < 2) begin : g_bad
    $error("mod_accum needs GAMMA mod 24 != 0 and GAMMA >= 48");
  end

  typedef enum logic [1:0] {A_ACC, A_FLUSH, A_SEEK, A_OUT} ast_e;
  ast_e st;

  word_t ram [NW];
  word_t cur, prev;
  logic [AW-1:0] ptr, ptr_next;
  logic          half, zero_sel, carry;
  logic          step;          // RMW of word ptr this cycle
  word_t         addend, newval;
  logic          carry_n;

  assign step = (st == A_ACC && in_valid) || (st == A_FLUSH && carry);

  always_comb begin
    word_t base;
    logic [WORD:0] sum;
    if (st == A_FLUSH)  addend = '0;
    else if (!half)     addend = in_word;
    else                addend = word_t'({in_word, prev} >> R);
    if (32'(ptr) == Q) addend = addend & TOPMASK;
    base = zero_sel ? '0 : cur;
    sum  = (WORD+1)'(base) + (WORD+1)'(addend) + (WORD+1)'(carry);
    if (32'(ptr) == Q) begin
      newval  = sum[WORD-1:0] & TOPMASK;
      carry_n = sum[R];
    end else begin
      newval  = sum[WORD-1:0];
      carry_n = sum[WORD];
    end
  end

  always_comb begin
    ptr_next = ptr;
    if (step || (st == A_OUT && y_ready))
      ptr_next = (32'(ptr) == Q) ? '0 : ptr + 1'b1;
    if (st == A_SEEK) ptr_next = '0;
  end

  // RAM: write the updated word, read the next one (never the same address)
  always_ff @(posedge clk) begin
    if (step) ram[ptr] <= newval;
    cur <= ram[ptr_next];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= A_ACC; ptr <= '0; half <= 1'b0; zero_sel <= 1'b0; carry <= 1'b0; prev <= '0;
    end else begin
      ptr <= ptr_next;
      if (clear) begin
        zero_sel <= 1'b1; carry <= 1'b0; half <= 1'b0; st <= A_ACC;
      end else begin
        if (step) begin
          carry <= carry_n;
          if (32'(ptr) == Q) begin
            half <= ~half;
            zero_sel <= 1'b0;
          end
        end
        if (st == A_ACC && in_valid) prev <= in_word;
        unique case (st)
          A_ACC:   if (rd_start) st <= A_FLUSH;
          A_FLUSH: if (!carry) st <= A_SEEK;
          A_SEEK:  st <= A_OUT;
          A_OUT:   if (y_ready && 32'(ptr) == Q) st <= A_ACC;
        endcase
      end
    end

  assign y_valid = (st == A_OUT);
  assign y_word  = cur;
  assign y_last  = (st == A_OUT) && (32'(ptr) == Q);
  assign busy    = (st != A_ACC);

  // input words only while accumulating
  always_ff @(posedge clk)
    if (st != A_ACC) assert (!in_valid) else $error("product word during read-out");
endmodule
