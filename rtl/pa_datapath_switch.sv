// pa_datapath_switch: the routing around the shared multiplier.
//
// MMH flow (sel_mh = 0): operand X is the key stream, operand M the random
// stream (a_i), and product words go to the accumulation unit. MH flow
// (sel_mh = 1): X is the accumulated y coming back from the accumulation unit,
// M is the random stream (b, with its lowest bit forced to 1 so that b is
// odd), and product words go to the MH output stage, which also draws c from
// the random stream. The two sources of one load beat are taken together.
//
// The switch also counts the operand words of a sub-block (new_op restarts
// the count), keeps only GAMMA bits of X and M (the top word is cut to
// R = GAMMA mod 24 bits), and checks whether a key sub-block x_i equals
// 2^GAMMA - 1. Such a sub-block is not a valid element of Z_p: x_reject is
// raised once it has been loaded and its product is kept away from the
// accumulator; the controller then loads the sub-block again.
// Purely combinational apart from the word counter and the detector.
module pa_datapath_switch #(
  parameter int unsigned GAMMA = 756839
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           sel_mh,
  input  logic           new_op,
  // sources
  input  logic           key_valid,
  output logic           key_ready,
  input  pa_pkg::word_t  key_word,
  input  logic           y_valid,
  output logic           y_ready,
  input  pa_pkg::word_t  y_word,
  input  logic           rnd_valid,
  output logic           rnd_ready,
  input  pa_pkg::word_t  rnd_word,
  // multiplier operand port
  output logic           ld_valid,
  input  logic           ld_ready,
  output pa_pkg::word_t  ld_x,
  output pa_pkg::word_t  ld_m,
  // product words
  input  logic           p_valid,
  input  pa_pkg::word_t  p_word,
  output logic           acc_valid,
  output logic           mh_valid,
  output pa_pkg::word_t  dst_word,
  // c for the MH stage
  input  logic           c_ready,
  output logic           c_valid,
  // all-ones sub-block
  output logic           x_reject
);
  import pa_pkg::*;

  localparam int unsigned Q = GAMMA / WORD;
  localparam int unsigned R = GAMMA % WORD;
  localparam word_t TOPMASK = (R == 0) ? '1 : word_t'((1 << R) - 1);

  logic [$clog2(Q+2)-1:0] widx;
  logic  src_valid, fire, top, all_ones;
  word_t x_raw;

  assign x_raw     = sel_mh ? y_word : key_word;
  assign src_valid = sel_mh ? y_valid : key_valid;
  assign fire      = ld_ready && src_valid && rnd_valid;
  assign top       = (32'(widx) == Q);

  assign ld_valid  = src_valid && rnd_valid;
  assign key_ready = !sel_mh && ld_ready && rnd_valid;
  assign y_ready   =  sel_mh && ld_ready && rnd_valid;
  assign c_valid   =  sel_mh && rnd_valid;
  assign rnd_ready = fire || (sel_mh && c_ready);

  always_comb begin
    ld_x = top ? (x_raw & TOPMASK) : x_raw;
    ld_m = top ? (rnd_word & TOPMASK) : rnd_word;
    if (sel_mh && widx == '0) ld_m[0] = 1'b1;     // b must be odd
  end

  assign dst_word  = p_word;
  assign acc_valid = p_valid && !sel_mh && !x_reject;
  assign mh_valid  = p_valid &&  sel_mh;

  // the incoming key word is all ones (top word: its R valid bits)
  logic ones;
  assign ones = top ? ((key_word & TOPMASK) == TOPMASK) : (key_word == '1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      widx <= '0; all_ones <= 1'b1; x_reject <= 1'b0;
    end else if (new_op) begin
      widx <= '0; all_ones <= 1'b1; x_reject <= 1'b0;
    end else if (fire) begin
      widx <= widx + 1'b1;
      if (!sel_mh) begin
        all_ones <= all_ones && ones;
        if (top) x_reject <= all_ones && ones;
      end
    end
endmodule
