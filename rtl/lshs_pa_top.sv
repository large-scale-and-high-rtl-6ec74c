// lshs_pa_top: MMH-MH privacy amplification engine with one shared
// large-number multiplier.
//
// An n = k * GAMMA bit reconciled key is split into k sub-blocks x_i of GAMMA
// bits (GAMMA = 756839, so p = 2^GAMMA - 1 is a Mersenne prime). The engine
// computes
//   y = sum_i a_i x_i mod p                  (multilinear modular hash)
//   z = ((b y + c) mod 2^GAMMA) >> (GAMMA - beta)   (modular arithmetic hash)
// and emits the beta-bit final key z. All k + 1 multiplications run on the
// same NTT multiplier (786432-bit operands); the controller switches the data
// flow between the MMH path (key -> multiplier -> accumulator) and the MH path
// (accumulator -> multiplier -> MH output stage).
//
// Interfaces (all 24-bit words, lowest word first, valid/ready):
//   key_*  : the k sub-blocks, Q+1 = ceil(GAMMA/24) words each; the top word
//            carries R = GAMMA mod 24 bits. A sub-block equal to 2^GAMMA - 1 is
//            rejected (key_reject pulses) and must be sent again (together
//            with its a_i).
//   rnd_*  : shared random words: a_1..a_k (Q+1 words each, in step with the
//            key words), then b (Q+1 words, taken while y is loaded), then c
//            (Q+1 words, taken one per product word of b*y; the source must
//            have them ready, c_underrun flags a miss).
//   z_*    : key frames; z_nbits valid bits each, right-aligned, first frame
//            least significant; z_last on the final frame.
// start with k (number of sub-blocks, 0 is treated as 1) and beta (key
// length, 0 < beta < GAMMA) begins a run while busy is low.
// The multiplier's p_last and the accumulator's y_last and busy outputs are
// not used here: the controller knows every stream length from GAMMA and
// follows the multiplier's done pulse and the last key frame instead.
module lshs_pa_top #(
  parameter int unsigned STAGES = 4,
  parameter int unsigned GAMMA  = 756839,
  parameter int unsigned KW     = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [KW-1:0]               k,
  input  logic [$clog2(GAMMA+1)-1:0]  beta,
  output logic                        busy,
  output pa_pkg::pa_state_e           state,
  input  logic                        key_valid,
  output logic                        key_ready,
  input  pa_pkg::word_t               key_word,
  input  logic                        rnd_valid,
  output logic                        rnd_ready,
  input  pa_pkg::word_t               rnd_word,
  output logic                        z_valid,
  output pa_pkg::word_t               z_word,
  output logic [4:0]                  z_nbits,
  output logic                        z_last,
  output logic                        key_reject,
  output logic                        c_underrun
);
  import pa_pkg::*;

  localparam int unsigned N = 16 ** STAGES;
  localparam int unsigned Q = GAMMA / WORD;

  if (Q + 1 > N / 2) begin : g_size
    $error("GAMMA does not fit the multiplier operand width");
  end

  // multiplier
  logic mul_start, mul_ready, mul_done, ld_valid, ld_ready, p_valid, p_last;
  word_t ld_x, ld_m, p_word;
  logic [4*STAGES-1:0] op_words;
  logic [4*STAGES:0]   out_words;

  // routing / control
  logic sel_mh, new_op, acc_clear, acc_rd_start, mh_start, x_reject;
  logic y_valid, y_ready, y_last, acc_busy, acc_valid, mh_valid, c_ready, c_valid;
  word_t y_word, dst_word;

  large_mul #(.STAGES(STAGES)) u_mul (
    .clk, .rst_n, .start(mul_start), .op_words, .out_words, .ready(mul_ready),
    .ld_valid, .ld_ready, .ld_x, .ld_m,
    .p_valid, .p_last, .p_word, .done(mul_done));

  pa_datapath_switch #(.GAMMA(GAMMA)) u_sw (
    .clk, .rst_n, .sel_mh, .new_op,
    .key_valid, .key_ready, .key_word,
    .y_valid, .y_ready, .y_word,
    .rnd_valid, .rnd_ready, .rnd_word,
    .ld_valid, .ld_ready, .ld_x, .ld_m,
    .p_valid, .p_word, .acc_valid, .mh_valid, .dst_word,
    .c_ready, .c_valid, .x_reject);

  mod_accum #(.GAMMA(GAMMA)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .in_valid(acc_valid), .in_word(dst_word),
    .rd_start(acc_rd_start), .y_valid, .y_ready, .y_word, .y_last, .busy(acc_busy));

  mh_mod_add #(.GAMMA(GAMMA)) u_mh (
    .clk, .rst_n, .start(mh_start), .beta,
    .in_valid(mh_valid), .in_word(dst_word),
    .c_ready, .c_valid, .c_word(rnd_word),
    .z_valid, .z_word, .z_nbits, .z_last, .c_underrun);

  pa_control #(.GAMMA(GAMMA), .STAGES(STAGES), .KW(KW)) u_ctl (
    .clk, .rst_n, .start, .k, .mul_ready, .mul_done, .x_reject, .out_finish(z_last),
    .mul_start, .op_words, .out_words, .sel_mh, .new_op, .acc_clear, .acc_rd_start,
    .mh_start, .busy, .reject_pulse(key_reject), .state);
endmodule
