// large_mul: the NTT-based large-number multiplier, 24 * 16^STAGES / 2 bits
// per operand (786432 bits by default), product returned as 24-bit words.
//
// Operands X (processor A) and M (processor B) arrive together, one 24-bit
// word of each per ld_valid/ld_ready beat, lowest word first. op_words words
// are taken; the rest of the N/2 lower points and all N/2 upper points are
// zero. Then both processors run the forward transform in lockstep; A's
// last-stage multipliers take B's butterfly outputs, so A ends up holding the
// pointwise product NTT(X)_i * NTT(M)_i. A then runs the inverse transform
// (last stage scaled by N^-1), and the coefficients are read out in natural
// order through the carry unit, out_words product words in all.
//
// Timing (N = 16^STAGES): load N/2 cycles plus source stalls, forward and
// inverse transform STAGES*(N/16+3)+1 cycles each, plus 2 cycles of state
// changes, read-out out_words + 2 cycles. With the default sizes and a source
// that never stalls: 32768 + 2*16397 + 2 + out_words + 2 cycles.
// `ready` (the 'Mul Ready' of the controller) is high while idle; `start` is
// taken only then. B's read port is never used: only A's result is read out.
module large_mul #(
  parameter int unsigned STAGES = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [4*STAGES-1:0]     op_words,
  input  logic [4*STAGES:0]       out_words,
  output logic                    ready,
  // operand stream
  input  logic                    ld_valid,
  output logic                    ld_ready,
  input  pa_pkg::word_t           ld_x,
  input  pa_pkg::word_t           ld_m,
  // product stream
  output logic                    p_valid,
  output logic                    p_last,
  output pa_pkg::word_t           p_word,
  output logic                    done
);
  import pa_pkg::*;

  localparam int unsigned LOGN = 4 * STAGES;
  localparam int unsigned N    = 1 << LOGN;

  typedef enum logic [2:0] {M_IDLE, M_LOAD, M_FWD, M_FWD_WAIT, M_INV, M_INV_WAIT, M_OUT} mst_e;
  mst_e st;

  logic [LOGN-1:0] op_r;
  logic [LOGN:0]   out_r;
  logic [LOGN:0]   idx;

  // ---------------- processors and shared factor ROM ----------------
  logic            a_ld_en, b_ld_en, a_start, b_start, a_inv;
  logic            a_busy, a_done, b_busy, b_done;
  logic [15:0]     a_exp [LANES];
  logic [15:0]     b_exp [LANES];
  lanes_t          tw, a_rad, b_rad;
  elem_t           a_rd, b_rd;
  elem_t           a_ld_data, b_ld_data;
  logic            rd_en;

  ntt_processor #(.STAGES(STAGES)) u_ntt_a (
    .clk, .rst_n,
    .ld_en(a_ld_en), .ld_idx(idx[LOGN-2:0]), .ld_data(a_ld_data),
    .start(a_start), .inverse(a_inv), .last_ext(1'b1), .busy(a_busy), .done(a_done),
    .tw_exp(a_exp), .tw_in(tw), .ext_op(b_rad), .rad_q(a_rad),
    .rd_en, .rd_idx(idx[LOGN-1:0]), .rd_data(a_rd));

  ntt_processor #(.STAGES(STAGES)) u_ntt_b (
    .clk, .rst_n,
    .ld_en(b_ld_en), .ld_idx(idx[LOGN-2:0]), .ld_data(b_ld_data),
    .start(b_start), .inverse(1'b0), .last_ext(1'b0), .busy(b_busy), .done(b_done),
    .tw_exp(b_exp), .tw_in(tw), .ext_op(a_rad), .rad_q(b_rad),
    .rd_en(1'b0), .rd_idx('0), .rd_data(b_rd));

  // A and B issue identical exponents in the forward pass; A alone runs the
  // inverse, so A's requests drive the ROM.
  twiddle_rom u_rom (.clk, .en(1'b1), .exp_in(a_exp), .tw(tw));

  // ---------------- load ----------------
  logic take_src;
  assign take_src  = (st == M_LOAD) && (idx < (LOGN+1)'(op_r));
  assign ld_ready  = take_src;
  assign a_ld_en   = (st == M_LOAD) && (!take_src || ld_valid);
  assign b_ld_en   = a_ld_en;
  assign a_ld_data = take_src ? 64'(ld_x) : '0;
  assign b_ld_data = take_src ? 64'(ld_m) : '0;

  assign a_start = (st == M_FWD) || (st == M_INV);
  assign b_start = (st == M_FWD);
  assign a_inv   = (st == M_INV);
  assign rd_en   = (st == M_OUT);

  // ---------------- read-out through the carry unit ----------------
  logic rd_v, rd_first, rd_last;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rd_v <= 1'b0; rd_first <= 1'b0; rd_last <= 1'b0;
    end else begin
      rd_v     <= rd_en;
      rd_first <= rd_en && (idx == '0);
      rd_last  <= rd_en && (idx == out_r - 1'b1);
    end

  carry_op u_carry (.clk, .rst_n, .in_valid(rd_v), .in_first(rd_first), .in_last(rd_last),
                    .in_coef(a_rd), .out_valid(p_valid), .out_last(p_last), .out_word(p_word));
  assign done = p_last;

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= M_IDLE; idx <= '0; op_r <= '0; out_r <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (start) begin
          st <= M_LOAD; idx <= '0; op_r <= op_words; out_r <= out_words;
        end
        M_LOAD: if (a_ld_en) begin
          idx <= idx + 1'b1;
          if (idx == (LOGN+1)'(N/2 - 1)) st <= M_FWD;
        end
        M_FWD:      st <= M_FWD_WAIT;
        M_FWD_WAIT: if (a_done) st <= M_INV;
        M_INV:      st <= M_INV_WAIT;
        M_INV_WAIT: if (a_done) begin st <= M_OUT; idx <= '0; end
        M_OUT: begin
          idx <= idx + 1'b1;
          if (idx == out_r - 1'b1) st <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end

  assign ready = (st == M_IDLE) && !p_valid && !rd_v;

  // B follows A exactly through the forward transform
  always_ff @(posedge clk)
    if (st == M_FWD_WAIT) assert (a_busy == b_busy && a_done == b_done)
      else $error("NTT processors out of step");

  // the shared factor ROM serves A's exponents; B must be asking for the same
  always_ff @(posedge clk)
    if (st == M_FWD_WAIT) assert (b_exp == a_exp)
      else $error("NTT processors request different twiddles");
endmodule
