// ntt_processor: one in-place N-point NTT/INTT engine, N = 16^STAGES
// (65536 points by default), processing one radix-16 butterfly group per
// cycle out of 16 memory banks.
//
// Memory and address mapping. Point q is stored in bank (sum of the base-16
// digits of q) mod 16 at address q / 16. The 16 points of a butterfly group
// differ in one base-16 digit only, so they always fall into 16 different
// banks, and the interchange network between banks and butterfly lanes is a
// rotation by the digit sum of the group base. This mapping is a choice of
// this implementation; the design only states that a conflict-free mapping
// table is used.
//
// Schedule. The forward transform is decimation-in-frequency (digit
// STAGES-1 first, natural-order input, digit-reversed output). The inverse is
// decimation-in-time (digit 0 first, digit-reversed input, natural-order
// output). Every stage reads 16 points, passes them through the radix-16
// unit and then through 16 modular multipliers whose second operand is
//   forward, stages 0..S-2 : twiddle W_L^(j k) from the factor ROM
//   forward, last stage    : ext_op (the other processor's transform, so the
//                            pointwise product is formed here) or '1'
//   inverse, stages 0..S-2 : the twiddle the next DIT stage applies to its
//                            inputs, W^-(j m)
//   inverse, last stage    : N^-1
// and writes the results back to the positions it read. The multipliers thus
// sit only after the butterfly, as in the original block diagram.
//
// Timing: a read is issued in cycle t, bank data is registered at t+1, the
// butterfly output at t+2 (rad_q, tw_in and ext_op are used in that cycle),
// the product at t+3, written at the end of t+3. 3 drain cycles separate the
// stages; a transform takes STAGES * (N/16 + 3) + 1 cycles from start to done.
// Load port (idle only): writes ld_data at ld_idx < N/2 and zero at
// ld_idx + N/2. Read port (idle only): rd_data is valid one cycle after rd_en.
module ntt_processor #(
  parameter int unsigned STAGES = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // load
  input  logic                        ld_en,
  input  logic [4*STAGES-2:0]         ld_idx,
  input  pa_pkg::elem_t               ld_data,
  // transform control
  input  logic                        start,
  input  logic                        inverse,
  input  logic                        last_ext,
  output logic                        busy,
  output logic                        done,
  // twiddle request / answer, shared ROM
  output logic [15:0]                 tw_exp [pa_pkg::LANES],
  input  pa_pkg::lanes_t              tw_in,
  // external multiplicand for the last forward stage
  input  pa_pkg::lanes_t              ext_op,
  output pa_pkg::lanes_t              rad_q,
  // natural-order read-out
  input  logic                        rd_en,
  input  logic [4*STAGES-1:0]         rd_idx,
  output pa_pkg::elem_t               rd_data
);
  import pa_pkg::*;

  localparam int unsigned LOGN  = 4 * STAGES;
  localparam int unsigned N     = 1 << LOGN;
  localparam int unsigned DEPTH = N / LANES;
  localparam int unsigned AW    = (LOGN > 4) ? LOGN - 4 : 1;
  localparam elem_t       NINV  = inv_n(STAGES);

  typedef logic [LOGN-1:0] idx_t;
  typedef logic [AW-1:0]   addr_t;
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} st_e;

  function automatic logic [3:0] bank_of(input idx_t q);
    logic [3:0] s;
    s = '0;
    for (int i = 0; i < STAGES; i++) s = s + q[4*i +: 4];
    return s;
  endfunction

  function automatic addr_t addr_of(input idx_t q);
    return (LOGN > 4) ? addr_t'(q >> 4) : '0;
  endfunction

  elem_t  mem [LANES][DEPTH];
  lanes_t mul_q;                 // multiplier outputs, written back

  st_e                   st;
  logic                  inv_r, ext_r;
  logic [$clog2(STAGES+1)-1:0] stage;
  logic [AW-1:0]         grp;
  logic [1:0]            drain;

  // ---------------- issue (cycle t) ----------------
  logic [3:0]  dig;
  idx_t        q0;
  logic [3:0]  s0;
  addr_t       raddr [LANES];
  logic        issue;
  logic        last_stage;

  assign issue      = (st == S_RUN);
  assign last_stage = (32'(stage) == STAGES - 1);

  always_comb begin
    idx_t g_ext, low_mask;
    dig = inv_r ? 4'(stage) : 4'(STAGES - 1 - 32'(stage));
    g_ext    = idx_t'(grp);
    low_mask = (idx_t'(1) << (4 * dig)) - idx_t'(1);
    q0 = ((g_ext & ~low_mask) << 4) | (g_ext & low_mask);
    s0 = bank_of(q0);
    for (int b = 0; b < LANES; b++) begin
      logic [3:0] m;
      m = 4'(b) - s0;
      raddr[b] = addr_of(q0 + (idx_t'(m) << (4 * dig)));
    end
    // twiddle exponents for output lane k (position q_k)
    for (int k = 0; k < LANES; k++) begin
      logic [31:0] j, qk, nd;
      logic [15:0] ef, ei;
      j  = 32'(q0 & low_mask);
      qk = 32'(q0) + (32'(k) << (4 * dig));
      nd = (qk >> (4 * (32'(dig) + 1))) & 32'hF;
      // forward: W^(j k 16^(3-d)); inverse: W^-((q mod 16^(d+1)) d_{d+1} 16^(2-d))
      ef = 16'((j * 32'(k)) << (4 * (3 - 32'(dig))));
      ei = (dig <= 2)
         ? 16'(((qk & ((32'd1 << (4 * (32'(dig) + 1))) - 1)) * nd) << (4 * (2 - 32'(dig))))
         : 16'd0;
      tw_exp[k] = inv_r ? 16'd0 - ei : ef;
    end
  end

  // ---------------- pipeline bookkeeping ----------------
  logic       v1, v2, v3;
  logic [3:0] s0_1, s0_2, s0_3;
  addr_t      wa1 [LANES], wa2 [LANES], wa3 [LANES];
  logic       lf1, lf2, li1, li2;   // last forward / last inverse stage

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
    end else begin
      v1 <= issue; v2 <= v1; v3 <= v2;
    end

  always_ff @(posedge clk) begin
    s0_1 <= s0;   s0_2 <= s0_1; s0_3 <= s0_2;
    wa1  <= raddr; wa2 <= wa1;  wa3  <= wa2;
    lf1  <= last_stage && !inv_r && ext_r;
    li1  <= last_stage && inv_r;
    lf2  <= lf1;  li2 <= li1;
  end

  // ---------------- banks: one read and one write port each ----------------
  logic [3:0]  rd_bank_q;
  elem_t       rdata [LANES];
  idx_t        ld_hi;
  assign ld_hi = {1'b1, ld_idx};

  always_ff @(posedge clk) begin
    for (int b = 0; b < LANES; b++) begin
      addr_t ra;
      ra = issue ? raddr[b] : addr_of(rd_idx);
      rdata[b] <= mem[b][ra];
      if (v3)
        mem[b][wa3[b]] <= mul_q[4'(b) - s0_3];
      else if (ld_en) begin
        if (4'(b) == bank_of(idx_t'(ld_idx))) mem[b][addr_of(idx_t'(ld_idx))] <= ld_data;
        if (4'(b) == bank_of(ld_hi))          mem[b][addr_of(ld_hi)]          <= '0;
      end
    end
    if (rd_en) rd_bank_q <= bank_of(rd_idx);
  end
  assign rd_data = rdata[rd_bank_q];

  // ---------------- interchange, radix-16, multipliers ----------------
  lanes_t rad_in, mul_b;
  always_comb
    for (int m = 0; m < LANES; m++) rad_in[m] = rdata[4'(m) + s0_1];

  logic inv_1;
  always_ff @(posedge clk) inv_1 <= inv_r;

  radix16_unit u_rad (.clk, .en(1'b1), .inverse(inv_1), .x(rad_in), .y(rad_q));

  always_comb
    for (int k = 0; k < LANES; k++)
      mul_b[k] = li2 ? NINV : (lf2 ? ext_op[k] : tw_in[k]);

  // last forward stage without ext: multiply by '1' (tw_exp is 0 there: j = 0)
  for (genvar k = 0; k < LANES; k++) begin : g_mul
    modmul64 u_mul (.clk, .en(1'b1), .a(rad_q[k]), .b(mul_b[k]), .y(mul_q[k]));
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; stage <= '0; grp <= '0; drain <= '0; inv_r <= 1'b0; ext_r <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_RUN; stage <= '0; grp <= '0; inv_r <= inverse; ext_r <= last_ext;
        end
        S_RUN: begin
          grp <= grp + 1'b1;
          if (32'(grp) == DEPTH - 1) begin st <= S_DRAIN; drain <= '0; end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd2) begin
            if (last_stage) st <= S_DONE;
            else begin st <= S_RUN; stage <= stage + 1'b1; end
          end
        end
        S_DONE: st <= S_IDLE;
      endcase
    end

  assign busy = (st != S_IDLE);
  assign done = (st == S_DONE);

  // loads and read-outs are only legal while no transform runs
  always_ff @(posedge clk)
    if (busy) assert (!ld_en) else $error("load while a transform runs");
endmodule
