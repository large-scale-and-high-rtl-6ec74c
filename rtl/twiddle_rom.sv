// twiddle_rom: rotation factor source for the NTT processors, 16 lanes,
// tw[l] = W65536^exp_in[l] mod p.
//
// A full 65536 x 64-bit table would be needed for a direct lookup. Here each
// exponent e = 256 h + l is served by two 256-entry tables, HI[h] = W^(256 h)
// and LO[l] = W^l, computed at elaboration by constant functions, and one
// modular multiplication. This factoring is a choice of this implementation:
// 2 x 256 words instead of 65536, paid with 16 extra multipliers.
// Timing: exp_in in cycle t, table words registered at t+1, tw valid at t+2.
module twiddle_rom (
  input  logic           clk,
  input  logic           en,
  input  logic [15:0]    exp_in [pa_pkg::LANES],
  output pa_pkg::lanes_t tw
);
  import pa_pkg::*;

  typedef elem_t table_t [256];

  function automatic table_t make_table(input elem_t step);
    table_t t;
    t[0] = 64'd1;
    for (int i = 1; i < 256; i++) t[i] = modmul(t[i-1], step);
    return t;
  endfunction

  localparam table_t LO = make_table(W65536);
  localparam table_t HI = make_table(modpow(W65536, 256));

  lanes_t hi_q, lo_q;

  always_ff @(posedge clk)
    if (en)
      for (int l = 0; l < LANES; l++) begin
        hi_q[l] <= HI[exp_in[l][15:8]];
        lo_q[l] <= LO[exp_in[l][7:0]];
      end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    modmul64 u_mul (.clk, .en, .a(hi_q[l]), .b(lo_q[l]), .y(tw[l]));
  end
endmodule
