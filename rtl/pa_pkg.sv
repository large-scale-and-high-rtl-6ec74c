// pa_pkg: constants, types and modular-arithmetic functions shared by the
// MMH-MH privacy amplification engine.
//
// NTT arithmetic works modulo the Solinas prime p = 2^64 - 2^32 + 1. Because
// 2^96 = -1 and 2^64 = 2^32 - 1 (mod p), any number written in 32-bit digits
// d0..d5 reduces to (d0 - d2 - d3 + d5) + 2^32 (d1 + d2 - d4 - d5), which
// needs only adders. For a 128-bit product 2^96 a + 2^64 b + 2^32 c + d this
// is the familiar 2^32 (b + c) - a - b + d. The 65536-th root of unity
// 0xED3365469864F124 satisfies W^4096 = 2^12, so every 16-point twiddle is a
// shift. Key words are 24 bits wide (multiplier base 2^24).
package pa_pkg;

  localparam logic [63:0] P      = 64'hFFFF_FFFF_0000_0001;
  localparam logic [63:0] W65536 = 64'hED33_6546_9864_F124;
  localparam int unsigned W16_SHIFT = 12;   // W_16 = 2^12
  localparam int unsigned WORD  = 24;       // key / product word width
  localparam int unsigned LANES = 16;       // radix of the butterfly

  typedef logic [63:0] elem_t;
  typedef elem_t lanes_t [LANES];
  typedef logic [WORD-1:0] word_t;

  // controller states
  typedef enum logic [1:0] {ST_IDLE, ST_MMH, ST_MMH_CNT, ST_MH} pa_state_e;

  // Reduce a value given as six 32-bit digits (up to 192 bits) modulo p.
  function automatic elem_t reduce192(input logic [191:0] x);
    logic [67:0] pos, neg, v;
    logic [64:0] f;
    pos = 68'(x[31:0]) + 68'(x[191:160]) + ((68'(x[63:32]) + 68'(x[95:64])) << 32);
    neg = 68'(x[95:64]) + 68'(x[127:96]) + ((68'(x[159:128]) + 68'(x[191:160])) << 32);
    v   = pos - neg + (68'(P) << 2);               // 4p > neg keeps v positive
    f   = 65'(v[63:0]) + 65'(v[67:64]) * 65'h0_FFFF_FFFF;  // 2^64 = 2^32-1
    f   = 65'(f[63:0]) + 65'(f[64]) * 65'h0_FFFF_FFFF;
    f   = 65'(f[63:0]) + 65'(f[64]) * 65'h0_FFFF_FFFF;
    if (f[63:0] >= P) return f[63:0] - P;
    return f[63:0];
  endfunction

  function automatic elem_t modmul(input elem_t a, input elem_t b);
    logic [127:0] prod;
    prod = 128'(a) * 128'(b);
    return reduce192({64'd0, prod});
  endfunction

  function automatic elem_t modadd(input elem_t a, input elem_t b);
    logic [64:0] s;
    s = 65'(a) + 65'(b);
    if (s >= 65'(P)) s = s - 65'(P);
    return s[63:0];
  endfunction

  function automatic elem_t modneg(input elem_t a);
    return (a == '0) ? '0 : P - a;
  endfunction

  // x * 2^e mod p for 0 <= e < 192 (2^192 = 1).
  function automatic elem_t mulpow2(input elem_t x, input int unsigned e);
    logic [191:0] wide;
    int unsigned s;
    s = (e >= 96) ? e - 96 : e;
    wide = 192'(x) << s;
    return (e >= 96) ? modneg(reduce192(wide)) : reduce192(wide);
  endfunction

  function automatic elem_t modpow(input elem_t base, input int unsigned e);
    elem_t r, b;
    r = 64'd1;
    b = base;
    for (int i = 0; i < 32; i++) begin
      if (e[i]) r = modmul(r, b);
      b = modmul(b, b);
    end
    return r;
  endfunction

  // N^-1 for N = 16^stages: 2^(-4 stages) = 2^(192 - 4 stages).
  function automatic elem_t inv_n(input int unsigned stages);
    return mulpow2(64'd1, 192 - 4 * stages);
  endfunction

endpackage
