// tb_mh_mod_add: GAMMA = 127. Feeds random b*y words (more than needed, the
// extra ones must be ignored) and c words, and checks that the concatenated
// frames equal bits [127-beta, 127) of (b*y + c) mod 2^127, for many beta,
// including frames that start mid-word and the 7-bit top word.
module tb_mh_mod_add;
  import pa_pkg::*;
  localparam int unsigned GAMMA = 127;
  localparam int unsigned Q = GAMMA / 24;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, in_valid, c_ready, c_valid, z_valid, z_last, c_underrun;
  logic [$clog2(GAMMA+1)-1:0] beta;
  word_t in_word, c_word, z_word;
  logic [4:0] z_nbits;
  mh_mod_add #(.GAMMA(GAMMA)) dut (.*);
  int checks = 0, failures = 0;
  bit zb[$];
  bit seen_last;

  always @(posedge clk) if (z_valid) begin
    for (int i = 0; i < z_nbits; i++) zb.push_back(z_word[i]);
    if (z_last) seen_last = 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [24*(2*Q+2)-1:0] by;
    logic [24*(Q+1)-1:0] c;
    logic [GAMMA-1:0] t;
    start = 0; in_valid = 0; c_valid = 0; in_word = 0; c_word = 0; beta = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 60; rep++) begin
      int bb;
      bb = (rep < 30) ? 1 + rep : 1 + $urandom % (GAMMA - 1);
      for (int b = 0; b < $bits(by); b += 24) by[b +: 24] = 24'($urandom);
      for (int b = 0; b < $bits(c); b += 24) c[b +: 24] = 24'($urandom);
      t = GAMMA'(by) + GAMMA'(c);
      zb.delete(); seen_last = 0;
      @(negedge clk); start = 1; beta = ($clog2(GAMMA+1))'(bb);
      @(negedge clk); start = 0;
      for (int w = 0; w < 2 * Q + 2; w++) begin
        in_valid = 1; in_word = by[24*w +: 24];
        c_valid = 1; c_word = (w <= Q) ? c[24*w +: 24] : 24'hABCDEF;
        @(negedge clk);
      end
      in_valid = 0; c_valid = 0;
      @(negedge clk);
      checks++;
      if (zb.size() != bb || !seen_last || c_underrun) begin
        failures++; $display("beta %0d: %0d bits, last %0d", bb, zb.size(), seen_last);
      end else
        for (int i = 0; i < bb; i++) begin
          checks++;
          if (zb[i] != t[GAMMA - bb + i]) begin failures++; if (failures < 5) $display("beta %0d bit %0d", bb, i); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
