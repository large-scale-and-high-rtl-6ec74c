// tb_large_mul: multiplies random operands with the NTT multiplier at
// STAGES = 2 (256 points, 3072-bit operands) and compares every product word
// with SystemVerilog's own wide multiplication. Also checks the cycle count
// of one multiplication against the documented schedule and that a short
// operand (op_words < N/2) is zero-extended.
module tb_large_mul;
  import pa_pkg::*;
  localparam int unsigned STAGES = 2;
  localparam int unsigned N      = 16 ** STAGES;
  localparam int unsigned HW     = N / 2;            // operand words
  localparam int unsigned BITS   = HW * WORD;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, ready, ld_valid, ld_ready, p_valid, p_last, done;
  logic [4*STAGES-1:0] op_words;
  logic [4*STAGES:0]   out_words;
  word_t ld_x, ld_m, p_word;

  large_mul #(.STAGES(STAGES)) dut (.*);

  int checks = 0, failures = 0;
  logic [BITS-1:0]   xa, ma;
  logic [2*BITS-1:0] ref_p;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nwords, input bit stall);
    int widx, pidx, cyc;
    bit got_last;
    for (int i = 0; i < BITS; i += 32) begin
      xa[i +: 32] = $urandom; ma[i +: 32] = $urandom;
    end
    for (int i = nwords * WORD; i < BITS; i++) begin
      xa[i] = 1'b0; ma[i] = 1'b0;
    end
    ref_p = (2*BITS)'(xa) * (2*BITS)'(ma);
    op_words = (4*STAGES)'(nwords); out_words = (4*STAGES+1)'(N);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    widx = 0; pidx = 0; cyc = 1; got_last = 0;
    while (!got_last) begin
      ld_valid = (widx < nwords) && (!stall || ($urandom % 3 != 0));
      ld_x = xa[widx*WORD +: WORD]; ld_m = ma[widx*WORD +: WORD];
      @(posedge clk); #1;
      if (ld_valid && ld_ready) widx++;
      cyc++;
      if (p_valid) begin
        checks++;
        if (p_word !== ref_p[pidx*WORD +: WORD]) begin
          failures++;
          if (failures < 5) $display("word %0d: got %h want %h", pidx, p_word, ref_p[pidx*WORD +: WORD]);
        end
        pidx++;
        got_last = p_last;
      end
      @(negedge clk);
    end
    ld_valid = 1'b0;
    checks++;
    if (pidx != N) begin failures++; $display("product words %0d", pidx); end
    if (!stall) begin
      // load N/2 + transforms 2*(S*(N/16+3)+1) + 2 state changes + read-out N + 2
      int expect_c;
      expect_c = HW + 2 * (STAGES * (N / 16 + 3) + 1) + 2 + N + 2;
      checks++;
      if (cyc != expect_c) begin failures++; $display("cycles %0d expected %0d", cyc, expect_c); end
      else $display("multiplication took %0d cycles", cyc);
    end
  endtask

  initial begin
    start = 0; ld_valid = 0; ld_x = 0; ld_m = 0; op_words = 0; out_words = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run(HW, 0);
    run(HW, 1);
    run(HW - 7, 1);
    run(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
