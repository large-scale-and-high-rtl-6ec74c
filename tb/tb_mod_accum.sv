// tb_mod_accum: GAMMA = 127 (Q = 5, R = 7). Streams k random products of up
// to 254 bits (2Q+2 words each), then reads the result, which must equal the
// sum of the products mod 2^127 - 1 computed with the % operator. Runs
// several accumulations back to back to check the clearing mux, and uses
// products near 2^254 so that end-around carries and the flush occur.
module tb_mod_accum;
  import pa_pkg::*;
  localparam int unsigned GAMMA = 127;
  localparam int unsigned Q = GAMMA / 24;
  localparam logic [GAMMA-1:0] PM = '1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, in_valid, rd_start, y_valid, y_ready, y_last, busy;
  word_t in_word, y_word;
  mod_accum #(.GAMMA(GAMMA)) dut (.*);
  int checks = 0, failures = 0, flushes = 0;

  always @(posedge clk) if (dut.st == 2'd1 && dut.carry) flushes++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [24*(2*Q+2)-1:0] prod;
    logic [255:0] sum;
    logic [24*(Q+1)-1:0] got;
    clear = 0; in_valid = 0; rd_start = 0; y_ready = 0; in_word = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 12; rep++) begin
      int kk;
      kk = 1 + rep % 4;
      sum = '0;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < kk; i++) begin
        prod = '0;
        for (int b = 0; b < 2 * GAMMA; b += 32) prod[b +: 32] = $urandom;
        for (int b = 2 * GAMMA; b < 24 * (2 * Q + 2); b++) prod[b] = 1'b0;
        if (rep % 3 == 0) for (int b = 0; b < 2 * GAMMA; b++) prod[b] = 1'b1;
        sum = (sum + 256'(prod % 254'(PM))) % 256'(PM);
        for (int w = 0; w < 2 * Q + 2; w++) begin
          in_valid = 1; in_word = prod[24*w +: 24];
          @(negedge clk);
        end
        in_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
      rd_start = 1; @(negedge clk); rd_start = 0;
      for (int w = 0; w <= Q; ) begin
        y_ready = ($urandom % 4 != 0);
        @(posedge clk);
        if (y_valid && y_ready) begin
          got[24*w +: 24] = y_word;
          checks++;
          if (y_last != (w == Q)) failures++;
          w++;
        end
        @(negedge clk);
      end
      y_ready = 0;
      checks++;
      // 2^127 - 1 itself also represents 0
      if (!(got[GAMMA-1:0] == sum[GAMMA-1:0] || (sum == 0 && got[GAMMA-1:0] == PM))) begin
        failures++;
        $display("rep %0d got %h want %h", rep, got[GAMMA-1:0], sum[GAMMA-1:0]);
      end
      @(negedge clk);
    end
    checks++;
    if (flushes == 0) begin failures++; $display("no flush step"); end
    $display("flush steps: %0d", flushes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
