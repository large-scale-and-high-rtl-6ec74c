// tb_carry_op: streams random 63-bit coefficients and checks that the output
// words are the base-2^24 digits of sum c_i 2^(24 i), computed with wide
// arithmetic.
module tb_carry_op;
  import pa_pkg::*;
  localparam int NC = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_first, in_last, out_valid, out_last;
  elem_t in_coef;
  word_t out_word;
  carry_op dut (.*);
  int checks = 0, failures = 0;
  logic [24*NC+80:0] total;
  elem_t coef [NC];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int oi;
    in_valid = 0; in_first = 0; in_last = 0; in_coef = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      total = '0;
      for (int i = 0; i < NC; i++) begin
        coef[i] = {1'b0, 31'($urandom), $urandom};
        total = total + ((24*NC+81)'(coef[i]) << (24 * i));
      end
      oi = 0;
      for (int i = 0; i < NC + 1; i++) begin
        @(negedge clk);
        in_valid = (i < NC); in_first = (i == 0); in_last = (i == NC - 1);
        in_coef = (i < NC) ? coef[i] : '0;
        @(posedge clk); #1;
        if (out_valid) begin
          checks++;
          if (out_word !== total[24*oi +: 24]) begin
            failures++;
            if (failures < 5) $display("word %0d got %h want %h", oi, out_word, total[24*oi +: 24]);
          end
          if (out_last != (oi == NC - 1)) failures++;
          oi++;
        end
      end
      checks++;
      if (oi != NC) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
