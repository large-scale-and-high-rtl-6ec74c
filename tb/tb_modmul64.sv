// tb_modmul64: random and corner-case operands; the expected value is the
// 128-bit product reduced with the % operator.
module tb_modmul64;
  import pa_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  elem_t a, b, y;
  modmul64 dut (.clk, .en(1'b1), .a, .b, .y);
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input elem_t x, input elem_t z);
    logic [127:0] r;
    a = x; b = z;
    @(posedge clk); #1;
    r = (128'(x) * 128'(z)) % 128'(P);
    checks++;
    if (y !== r[63:0]) begin
      failures++;
      $display("%h * %h: got %h want %h", x, z, y, r[63:0]);
    end
  endtask

  initial begin
    check(P - 1, P - 1);
    check(P - 1, 1);
    check(0, 64'h1234);
    check(64'hFFFF_FFFF, 64'hFFFF_FFFF);
    check(64'h1_0000_0000, 64'h1_0000_0000);
    check(W65536, W65536);
    for (int i = 0; i < 2000; i++) begin
      elem_t x, z;
      x = {$urandom, $urandom}; z = {$urandom, $urandom};
      if (x >= P) x = x - P;
      if (z >= P) z = z - P;
      check(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
