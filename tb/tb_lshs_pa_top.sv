// tb_lshs_pa_top: end-to-end test of the privacy amplification engine at a
// reduced size: 256-point NTT (3072-bit multiplier) and GAMMA = 2281 (a
// Mersenne exponent with GAMMA mod 24 = 1, the hardest word alignment). Runs
// several complete MMH-MH hashes with random key, random a_i, b, c and key
// lengths, including an all-ones sub-block that must be rejected and
// reloaded, and compares every key bit with a reference computed by plain
// big-number arithmetic.
module tb_lshs_pa_top;
  localparam int unsigned STAGES = 2;
  localparam int unsigned GAMMA  = 2281;
  localparam bit SPARSE = 1'b0;
  localparam bit EXPECT_REJECT = 1'b1;
  localparam bit EXPECT_FLUSH  = 1'b1;

  `include "tb_top_body.svh"

  lshs_pa_top #(.STAGES(STAGES), .GAMMA(GAMMA)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; k = 0; beta = 0; stall_key = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_pa(3, 1000, 1);
    run_pa(1, 7, -1);
    run_pa(4, 2280, 3);
    for (int i = 0; i < 4; i++) run_pa(2 + i % 2, 1 + $urandom % (GAMMA - 1), -1);
    mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
