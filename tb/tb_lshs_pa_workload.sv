// tb_lshs_pa_workload: the operating point with compression ratio 0.3 at the
// default sizes. k = 3 sub-blocks give an input block of n = 3 * 756839 =
// 2270517 bits (1/k = 0.33 stays above the ratio), and the final key is
// 0.3 n = 681155 bits long. No sub-block is rejected. Besides every key bit,
// the testbench checks the run time against the multiplier's schedule:
// k MMH multiplications of 128640 cycles each plus the MH pass of 97110
// cycles: 4.7 input bits per clock for k = 3, tending to 5.9 for large k.
// a_i and b are sparse (three non-zero words) to keep the reference cheap;
// key and c are dense.
module tb_lshs_pa_workload;
  localparam int unsigned STAGES = 4;
  localparam int unsigned GAMMA  = 756839;
  localparam bit SPARSE = 1'b1;
  localparam bit EXPECT_REJECT = 1'b0;
  localparam bit EXPECT_FLUSH  = 1'b0;
  localparam int KSUB = 3;
  localparam int BETA = 681155;              // floor(0.3 * 3 * 756839)
  localparam longint T_MMH = 128640, T_MH = 97110;

  `include "tb_top_body.svh"

  lshs_pa_top dut (.*);

  longint c0, took, expect_c;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; k = 0; beta = 0; stall_key = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    c0 = cycles;
    run_pa(KSUB, BETA, -1);
    took = cycles - c0;
    expect_c = KSUB * T_MMH + T_MH;
    checks++;
    if (took < expect_c - 64 || took > expect_c + 64) begin
      failures++;
      $display("run took %0d cycles, schedule gives %0d", took, expect_c);
    end
    $display("%0d input bits in %0d cycles: %0.2f bits per cycle",
             KSUB * GAMMA, took, real'(KSUB * GAMMA) / real'(took));
    mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
