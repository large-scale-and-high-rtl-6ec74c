// tb_lshs_pa_full: one complete privacy amplification run with every
// parameter at its default: 65536-point NTT, 786432-bit multiplier,
// GAMMA = 756839. Two key sub-blocks (n = 1513678 bits), the second preceded
// by an all-ones sub-block that must be rejected, and a 100000-bit final key.
// The random a_i and b have only three non-zero words each so that the
// reference products are cheap to compute; the key and c are dense. Every
// key bit is compared with the reference.
module tb_lshs_pa_full;
  localparam int unsigned STAGES = 4;
  localparam int unsigned GAMMA  = 756839;
  localparam bit SPARSE = 1'b1;
  localparam bit EXPECT_REJECT = 1'b1;
  localparam bit EXPECT_FLUSH  = 1'b0;   // depends on the data at this size

  `include "tb_top_body.svh"

  lshs_pa_top dut (.*);

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
    run_pa(2, 100000, 1);
    mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
