// tb_pa_control: drives the controller with a model of the multiplier and
// output stage and checks its state sequence: Idle -> MMH -> MMH cnt ->
// (MMH while cnt < k) -> MH -> Idle, one multiplier start per sub-block
// plus one for MH, a rejected sub-block not being counted, and the operand
// and product lengths it requests.
module tb_pa_control;
  import pa_pkg::*;
  localparam int unsigned GAMMA = 127, STAGES = 1;
  localparam int unsigned Q = GAMMA / 24;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, mul_ready, mul_done, x_reject, out_finish;
  logic mul_start, sel_mh, new_op, acc_clear, acc_rd_start, mh_start, busy, reject_pulse;
  logic [15:0] k;
  logic [4*STAGES-1:0] op_words;
  logic [4*STAGES:0] out_words;
  pa_state_e state;
  pa_control #(.GAMMA(GAMMA), .STAGES(STAGES)) dut (.*);
  int checks = 0, failures = 0;
  int starts, mh_starts, rd_starts, clears, rejects;

  task automatic expect_(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // multiplier model: busy for 5 cycles after each start, then a done pulse
  int busy_cnt = 0;
  always @(posedge clk) begin
    if (mul_start) begin
      starts++;
      busy_cnt <= 6;
      expect_(op_words == (4*STAGES)'(Q + 1), "operand length");
      expect_(out_words == (sel_mh ? (4*STAGES+1)'(Q + 1) : (4*STAGES+1)'(2*Q + 2)), "product length");
    end else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    if (mh_start) mh_starts++;
    if (acc_rd_start) rd_starts++;
    if (acc_clear) clears++;
    if (reject_pulse) rejects++;
  end
  assign mul_ready  = (busy_cnt == 0);
  assign mul_done   = (busy_cnt == 1) && !sel_mh;
  assign out_finish = (busy_cnt == 1) && sel_mh;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pa_state_e prev;
    int trans_loop, trans_mh;
    start = 0; k = 0; x_reject = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      int kk;
      kk = rep + 2;
      starts = 0; mh_starts = 0; rd_starts = 0; clears = 0; rejects = 0;
      trans_loop = 0; trans_mh = 0;
      @(negedge clk); start = 1; k = 16'(kk);
      @(negedge clk); start = 0;
      expect_(state == ST_MMH, "Idle -> MMH");
      prev = state;
      while (state != ST_IDLE) begin
        // reject the second sub-block once in the last run
        x_reject = (rep == 2) && (state == ST_MMH_CNT) && (dut.cnt == 1) && (rejects == 0);
        @(negedge clk);
        if (prev == ST_MMH && state != ST_MMH) expect_(state == ST_MMH_CNT, "MMH -> MMH cnt");
        if (prev == ST_MMH_CNT) begin
          if (state == ST_MMH) trans_loop++;
          else if (state == ST_MH) trans_mh++;
          else expect_(0, "MMH cnt goes to MMH or MH");
        end
        if (prev == ST_MH && state != ST_MH) expect_(state == ST_IDLE, "MH -> Idle");
        expect_(sel_mh == (state == ST_MH), "data flow select");
        prev = state;
      end
      x_reject = 0;
      expect_(clears == 1, "one clear");
      expect_(trans_mh == 1, "one MMH cnt -> MH");
      expect_(trans_loop == kk - 1 + (rep == 2 ? 1 : 0), "cnt < k loops");
      expect_(starts == kk + 1 + (rep == 2 ? 1 : 0), "multiplications");
      expect_(mh_starts == 1 && rd_starts == 1, "MH launch");
      expect_(rejects == (rep == 2 ? 1 : 0), "reject pulse");
      expect_(!busy, "idle at the end");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
