// tb_pa_datapath_switch: GAMMA = 127 (top word 7 bits). Checks in both flows
// which source feeds operand X, that the random word feeds operand M (and is
// forced odd for b), the top-word masking, the handshakes, where product
// words go, and the all-ones sub-block detector.
module tb_pa_datapath_switch;
  import pa_pkg::*;
  localparam int unsigned GAMMA = 127;
  localparam int unsigned Q = GAMMA / 24;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic sel_mh, new_op, key_valid, key_ready, y_valid, y_ready, rnd_valid, rnd_ready;
  logic ld_valid, ld_ready, p_valid, acc_valid, mh_valid, c_ready, c_valid, x_reject;
  word_t key_word, y_word, rnd_word, ld_x, ld_m, p_word, dst_word;
  pa_datapath_switch #(.GAMMA(GAMMA)) dut (.*);
  int checks = 0, failures = 0;

  task automatic expect_(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_block(input bit mh, input bit ones);
    @(negedge clk); new_op = 1; sel_mh = mh; @(negedge clk); new_op = 0;
    for (int w = 0; w <= Q; w++) begin
      key_word = ones ? 24'hFFFFFF : 24'($urandom); y_word = 24'($urandom); rnd_word = 24'($urandom) & ~24'h1;
      key_valid = 1; y_valid = 1; rnd_valid = 1; ld_ready = 1;
      #1;
      expect_(ld_valid, "ld_valid");
      expect_(ld_x == ((w == Q) ? ((mh ? y_word : key_word) & 24'h7F) : (mh ? y_word : key_word)), "X source");
      expect_(ld_m[23:1] == ((w == Q) ? (rnd_word[23:1] & 23'h3F) : rnd_word[23:1]), "M word");
      expect_(ld_m[0] == (mh && w == 0), "b forced odd only in its first word");
      expect_(key_ready == !mh && y_ready == mh && rnd_ready, "handshakes");
      @(negedge clk);
    end
    key_valid = 0; y_valid = 0; ld_ready = 0;
    #1;
    expect_(!rnd_ready && !key_ready && !y_ready, "no handshake without ld_ready");
  endtask

  initial begin
    sel_mh = 0; new_op = 0; key_valid = 0; y_valid = 0; rnd_valid = 0; ld_ready = 0;
    p_valid = 0; c_ready = 0; key_word = 0; y_word = 0; rnd_word = 0; p_word = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      bit mh, ones;
      mh = rep[0]; ones = (rep == 2);
      load_block(mh, ones);
      @(negedge clk);
      expect_(x_reject == ones, "all-ones detector");
      p_valid = 1; p_word = 24'h5A5A5A;
      #1;
      expect_(acc_valid == (!mh && !ones) && mh_valid == mh && dst_word == 24'h5A5A5A, "product routing");
      c_ready = mh; rnd_valid = 1;
      #1;
      expect_(c_valid == mh && rnd_ready == mh, "c from the random stream in MH");
      @(negedge clk); p_valid = 0; c_ready = 0;
    end
    // a block with one zero bit is not rejected
    @(negedge clk); new_op = 1; sel_mh = 0; @(negedge clk); new_op = 0;
    for (int w = 0; w <= Q; w++) begin
      key_word = (w == 2) ? 24'hFFFEFF : 24'hFFFFFF; key_valid = 1; rnd_valid = 1; ld_ready = 1;
      @(negedge clk);
    end
    ld_ready = 0; key_valid = 0;
    @(negedge clk);
    expect_(!x_reject, "near-all-ones block accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
