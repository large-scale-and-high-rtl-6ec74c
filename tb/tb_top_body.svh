// Shared body of the end-to-end testbenches. The including module defines
// STAGES, GAMMA, the run list and SPARSE (random operands a_i and b with only
// a few non-zero words, which keeps the reference multiplication cheap at full
// size). Key words and random words are driven from queues; a rejected
// all-ones sub-block is followed by the real sub-block and its a_i again.
  import pa_pkg::*;
  import pa_ref_pkg::*;

  localparam int unsigned Q  = GAMMA / 24;
  localparam int unsigned R  = GAMMA % 24;
  localparam int unsigned NW = Q + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, key_valid, key_ready, rnd_valid, rnd_ready;
  logic z_valid, z_last, key_reject, c_underrun;
  logic [15:0] k;
  logic [$clog2(GAMMA+1)-1:0] beta;
  word_t key_word, rnd_word, z_word;
  logic [4:0] z_nbits;
  pa_state_e state;

  int checks = 0, failures = 0;
  int n_reject = 0, n_key_stall = 0, n_mmh_loop = 0, n_mh = 0, n_partial = 0, n_flush = 0;
  longint cycles = 0;

  int unsigned keyq[$], rndq[$];
  bit zbits[$];
  bit stall_key;

  always @(posedge clk) cycles++;

  // sources
  assign key_valid = (keyq.size() != 0) && !stall_key;
  assign key_word  = (keyq.size() != 0) ? word_t'(keyq[0]) : '0;
  assign rnd_valid = (rndq.size() != 0);
  assign rnd_word  = (rndq.size() != 0) ? word_t'(rndq[0]) : '0;

  // queue updates happen after the clock edge so the DUT samples stable inputs
  always begin
    bit kf, rf;
    @(posedge clk);
    kf = rst_n && key_valid && key_ready;
    rf = rst_n && rnd_valid && rnd_ready;
    #1;
    if (kf) void'(keyq.pop_front());
    if (rf) void'(rndq.pop_front());
  end

  always @(posedge clk) if (rst_n) begin
    if (keyq.size() != 0 && !key_valid && dut.u_mul.ld_ready) n_key_stall++;
    stall_key <= SPARSE ? 1'b0 : ($urandom % 5 == 0);
    if (key_reject) n_reject++;
    if (state == ST_MMH_CNT && dut.u_ctl.cnt + 1 < dut.u_ctl.k_r && !dut.x_reject) n_mmh_loop++;
    if (state == ST_MMH_CNT && !(dut.u_ctl.cnt + 1 < dut.u_ctl.k_r && !dut.x_reject) && !dut.x_reject) n_mh++;
    if (dut.u_acc.step && dut.u_acc.st != 0) n_flush++;
    if (z_valid) begin
      if (z_nbits != 5'd24) n_partial++;
      for (int i = 0; i < z_nbits; i++) zbits.push_back(z_word[i]);
    end
  end

  function automatic bn_t rand_num(input bit sparse, input bit odd);
    bn_t v;
    v = new[NW];
    foreach (v[i]) v[i] = sparse ? 0 : ($urandom & 24'hFFFFFF);
    if (sparse) for (int t = 0; t < 3; t++) v[$urandom % NW] = $urandom & 24'hFFFFFF;
    v[Q] &= (1 << R) - 1;
    if (odd) v[0] |= 1;
    return v;
  endfunction

  task automatic run_pa(input int kk, input int bb, input int reject_at);
    bn_t xi, ai, acc, prod, b, c, t, yb;
    int nz;
    acc = new[NW]; foreach (acc[w]) acc[w] = 0;
    for (int i = 0; i < kk; i++) begin
      xi = rand_num(1'b0, 1'b0);
      ai = rand_num(SPARSE, 1'b0);
      if (i == reject_at) begin
        for (int w = 0; w < NW; w++) keyq.push_back((w == Q) ? (1 << R) - 1 : 24'hFFFFFF);
        foreach (ai[w]) rndq.push_back(ai[w]);
      end
      foreach (xi[w]) keyq.push_back(xi[w]);
      foreach (ai[w]) rndq.push_back(ai[w]);
      prod = bn_mul(xi, ai);
      prod = bn_modp(prod, GAMMA);
      acc  = bn_addmodp(acc, prod, GAMMA);
    end
    b = rand_num(SPARSE, 1'b1);
    c = rand_num(1'b0, 1'b0);
    foreach (b[w]) rndq.push_back(b[w]);
    foreach (c[w]) rndq.push_back(c[w]);
    yb = bn_mul(acc, b);
    t  = bn_add_mod2(yb, c, GAMMA);
    zbits.delete();
    @(negedge clk);
    k = 16'(kk); beta = ($clog2(GAMMA+1))'(bb); start = 1'b1;
    @(negedge clk); start = 1'b0;
    wait (z_valid && z_last);
    @(negedge clk);
    @(negedge clk);   // the frame collector samples the last frame at this edge
    checks++;
    if (zbits.size() != bb) begin failures++; $display("key length %0d, expected %0d", zbits.size(), bb); end
    nz = 0;
    for (int i = 0; i < bb && i < zbits.size(); i++) begin
      checks++;
      if (zbits[i] != bn_bit(t, GAMMA - bb + i)) begin
        failures++; nz++;
        if (nz < 5) $display("key bit %0d differs", i);
      end
    end
    checks++;
    if (c_underrun) begin failures++; $display("c underrun"); end
    checks++;
    if (keyq.size() != 0 || rndq.size() != 0) begin
      failures++; $display("sources not drained: %0d key, %0d random words left", keyq.size(), rndq.size());
    end
    repeat (3) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
    $display("run k=%0d beta=%0d done after %0d cycles", kk, bb, cycles);
  endtask

  task automatic mechanisms;
    // every mechanism of the design must have happened
    if (EXPECT_REJECT)     begin checks++; if (n_reject == 0)    begin failures++; $display("no rejected sub-block"); end end
    if (!SPARSE)           begin checks++; if (n_key_stall == 0) begin failures++; $display("no source stall"); end end
    checks++; if (n_mmh_loop == 0) begin failures++; $display("no MMH cnt -> MMH"); end
    checks++; if (n_mh == 0)       begin failures++; $display("no MMH cnt -> MH"); end
    checks++; if (n_partial == 0)  begin failures++; $display("no partial key frame"); end
    if (EXPECT_FLUSH)      begin checks++; if (n_flush == 0)    begin failures++; $display("no end-around carry flush"); end end
    $display("mechanisms: reject=%0d key_stall=%0d mmh_loop=%0d mh=%0d partial_frame=%0d flush=%0d",
             n_reject, n_key_stall, n_mmh_loop, n_mh, n_partial, n_flush);
  endtask
