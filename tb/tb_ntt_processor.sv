// tb_ntt_processor: a 256-point processor (STAGES = 2). Loads random data
// (upper half zero), runs the forward transform and compares every point
// with a direct transform X_k = sum x_n W256^(n k) mod p, found at the
// base-16 digit-reversed position. Then runs the inverse transform and
// expects the original data back. Checks the transform cycle count
// STAGES * (N/16 + 3) + 1.
module tb_ntt_processor;
  import pa_pkg::*;
  localparam int unsigned STAGES = 2;
  localparam int unsigned N = 16 ** STAGES;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_en, start, inverse, busy, done, rd_en;
  logic [4*STAGES-2:0] ld_idx;
  logic [4*STAGES-1:0] rd_idx;
  elem_t ld_data, rd_data;
  logic [15:0] tw_exp [LANES];
  lanes_t tw_in, ext_op, rad_q;

  ntt_processor #(.STAGES(STAGES)) dut (.clk, .rst_n, .ld_en, .ld_idx, .ld_data, .start, .inverse,
    .last_ext(1'b0), .busy, .done, .tw_exp, .tw_in, .ext_op, .rad_q, .rd_en, .rd_idx, .rd_data);
  twiddle_rom u_rom (.clk, .en(1'b1), .exp_in(tw_exp), .tw(tw_in));
  assign ext_op = '{default: '0};

  int checks = 0, failures = 0;
  elem_t xin [N];
  elem_t xf  [N];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic elem_t mm(input elem_t u, input elem_t v);
    logic [127:0] r;
    r = (128'(u) * 128'(v)) % 128'(P);
    return r[63:0];
  endfunction

  function automatic int drev(input int q);
    int r;
    r = 0;
    for (int i = 0; i < STAGES; i++) r = (r << 4) | ((q >> (4 * i)) & 15);
    return r;
  endfunction

  task automatic run_transform(input bit inv);
    int cyc;
    @(negedge clk); start = 1; inverse = inv;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != STAGES * (N / 16 + 3) + 1) begin
      failures++; $display("transform took %0d cycles", cyc);
    end
  endtask

  initial begin
    elem_t w, wp, acc;
    ld_en = 0; start = 0; inverse = 0; rd_en = 0; ld_idx = 0; rd_idx = 0; ld_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N / 2; i++) begin
      xin[i] = {$urandom, $urandom};
      if (xin[i] >= P) xin[i] = xin[i] - P;
      xin[i + N / 2] = 0;
      @(negedge clk); ld_en = 1; ld_idx = (4*STAGES-1)'(i); ld_data = xin[i];
    end
    @(negedge clk); ld_en = 0;
    // reference forward transform
    w = W65536;
    for (int i = 0; i < 4 - STAGES; i++) for (int j = 0; j < 4; j++) w = mm(w, w);  // W^(65536/N)
    // direct transform: X_k = sum x_n (w^k)^n
    for (int kk = 0; kk < N; kk++) begin
      elem_t wk;
      wk = 1;
      for (int e = 0; e < kk; e++) wk = mm(wk, w);
      acc = 0; wp = 1;
      for (int n = 0; n < N; n++) begin
        acc = elem_t'((128'(acc) + 128'(mm(xin[n], wp))) % 128'(P));
        wp = mm(wp, wk);
      end
      xf[kk] = acc;
    end
    run_transform(1'b0);
    for (int q = 0; q < N; q++) begin
      @(negedge clk); rd_en = 1; rd_idx = (4*STAGES)'(q);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== xf[drev(q)]) begin
        failures++;
        if (failures < 5) $display("fwd pos %0d got %h want %h", q, rd_data, xf[drev(q)]);
      end
    end
    run_transform(1'b1);
    for (int q = 0; q < N; q++) begin
      @(negedge clk); rd_en = 1; rd_idx = (4*STAGES)'(q);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data !== xin[q]) begin
        failures++;
        if (failures < 5) $display("inv pos %0d got %h want %h", q, rd_data, xin[q]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
