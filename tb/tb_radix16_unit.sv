// tb_radix16_unit: compares the butterfly with a direct 16-point transform,
// X_k = sum x_n w^(n k) mod p, with w = 4096 (forward) or 4096^-1 (inverse),
// computed with 128-bit % arithmetic. Also checks the one-cycle latency.
module tb_radix16_unit;
  import pa_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic inverse;
  lanes_t x, y;
  radix16_unit dut (.clk, .en(1'b1), .inverse, .x, .y);
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic elem_t mm(input elem_t u, input elem_t v);
    logic [127:0] r;
    r = (128'(u) * 128'(v)) % 128'(P);
    return r[63:0];
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      elem_t w, ref_k, wp;
      inverse = t[0];
      // 4096^-1 = 4096^15
      w = 64'd4096;
      if (inverse) begin
        wp = 64'd1;
        for (int i = 0; i < 15; i++) wp = mm(wp, 64'd4096);
        w = wp;
      end
      for (int n = 0; n < 16; n++) begin
        x[n] = {$urandom, $urandom};
        if (t < 4) x[n] = P - 1;
        if (x[n] >= P) x[n] = x[n] - P;
      end
      @(posedge clk); #1;
      for (int k = 0; k < 16; k++) begin
        logic [127:0] acc;
        acc = 0;
        for (int n = 0; n < 16; n++) begin
          wp = 64'd1;
          for (int e = 0; e < (n * k) % 16; e++) wp = mm(wp, w);
          acc = (acc + 128'(mm(x[n], wp))) % 128'(P);
        end
        ref_k = acc[63:0];
        checks++;
        if (y[k] !== ref_k) begin
          failures++;
          if (failures < 5) $display("t=%0d k=%0d got %h want %h", t, k, y[k], ref_k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
