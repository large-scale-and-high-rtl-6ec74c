// tb_twiddle_rom: random exponents on all 16 lanes, expected W^e computed by
// square-and-multiply with % arithmetic; checks the two-cycle latency and
// that W^32768 = -1 and W^4096 = 2^12.
module tb_twiddle_rom;
  import pa_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [15:0] exp_in [LANES];
  lanes_t tw;
  twiddle_rom dut (.clk, .en(1'b1), .exp_in, .tw);
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic elem_t pw(input int unsigned e);
    logic [127:0] r, b;
    r = 1; b = 128'(W65536);
    for (int i = 0; i < 16; i++) begin
      if (e[i]) r = (r * b) % 128'(P);
      b = (b * b) % 128'(P);
    end
    return r[63:0];
  endfunction

  initial begin
    for (int t = 0; t < 100; t++) begin
      logic [15:0] e [LANES];
      for (int l = 0; l < LANES; l++) begin
        e[l] = 16'($urandom);
        if (t == 0) e[l] = (l == 0) ? 16'd32768 : (l == 1) ? 16'd4096 : 16'(l);
      end
      exp_in = e;
      @(posedge clk); #1;
      exp_in = '{default: '0};
      @(posedge clk); #1;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (tw[l] !== pw(e[l])) begin
          failures++;
          if (failures < 5) $display("e=%0d got %h want %h", e[l], tw[l], pw(e[l]));
        end
      end
      if (t == 0) begin
        checks += 2;
        if (tw[0] !== P - 1)       failures++;
        if (tw[1] !== 64'd4096)    failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
