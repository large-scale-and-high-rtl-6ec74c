// pa_control: the MMH-MH controller, states Idle, MMH, MMH cnt and MH.
//
// Idle -> MMH when a run is requested and the multiplier reports ready. In
// MMH one multiplication x_i * a_i is launched and its product streams into
// the accumulation unit (blue data flow, sel_mh = 0). When the product is
// complete the state becomes MMH cnt, where the sub-block counter is
// incremented (not for a rejected all-ones sub-block, which is loaded again);
// back to MMH while cnt < k, on to MH when cnt = k. In MH (red data flow,
// sel_mh = 1) the accumulator is read out into the multiplier together with
// b, the product b*y goes through the MH stage, and the state returns to Idle
// once the last key frame is out (Output Finish).
// The four states and their transitions follow the design; the start input
// and the sub-steps inside MMH and MH are this implementation's own.
// Outputs are single-cycle command pulses and level selects.
module pa_control #(
  parameter int unsigned GAMMA = 756839,
  parameter int unsigned STAGES = 4,
  parameter int unsigned KW = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [KW-1:0]         k,
  input  logic                  mul_ready,
  input  logic                  mul_done,
  input  logic                  x_reject,
  input  logic                  out_finish,
  output logic                  mul_start,
  output logic [4*STAGES-1:0]   op_words,
  output logic [4*STAGES:0]     out_words,
  output logic                  sel_mh,
  output logic                  new_op,
  output logic                  acc_clear,
  output logic                  acc_rd_start,
  output logic                  mh_start,
  output logic                  busy,
  output logic                  reject_pulse,
  output pa_pkg::pa_state_e     state
);
  import pa_pkg::*;

  localparam int unsigned Q = GAMMA / WORD;

  logic [KW-1:0] k_r, cnt;
  logic          launched;

  // sub-block count after this multiplication (a rejected one does not count)
  logic [KW-1:0] c1;
  assign c1 = x_reject ? cnt : cnt + 1'b1;

  assign op_words  = (4*STAGES)'(Q + 1);
  assign out_words = (state == ST_MH) ? (4*STAGES+1)'(Q + 1) : (4*STAGES+1)'(2 * Q + 2);
  assign sel_mh    = (state == ST_MH);
  assign busy      = (state != ST_IDLE);

  always_comb begin
    mul_start = 1'b0; new_op = 1'b0; acc_rd_start = 1'b0; mh_start = 1'b0;
    if ((state == ST_MMH || state == ST_MH) && !launched && mul_ready) begin
      mul_start = 1'b1;
      new_op    = 1'b1;
      if (state == ST_MH) begin
        acc_rd_start = 1'b1;
        mh_start     = 1'b1;
      end
    end
  end

  assign acc_clear    = (state == ST_IDLE) && start && mul_ready;
  assign reject_pulse = (state == ST_MMH_CNT) && x_reject;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= ST_IDLE; k_r <= '0; cnt <= '0; launched <= 1'b0;
    end else begin
      if (mul_start) launched <= 1'b1;
      unique case (state)
        ST_IDLE: if (start && mul_ready) begin            // Mul Ready
          state <= ST_MMH; k_r <= (k == '0) ? KW'(1) : k; cnt <= '0; launched <= 1'b0;
        end
        ST_MMH: if (launched && mul_done) state <= ST_MMH_CNT;
        ST_MMH_CNT: begin
          cnt      <= c1;
          launched <= 1'b0;
          state    <= (c1 < k_r) ? ST_MMH : ST_MH;        // cnt < k / cnt = k
        end
        ST_MH: if (launched && out_finish) begin          // Output Finish
          state <= ST_IDLE; launched <= 1'b0;
        end
      endcase
    end
endmodule
