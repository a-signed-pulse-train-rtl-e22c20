// result_counter -- the pixel's two signed counters and its PWM regenerator.
//
// Vertical counter (vcnt): in the vertical step it counts every cycle in which the
// sampled bit is 1 and the coefficient strobe (Counter_CLK) is high, up or down as the
// sign generator says, so it ends the step holding the vertical 1D result Rt. In the
// horizontal step it is clocked instead by Down_Step_CLK (once per sample slot) and
// steps toward zero; while it is non-zero PWM_Out is 1, so the pixel emits a pulse of
// |Rt| slots, and Sign bit tells the neighbours the sign of that pulse.
// Final counter (fcnt): counts sampled strobes in the horizontal step only and so
// accumulates Rs, summed over all passes of a frame. Final_Result is given as
// {sign, 8-bit magnitude}.
//
// Both counters clip at +/-(2**MAG_W - 1) instead of wrapping. The clipping, the
// horizontal-only enable of the final counter and the pass clear (clr_vert) are choices
// of this design; the two counters, the clock selection by V/H and the down-stepping
// toward zero follow the cell schematic and its description.
//
// Timing: rising clock edge; RS clears both counters, clr_vert the vertical one, rst_n
// both asynchronously. PWM_Out comes from a flip-flop, as in the cell schematic, loaded
// with "next counter value is not zero", so it always equals (counter != 0); Sign bit is
// the counter's sign.
module result_counter
  import pta_pkg::phase_e, pta_pkg::PH_V, pta_pkg::PH_H;
#(
  parameter int unsigned MAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rs,
  input  logic             clr_vert,
  input  logic             sampled_data,
  input  logic             counter_clk,
  input  logic             sign,            // 1 = count down
  input  logic             down_step_clk,
  input  phase_e           vh,
  output logic [MAG_W:0]   final_result,    // {sign, magnitude}
  output logic             pwm_out,
  output logic             sign_bit
);

  localparam logic signed [MAG_W+1:0] MAXV = (MAG_W+2)'(2**MAG_W - 1);
  localparam logic signed [MAG_W+1:0] MINV = -MAXV;

  // One bit of headroom above {sign, MAG_W}; the clip keeps values in +/-MAXV.
  logic signed [MAG_W+1:0] vcnt, vcnt_d, fcnt;
  logic                    pwm_q;
  logic                    cnt_clk;

  function automatic logic signed [MAG_W+1:0] step(input logic signed [MAG_W+1:0] v,
                                                   input logic down);
    if (down) return (v == MINV) ? v : v - 1;
    else      return (v == MAXV) ? v : v + 1;
  endfunction

  assign cnt_clk = sampled_data & counter_clk;

  // Next value of the vertical counter.
  always_comb begin
    vcnt_d = vcnt;
    if (rs || clr_vert) begin
      vcnt_d = '0;
    end else if (vh == PH_V) begin
      if (cnt_clk) vcnt_d = step(vcnt, sign);
    end else begin
      // Horizontal step: move toward zero, one step per slot.
      if (down_step_clk && vcnt != '0) vcnt_d = step(vcnt, !vcnt[MAG_W+1]);
    end
  end

  // The counter and the PWM_Out flip-flop, which holds "counter not zero".
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vcnt  <= '0;
      pwm_q <= 1'b0;
    end else begin
      vcnt  <= vcnt_d;
      pwm_q <= (vcnt_d != '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fcnt <= '0;
    end else if (rs) begin
      fcnt <= '0;
    end else if (vh == PH_H && cnt_clk) begin
      fcnt <= step(fcnt, sign);
    end
  end

  logic [MAG_W-1:0] fneg;
  assign fneg         = MAG_W'(-fcnt);
  assign final_result = {fcnt[MAG_W+1], fcnt[MAG_W+1] ? fneg : fcnt[MAG_W-1:0]};
  assign pwm_out      = pwm_q;
  assign sign_bit     = vcnt[MAG_W+1];

endmodule
