// sign_generator -- decides whether the result counter counts up or down this cycle.
//
// Vertical step: pixel PWM values are never negative, so the direction is the global
// coefficient sign (General_Sign) of the tap being processed. Horizontal step: the data
// are vertical results that may be negative, so the direction is General_Sign XOR the
// sign of the data being counted. That data sign is the left neighbour's shifted sign
// when Sample_CLK = 0, the right neighbour's when Sample_CLK = 1, and the pixel's own
// sign during the load cycle (Load/Shift = 0), in which the centre tap counts the
// pixel's own regenerated PWM. The own-sign path is an addition of this design: the
// schematic shows only the two neighbour inputs, which cannot serve the centre tap.
//
// Output sign = 1 means count down. Purely combinational.
module sign_generator
  import pta_pkg::*;
(
  input  logic   left_p_sign,
  input  logic   right_p_sign,
  input  logic   own_sign,
  input  logic   load_shift,
  input  logic   sample_clk,
  input  phase_e vh,
  input  logic   general_sign,
  output logic   sign
);

  logic data_sign;

  always_comb begin
    if (!load_shift) data_sign = own_sign;
    else             data_sign = sample_clk ? right_p_sign : left_p_sign;
    sign = (vh == PH_H) ? (general_sign ^ data_sign) : general_sign;
  end

endmodule
