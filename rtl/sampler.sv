// sampler -- picks the one-bit value that the result counter may count this cycle.
//
// The pixel's PWM source is the photodiode PWM (P_Data_In) during the vertical step and
// the PWM regenerated from the pixel's own vertical result (PWM_In) during the horizontal
// step; that choice is made by V/H. The selected PWM is handed to the data shifter
// (Shift_Data_Out) so it can be loaded and passed to the neighbours. What the counter
// sees (Sampled_Data) is the own PWM during the load cycle (Load/Shift = 0) and, in the
// neighbour cycles (Load/Shift = 1), the bit arriving from the up/left neighbour when
// Sample_CLK = 0 or from the down/right neighbour when Sample_CLK = 1. Up/down links are
// used in the vertical step and left/right links in the horizontal step.
//
// Purely combinational. Pin names and mux input orders follow the cell schematic; the
// schematic's gate-level realisation is not reproduced, only its function.
module sampler
  import pta_pkg::*;
(
  input  logic   p_data_in,      // photodiode PWM
  input  logic   pwm_in,         // own regenerated PWM (result counter PWM_Out)
  input  logic   from_up_p,
  input  logic   from_left_p,
  input  logic   from_down_p,
  input  logic   from_right_p,
  input  phase_e vh,
  input  logic   load_shift,     // 0 = own sample, 1 = neighbour sample
  input  logic   sample_clk,     // 0 = up/left, 1 = down/right
  output logic   shift_data_out,
  output logic   sampled_data
);

  logic nbr_a;  // up (V) or left (H)
  logic nbr_b;  // down (V) or right (H)

  always_comb begin
    shift_data_out = (vh == PH_H) ? pwm_in : p_data_in;
    nbr_a          = (vh == PH_H) ? from_left_p  : from_up_p;
    nbr_b          = (vh == PH_H) ? from_right_p : from_down_p;
    if (!load_shift) sampled_data = shift_data_out;
    else             sampled_data = sample_clk ? nbr_b : nbr_a;
  end

endmodule
