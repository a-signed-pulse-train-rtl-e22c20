// sign_shifter -- carries the sign of each pixel's regenerated PWM to its left and right
// neighbours during the horizontal step.
//
// It mirrors the data shifter for the horizontal direction only. On a Sign_Shift_CLK
// enable with Sign Load/Shift = 0 both stages load the pixel's own Sign bit; with
// Sign Load/Shift = 1 the right-going stage takes Left_P_Sign and the left-going stage
// takes Right_P_Sign. Outputs are driven only when V/H selects the horizontal step, as
// the vertical step has no signed data to pass.
//
// Timing: rising clock edge with enable; RS clears synchronously, rst_n asynchronously.
// Pin names and input pairing follow the cell schematic; the enable form and reset
// scheme are this design's choices.
module sign_shifter
  import pta_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rs,
  input  logic   sign_shift_clk,
  input  logic   sign_load_shift,
  input  phase_e vh,
  input  logic   sign_bit,
  input  logic   left_p_sign,
  input  logic   right_p_sign,
  output logic   sign_to_right_pixel,
  output logic   sign_to_left_pixel
);

  logic stage_r, stage_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_r <= 1'b0;
      stage_l <= 1'b0;
    end else if (rs) begin
      stage_r <= 1'b0;
      stage_l <= 1'b0;
    end else if (sign_shift_clk) begin
      stage_r <= sign_load_shift ? left_p_sign  : sign_bit;
      stage_l <= sign_load_shift ? right_p_sign : sign_bit;
    end
  end

  assign sign_to_right_pixel = stage_r & (vh == PH_H);
  assign sign_to_left_pixel  = stage_l & (vh == PH_H);

endmodule
