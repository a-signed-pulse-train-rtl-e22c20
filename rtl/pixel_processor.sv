// pixel_processor -- one cell of the convolution array.
//
// The cell holds the five units of the cell schematic: sampler, data shifter, sign
// generator, sign shifter and result counter. It talks only to its four nearest
// neighbours: one data bit in and out per direction (From_*_P / To_*_P) and, for the
// horizontal step, one sign bit in and out to the left and right. All sequencing comes
// from the global control bundle, identical for every cell, so the whole array computes
// in lock step and every pixel's result is ready at the same time.
//
// Per sample slot the cell counts its own PWM sample for the centre tap, then the
// samples of the pixels 1, 2, ... places away as they arrive through the neighbours'
// shift stages, each with the direction chosen by the sign generator. After a vertical
// and a horizontal step Final_Result holds the kernel convolution at this pixel.
module pixel_processor
  import pta_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  pe_ctrl_t       ctrl,
  input  logic           p_data_in,      // photodiode PWM
  input  logic           from_up_p,
  input  logic           from_down_p,
  input  logic           from_left_p,
  input  logic           from_right_p,
  output logic           to_up_p,
  output logic           to_down_p,
  output logic           to_left_p,
  output logic           to_right_p,
  input  logic           left_p_sign,    // from the left neighbour's Sign_To_Right_Pixel
  input  logic           right_p_sign,   // from the right neighbour's Sign_To_Left_Pixel
  output logic           sign_to_left_pixel,
  output logic           sign_to_right_pixel,
  output logic [MAG_W:0] final_result
);

  logic shift_data, sampled_data, sign, pwm_out, sign_bit;

  sampler u_sampler (
    .p_data_in     (p_data_in),
    .pwm_in        (pwm_out),
    .from_up_p     (from_up_p),
    .from_left_p   (from_left_p),
    .from_down_p   (from_down_p),
    .from_right_p  (from_right_p),
    .vh            (ctrl.vh),
    .load_shift    (ctrl.load_shift),
    .sample_clk    (ctrl.sample_clk),
    .shift_data_out(shift_data),
    .sampled_data  (sampled_data)
  );

  data_shifter u_data_shifter (
    .clk          (clk),
    .rst_n        (rst_n),
    .rs           (ctrl.rs),
    .shift_clk    (ctrl.shift_clk),
    .load_shift   (ctrl.load_shift),
    .vh           (ctrl.vh),
    .shift_data_in(shift_data),
    .from_up_p    (from_up_p),
    .from_left_p  (from_left_p),
    .from_down_p  (from_down_p),
    .from_right_p (from_right_p),
    .to_down_p    (to_down_p),
    .to_right_p   (to_right_p),
    .to_up_p      (to_up_p),
    .to_left_p    (to_left_p)
  );

  sign_generator u_sign_generator (
    .left_p_sign (left_p_sign),
    .right_p_sign(right_p_sign),
    .own_sign    (sign_bit),
    .load_shift  (ctrl.load_shift),
    .sample_clk  (ctrl.sample_clk),
    .vh          (ctrl.vh),
    .general_sign(ctrl.general_sign),
    .sign        (sign)
  );

  sign_shifter u_sign_shifter (
    .clk                (clk),
    .rst_n              (rst_n),
    .rs                 (ctrl.rs),
    .sign_shift_clk     (ctrl.sign_shift_clk),
    .sign_load_shift    (ctrl.sign_load_shift),
    .vh                 (ctrl.vh),
    .sign_bit           (sign_bit),
    .left_p_sign        (left_p_sign),
    .right_p_sign       (right_p_sign),
    .sign_to_right_pixel(sign_to_right_pixel),
    .sign_to_left_pixel (sign_to_left_pixel)
  );

  result_counter #(.MAG_W(MAG_W)) u_result_counter (
    .clk          (clk),
    .rst_n        (rst_n),
    .rs           (ctrl.rs),
    .clr_vert     (ctrl.clr_vert),
    .sampled_data (sampled_data),
    .counter_clk  (ctrl.counter_clk),
    .sign         (sign),
    .down_step_clk(ctrl.down_step_clk),
    .vh           (ctrl.vh),
    .final_result (final_result),
    .pwm_out      (pwm_out),
    .sign_bit     (sign_bit)
  );

endmodule
