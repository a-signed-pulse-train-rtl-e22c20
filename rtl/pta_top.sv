// pta_top -- signed pulse-train convolution processor array with its controller.
//
// Every pixel receives a PWM from its photodiode front end (analog, outside this RTL:
// `pwm_in`), whose high time within a PWM period of N_SLOTS sample slots grows with the
// light level. The controller runs the frame described in array_controller; the front
// end must present, during the vertical step, a PWM aligned to `slot` (high in slot t
// when the pixel's width exceeds t). At the `done` pulse every pixel's Final_Result is
// valid on `result` as {sign, 8-bit magnitude} and stays there until the next `start`.
//
// Result at pixel (r,c), with row 0 on top and column 0 on the left, for one pass with
// vertical taps (sv_d, nv_d) and horizontal taps (sh_e, nh_e), d,e = -m..m:
//   Rt(r,c) = sum_d sv_d * floor(D(r-d,c) * nv_d / N_SLOTS)      (clipped to +/-255)
//   Rs(r,c) = sum_e sh_e * sign(Rt(r,c-e)) * floor(|Rt(r,c-e)| * nh_e / N_SLOTS)
// where D is the PWM width in slots; passes add up in Rs. Counting is interleaved slot
// by slot, so clipping happens in that order.
module pta_top
  import pta_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  frame_cfg_t                  cfg,
  input  logic                        pwm_in [ROWS][COLS],
  output logic [$clog2(N_SLOTS)-1:0]  slot,
  output phase_e                      vh,
  output logic                        busy,
  output logic                        done,
  output logic [MAG_W:0]              result [ROWS][COLS]
);

  pe_ctrl_t ctrl;

  array_controller u_ctrl (
    .clk  (clk),
    .rst_n(rst_n),
    .start(start),
    .cfg  (cfg),
    .ctrl (ctrl),
    .slot (slot),
    .busy (busy),
    .done (done)
  );

  processor_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk         (clk),
    .rst_n       (rst_n),
    .ctrl        (ctrl),
    .p_data_in   (pwm_in),
    .final_result(result)
  );

  assign vh = ctrl.vh;

endmodule
