// data_shifter -- the two one-bit shift stages that move PWM samples between neighbours.
//
// Stage A travels downward in the vertical step and rightward in the horizontal step;
// stage B travels upward or leftward. On a Shift_CLK enable with Load/Shift = 0 both
// stages load the pixel's own sample (Shift_Data_In); with Load/Shift = 1 stage A takes
// the bit from the up (V) or left (H) neighbour and stage B the bit from the down (V) or
// right (H) neighbour. After k shifts stage A therefore holds the sample of the pixel k
// places up/left, and the neighbour below reads it one place further away.
// Only the outputs of the active direction are driven; the others are held at 0.
//
// Timing: the stages update on the rising clock edge when shift_clk is high. RS (rs)
// clears them synchronously and rst_n asynchronously. Pin names and the pairing of
// inputs to outputs follow the cell schematic; the single-clock enable form and the
// reset scheme are this design's choices.
module data_shifter
  import pta_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rs,
  input  logic   shift_clk,
  input  logic   load_shift,
  input  phase_e vh,
  input  logic   shift_data_in,
  input  logic   from_up_p,
  input  logic   from_left_p,
  input  logic   from_down_p,
  input  logic   from_right_p,
  output logic   to_down_p,
  output logic   to_right_p,
  output logic   to_up_p,
  output logic   to_left_p
);

  logic stage_a, stage_b;
  logic next_a, next_b;

  always_comb begin
    next_a = load_shift ? ((vh == PH_H) ? from_left_p  : from_up_p)   : shift_data_in;
    next_b = load_shift ? ((vh == PH_H) ? from_right_p : from_down_p) : shift_data_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_a <= 1'b0;
      stage_b <= 1'b0;
    end else if (rs) begin
      stage_a <= 1'b0;
      stage_b <= 1'b0;
    end else if (shift_clk) begin
      stage_a <= next_a;
      stage_b <= next_b;
    end
  end

  assign to_down_p  = stage_a & (vh == PH_V);
  assign to_right_p = stage_a & (vh == PH_H);
  assign to_up_p    = stage_b & (vh == PH_V);
  assign to_left_p  = stage_b & (vh == PH_H);

endmodule
