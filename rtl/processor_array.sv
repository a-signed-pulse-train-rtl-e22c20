// processor_array -- ROWS x COLS mesh of pixel processors.
//
// Each cell is wired only to its four nearest neighbours: a data bit each way on every
// side and a sign bit each way to the left and right. Row 0 is the top row and column 0
// the leftmost column. A cell's To_Down_P feeds the From_Up_P of the cell below, its
// To_Right_P the From_Left_P of the cell to the right, and so on. Links that would
// leave the array are tied to 0, i.e. the image is zero-padded (a choice of this design;
// the array edge is not specified). The control bundle is broadcast to every cell.
module processor_array
  import pta_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  pe_ctrl_t       ctrl,
  input  logic           p_data_in    [ROWS][COLS],
  output logic [MAG_W:0] final_result [ROWS][COLS]
);

  logic to_up   [ROWS][COLS];
  logic to_down [ROWS][COLS];
  logic to_left [ROWS][COLS];
  logic to_right[ROWS][COLS];
  logic sg_left [ROWS][COLS];
  logic sg_right[ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic f_up, f_down, f_left, f_right, s_left, s_right;

      // Neighbour indices are clamped so that edge cells read a legal element that the
      // border condition then replaces with 0.
      localparam int RU = (r > 0)        ? r - 1 : 0;
      localparam int RD = (r < ROWS - 1) ? r + 1 : ROWS - 1;
      localparam int CL = (c > 0)        ? c - 1 : 0;
      localparam int CR = (c < COLS - 1) ? c + 1 : COLS - 1;

      assign f_up    = (r > 0)        ? to_down[RU][c]  : 1'b0;
      assign f_down  = (r < ROWS - 1) ? to_up[RD][c]    : 1'b0;
      assign f_left  = (c > 0)        ? to_right[r][CL] : 1'b0;
      assign f_right = (c < COLS - 1) ? to_left[r][CR]  : 1'b0;
      assign s_left  = (c > 0)        ? sg_right[r][CL] : 1'b0;
      assign s_right = (c < COLS - 1) ? sg_left[r][CR]  : 1'b0;

      pixel_processor u_pe (
        .clk                (clk),
        .rst_n              (rst_n),
        .ctrl               (ctrl),
        .p_data_in          (p_data_in[r][c]),
        .from_up_p          (f_up),
        .from_down_p        (f_down),
        .from_left_p        (f_left),
        .from_right_p       (f_right),
        .to_up_p            (to_up[r][c]),
        .to_down_p          (to_down[r][c]),
        .to_left_p          (to_left[r][c]),
        .to_right_p         (to_right[r][c]),
        .left_p_sign        (s_left),
        .right_p_sign       (s_right),
        .sign_to_left_pixel (sg_left[r][c]),
        .sign_to_right_pixel(sg_right[r][c]),
        .final_result       (final_result[r][c])
      );
    end
  end

endmodule
