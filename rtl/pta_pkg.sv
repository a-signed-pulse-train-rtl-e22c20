// pta_pkg -- shared constants and types of the signed pulse-train convolution array.
//
// Every pixel processor in the array receives the same per-cycle control bundle
// (pe_ctrl_t) from one global controller. The bundle carries the signals the cell
// schematic calls V/H, Load/Shift, Sample_CLK, Shift_CLK, Counter_CLK, General_Sign,
// Down_Step_CLK, Sign Load/Shift, Sign_Shift_CLK and RS. In this RTL the whole array runs
// on one clock and each "CLK" of the schematic is a one-cycle enable (or, for
// Sample_CLK, a select level); that single-clock reading is a choice of this design.
//
// A kernel tap is a sign and a sample count n (0..N_SLOTS): during one 1D step the tap
// samples the PWM n times per PWM period, so its weight is n/N_SLOTS. A frame runs one or
// more passes, each a vertical 1D step followed by a horizontal 1D step; the final
// counter sums the passes, which lets non-separable kernels be written as a sum of
// separable ones (this multi-pass sequencing is this design's addition).
package pta_pkg;

  // PWM period in sample slots ("256 points per PWM cycle").
  localparam int unsigned N_SLOTS   = 256;
  localparam int unsigned SLOT_W    = $clog2(N_SLOTS);   // slot index width
  localparam int unsigned NCOUNT_W  = SLOT_W + 1;        // 0..N_SLOTS inclusive
  // Result registers: 8-bit magnitude plus sign.
  localparam int unsigned MAG_W     = 8;
  // Largest kernel half-width held by the coefficient table (5x5 kernel).
  localparam int unsigned MAX_HALF  = 2;
  localparam int unsigned N_TAPS    = 2 * MAX_HALF + 1;
  // Largest number of separable passes per frame.
  localparam int unsigned MAX_PASSES = 3;
  localparam int unsigned HALF_W    = $clog2(MAX_HALF + 1);
  localparam int unsigned PASS_W    = $clog2(MAX_PASSES + 1);

  // V/H level: 0 = vertical step, 1 = horizontal step.
  typedef enum logic {PH_V = 1'b0, PH_H = 1'b1} phase_e;

  // Control bundle broadcast to every pixel processor, one value per clock.
  typedef struct packed {
    logic   rs;               // RS: clear all cell state (frame start)
    logic   clr_vert;         // clear the vertical-step counter (pass start)
    phase_e vh;               // V/H
    logic   load_shift;       // Load/Shift: 0 = load own sample, 1 = use/shift neighbours
    logic   sample_clk;       // Sample_CLK as select: 0 = up/left, 1 = down/right
    logic   shift_clk;        // Shift_CLK enable for the data shifter
    logic   counter_clk;      // Counter_CLK: coefficient strobe of the current tap
    logic   general_sign;     // General_Sign: 1 = current tap is negative
    logic   down_step_clk;    // Down_Step_CLK: one step of PWM regeneration
    logic   sign_load_shift;  // Sign Load/Shift
    logic   sign_shift_clk;   // Sign_Shift_CLK
  } pe_ctrl_t;

  // One coefficient tap: sign and sample count per PWM period.
  typedef struct packed {
    logic                neg;
    logic [NCOUNT_W-1:0] n;
  } tap_t;

  // One separable pass. taps[k] is kernel offset k-MAX_HALF; a positive offset means
  // "up" for the vertical step and "left" for the horizontal step.
  typedef struct packed {
    logic [HALF_W-1:0]       v_half;   // vertical half-width m (0..MAX_HALF)
    logic [HALF_W-1:0]       h_half;   // horizontal half-width n (0..MAX_HALF)
    tap_t [N_TAPS-1:0]       v_taps;
    tap_t [N_TAPS-1:0]       h_taps;
  } pass_cfg_t;

  typedef struct packed {
    logic [PASS_W-1:0]            n_passes;  // 1..MAX_PASSES
    pass_cfg_t [MAX_PASSES-1:0]   pass;
  } frame_cfg_t;

  localparam pe_ctrl_t CTRL_IDLE = '{rs: 1'b0, clr_vert: 1'b0, vh: PH_V, load_shift: 1'b0,
                                     sample_clk: 1'b0, shift_clk: 1'b0, counter_clk: 1'b0,
                                     general_sign: 1'b0, down_step_clk: 1'b0,
                                     sign_load_shift: 1'b0, sign_shift_clk: 1'b0};

endpackage
