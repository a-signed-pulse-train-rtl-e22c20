// array_controller -- global sequencer and coefficient clock source of the array.
//
// All pixels run the same program, so one controller drives one control bundle
// (pe_ctrl_t) to the whole array. A frame is:
//
//   RS      one cycle, clears every pixel (shifters and both counters)
//   for each pass p = 0 .. n_passes-1:
//     CLRV  one cycle, clears the vertical counters
//     V     N_SLOTS sample slots of the vertical 1D step   (V/H = 0)
//     H     N_SLOTS sample slots of the horizontal 1D step (V/H = 1)
//   DONE    one cycle, `done` pulses; results stay in the pixels until the next start
//
// A slot of a step with half-width m has 1 + 2m cycles:
//   step 0       Load/Shift = 0: shift stages load the own sample, the centre tap counts
//                the own PWM
//   step 2d-1    Load/Shift = 1, Sample_CLK = 0: tap +d counts the bit from up/left
//   step 2d      Load/Shift = 1, Sample_CLK = 1: tap -d counts the bit from down/right;
//                if d < m the shift stages advance one place at the end of this cycle
// After d-1 shifts the neighbour's stage holds the sample of the pixel d places away,
// so every tap of the kernel is counted once per slot with its own sample strobe.
// Down_Step_CLK is raised in the last cycle of each horizontal slot.
// The coefficient strobe of each tap (Counter_CLK in its cycle) comes from one
// coeff_rate_gen per tap, restarted at the start of every step; General_Sign is the
// tap's sign.
//
// N_SLOTS, MAX_HALF and MAX_PASSES come from pta_pkg, as they size the configuration
// types. The configuration is latched at `start` and must describe n_passes in 1..MAX_PASSES
// and half-widths up to MAX_HALF. The paper gives the controller's function (global
// coefficient clocks whose frequencies change per iteration, a global sign, load and
// shift phases) but not its structure; the slot schedule, multi-pass sequencing and
// CLRV cycle are this design's. Frame length, from the clock edge that takes `start`
// to the edge that raises `done`:  2 + sum over passes of (1 + N_SLOTS*(2 + 2*m_v + 2*m_h))
module array_controller
  import pta_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  frame_cfg_t                   cfg,
  output pe_ctrl_t                     ctrl,
  output logic [$clog2(N_SLOTS)-1:0]   slot,
  output logic                         busy,
  output logic                         done
);

  localparam int unsigned SW   = $clog2(N_SLOTS);
  localparam int unsigned STW  = $clog2(N_TAPS);
  localparam int unsigned NW   = SW + 1;

  typedef enum logic [2:0] {S_IDLE, S_RS, S_CLRV, S_RUN, S_DONE} state_e;

  state_e            state_q;
  frame_cfg_t        cfg_q;
  logic [PASS_W-1:0] pass_q;
  phase_e            phase_q;
  logic [SW-1:0]     slot_q;
  logic [STW-1:0]    step_q;

  pass_cfg_t         pcfg;
  tap_t [N_TAPS-1:0] taps;
  logic [HALF_W-1:0] half;
  logic              last_step, last_slot, last_pass;
  logic [STW-1:0]    tap_idx;
  logic [HALF_W-1:0] tap_dist;
  logic [N_TAPS-1:0] fire;
  logic              rg_clear, rg_advance;

  always_comb begin
    pcfg      = cfg_q.pass[pass_q];
    taps      = (phase_q == PH_H) ? pcfg.h_taps : pcfg.v_taps;
    half      = (phase_q == PH_H) ? pcfg.h_half : pcfg.v_half;
    last_step = (step_q == STW'({half, 1'b0}));
    last_slot = (slot_q == SW'(N_SLOTS - 1));
    last_pass = ({1'b0, pass_q} == {1'b0, cfg_q.n_passes} - 1'b1);
    // Distance of the tap handled in this step and its table index.
    tap_dist      = HALF_W'((step_q + 1'b1) >> 1);
    if (step_q == '0)     tap_idx = STW'(MAX_HALF);
    else if (step_q[0])   tap_idx = STW'(MAX_HALF) + STW'(tap_dist);   // +d: up / left
    else                  tap_idx = STW'(MAX_HALF) - STW'(tap_dist);   // -d: down / right
  end

  // One coefficient clock per tap, restarted at the start of every 1D step.
  assign rg_advance = (state_q == S_RUN) && last_step;
  assign rg_clear   = (state_q == S_CLRV) || (rg_advance && last_slot);

  for (genvar k = 0; k < N_TAPS; k++) begin : g_tap
    coeff_rate_gen #(.N_SLOTS(N_SLOTS)) u_rate (
      .clk    (clk),
      .rst_n  (rst_n),
      .clear  (rg_clear),
      .advance(rg_advance),
      .n      (NW'(taps[k].n)),
      .fire   (fire[k])
    );
  end

  // Control bundle decode.
  always_comb begin
    ctrl = CTRL_IDLE;
    ctrl.vh = phase_q;
    unique case (state_q)
      S_RS:   ctrl.rs       = 1'b1;
      S_CLRV: ctrl.clr_vert = 1'b1;
      S_RUN: begin
        ctrl.load_shift      = (step_q != '0);
        ctrl.sign_load_shift = (step_q != '0);
        ctrl.sample_clk      = (step_q != '0) && !step_q[0];
        // Load in step 0; shift after the down/right count of distance d < m.
        ctrl.shift_clk       = (step_q == '0) || (!step_q[0] && !last_step);
        ctrl.sign_shift_clk  = ctrl.shift_clk;
        ctrl.counter_clk     = fire[tap_idx];
        ctrl.general_sign    = taps[tap_idx].neg;
        ctrl.down_step_clk   = (phase_q == PH_H) && last_step;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cfg_q   <= '0;
      pass_q  <= '0;
      phase_q <= PH_V;
      slot_q  <= '0;
      step_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          cfg_q   <= cfg;
          state_q <= S_RS;
        end
        S_RS: begin
          pass_q  <= '0;
          phase_q <= PH_V;
          slot_q  <= '0;
          step_q  <= '0;
          state_q <= S_CLRV;
        end
        S_CLRV: state_q <= S_RUN;
        S_RUN: begin
          if (!last_step) begin
            step_q <= step_q + 1'b1;
          end else begin
            step_q <= '0;
            slot_q <= slot_q + 1'b1;
            if (last_slot) begin
              slot_q <= '0;
              if (phase_q == PH_V) begin
                phase_q <= PH_H;
              end else begin
                phase_q <= PH_V;
                if (last_pass) begin
                  state_q <= S_DONE;
                end else begin
                  pass_q  <= pass_q + 1'b1;
                  state_q <= S_CLRV;
                end
              end
            end
          end
        end
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign slot = slot_q;
  assign busy = (state_q != S_IDLE);
  assign done = (state_q == S_DONE);

  // Configuration rules.
  a_passes: assert property (@(posedge clk) disable iff (!rst_n)
      (state_q == S_IDLE && start) |-> (cfg.n_passes >= 1 && cfg.n_passes <= PASS_W'(MAX_PASSES)))
    else $error("array_controller: n_passes out of range");
  a_half: assert property (@(posedge clk) disable iff (!rst_n)
      (state_q == S_RUN) |-> (half <= HALF_W'(MAX_HALF)))
    else $error("array_controller: half-width above MAX_HALF");

endmodule
