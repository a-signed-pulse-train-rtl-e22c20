// tb_array_controller -- checks the control sequence of random frames cycle by cycle.
// An independent tracker follows the frame (RS, then per pass CLRV, vertical step,
// horizontal step, then done) and the position inside each slot, and checks:
// the frame length 2 + sum(1 + N*(2 + 2m_v + 2m_h)); RS once and CLRV once per pass;
// V/H level per step; Load/Shift = 0 only in the first cycle of a slot; Sample_CLK 0 for
// the +d cycle and 1 for the -d cycle; shifts only after the -d cycle for d < m;
// Counter_CLK of each tap in slot t exactly when floor((t+1)n/N) > floor(tn/N), with
// General_Sign equal to the tap's sign; Down_Step_CLK once per horizontal slot; the slot
// output; and a single-cycle done.
module tb_array_controller;
  import pta_pkg::*;

  localparam int N = N_SLOTS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0;
  frame_cfg_t cfg;
  pe_ctrl_t ctrl;
  logic [$clog2(N_SLOTS)-1:0] slot;
  logic busy, done;
  array_controller dut (.clk, .rst_n, .start, .cfg, .ctrl, .slot, .busy, .done);

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic bit fires(int t, int n);
    return ((t + 1) * n) / N > (t * n) / N;
  endfunction

  task automatic run_frame(frame_cfg_t c);
    int total = 2;
    for (int p = 0; p < int'(c.n_passes); p++)
      total += 1 + N * (2 + 2 * int'(c.pass[p].v_half) + 2 * int'(c.pass[p].h_half));
    @(negedge clk); cfg = c; start = 1'b1;
    @(posedge clk); #1; start = 1'b0; cfg = '0;   // configuration must have been latched
    // RS cycle
    expect_eq("rs", ctrl.rs, 1); expect_eq("busy", busy, 1);
    @(posedge clk); #1;
    for (int p = 0; p < int'(c.n_passes); p++) begin
      expect_eq("clr_vert", ctrl.clr_vert, 1);
      @(posedge clk); #1;
      for (int ph = 0; ph < 2; ph++) begin
        int m = (ph == 0) ? int'(c.pass[p].v_half) : int'(c.pass[p].h_half);
        tap_t [N_TAPS-1:0] tp;
        tp = (ph == 0) ? c.pass[p].v_taps : c.pass[p].h_taps;
        for (int t = 0; t < N; t++)
          for (int s = 0; s <= 2 * m; s++) begin
            int d = (s == 0) ? 0 : ((s % 2) ? (s + 1) / 2 : -(s / 2));
            tap_t tt = tp[d + MAX_HALF];
            bit f = fires(t, int'(tt.n));
            expect_eq("vh", ctrl.vh, ph);
            expect_eq("slot", slot, t);
            expect_eq("load_shift", ctrl.load_shift, s != 0);
            expect_eq("sign_load_shift", ctrl.sign_load_shift, s != 0);
            if (s != 0) expect_eq("sample_clk", ctrl.sample_clk, (s % 2) == 0);
            expect_eq("shift_clk", ctrl.shift_clk, (s == 0) || ((s % 2) == 0 && s != 2 * m));
            expect_eq("sign_shift_clk", ctrl.sign_shift_clk, ctrl.shift_clk);
            expect_eq("counter_clk", ctrl.counter_clk, f);
            if (f) expect_eq("general_sign", ctrl.general_sign, tt.neg);
            expect_eq("down_step_clk", ctrl.down_step_clk, (ph == 1) && (s == 2 * m));
            expect_eq("no rs/clr", ctrl.rs | ctrl.clr_vert, 0);
            expect_eq("done low", done, 0);
            @(posedge clk); #1;
          end
      end
    end
    expect_eq("done", done, 1);
    @(posedge clk); #1;
    expect_eq("done single pulse", done, 0);
    expect_eq("idle", busy, 0);
    $display("frame of %0d passes checked, %0d cycles", c.n_passes, total);
  endtask

  function automatic frame_cfg_t rand_cfg(int np);
    frame_cfg_t c = '0;
    c.n_passes = PASS_W'(np);
    for (int p = 0; p < MAX_PASSES; p++) begin
      c.pass[p].v_half = HALF_W'($urandom_range(0, MAX_HALF));
      c.pass[p].h_half = HALF_W'($urandom_range(0, MAX_HALF));
      for (int k = 0; k < N_TAPS; k++) begin
        c.pass[p].v_taps[k].neg = 1'($urandom);
        c.pass[p].v_taps[k].n   = NCOUNT_W'($urandom_range(0, N));
        c.pass[p].h_taps[k].neg = 1'($urandom);
        c.pass[p].h_taps[k].n   = NCOUNT_W'($urandom_range(0, N));
      end
    end
    return c;
  endfunction

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    expect_eq("idle after reset", busy, 0);
    run_frame(rand_cfg(1));
    run_frame(rand_cfg(3));
    run_frame(rand_cfg(2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
