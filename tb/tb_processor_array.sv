// tb_processor_array -- a 5 x 6 array driven by a testbench sequencer.
// The testbench plays the global controller itself (per slot: load/centre cycle, then a
// +d and a -d cycle per distance with a shift after the -d cycle, coefficient strobes
// from floor((t+1)n/N) > floor(tn/N), down step at the end of a horizontal slot) and
// compares every pixel with a golden model of a two-pass frame: random signed taps with
// half-widths up to 2 in both directions, zero padding at the borders, clipping
// counters and PWM regeneration from the vertical result.
module tb_processor_array;
  import pta_pkg::*;

  localparam int R = 5;
  localparam int C = 6;
  localparam int N = N_SLOTS;
  localparam int LIM = 2**MAG_W - 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pe_ctrl_t ctrl;
  logic pwm [R][C];
  logic [MAG_W:0] res [R][C];
  processor_array #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .ctrl, .p_data_in(pwm), .final_result(res));

  int img [R][C];
  int kv [2][N_TAPS], kh [2][N_TAPS], mv [2], mh [2];
  int model [R][C];
  int cur_slot = 0;

  always_comb
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        pwm[r][c] = (cur_slot < img[r][c]);

  function automatic bit fires(int t, int n);
    return ((t + 1) * n) / N > (t * n) / N;
  endfunction
  function automatic int clip_step(int v, bit down);
    if (down) return (v == -LIM) ? v : v - 1;
    else      return (v ==  LIM) ? v : v + 1;
  endfunction
  function automatic int offs(int s);
    return (s == 0) ? 0 : ((s % 2) ? (s + 1) / 2 : -(s / 2));
  endfunction

  function automatic void run_model(int np);
    int rt [R][C];
    int fin [R][C];
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) fin[r][c] = 0;
    for (int p = 0; p < np; p++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) rt[r][c] = 0;
      for (int t = 0; t < N; t++)
        for (int s = 0; s <= 2 * mv[p]; s++) begin
          int d = offs(s), w = kv[p][offs(s) + MAX_HALF];
          if (!fires(t, (w < 0) ? -w : w)) continue;
          for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
            if (r - d >= 0 && r - d < R && t < img[r - d][c]) rt[r][c] = clip_step(rt[r][c], w < 0);
        end
      for (int t = 0; t < N; t++)
        for (int s = 0; s <= 2 * mh[p]; s++) begin
          int e = offs(s), w = kh[p][offs(s) + MAX_HALF];
          if (!fires(t, (w < 0) ? -w : w)) continue;
          for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
            if (c - e >= 0 && c - e < C) begin
              int v = rt[r][c - e];
              if (t < ((v < 0) ? -v : v)) fin[r][c] = clip_step(fin[r][c], (w < 0) ^ (v < 0));
            end
        end
    end
    model = fin;
  endfunction

  task automatic tick();
    @(posedge clk); #1;
  endtask

  task automatic run_frame(int np);
    ctrl = CTRL_IDLE; ctrl.rs = 1'b1; tick();
    for (int p = 0; p < np; p++) begin
      ctrl = CTRL_IDLE; ctrl.clr_vert = 1'b1; tick();
      for (int ph = 0; ph < 2; ph++) begin
        int m = (ph == 0) ? mv[p] : mh[p];
        for (int t = 0; t < N; t++) begin
          cur_slot = t;
          for (int s = 0; s <= 2 * m; s++) begin
            int w = (ph == 0) ? kv[p][offs(s) + MAX_HALF] : kh[p][offs(s) + MAX_HALF];
            ctrl = CTRL_IDLE;
            ctrl.vh = phase_e'(ph);
            ctrl.load_shift = (s != 0);
            ctrl.sign_load_shift = (s != 0);
            ctrl.sample_clk = (s != 0) && (s % 2 == 0);
            ctrl.shift_clk = (s == 0) || ((s % 2 == 0) && s != 2 * m);
            ctrl.sign_shift_clk = ctrl.shift_clk;
            ctrl.counter_clk = fires(t, (w < 0) ? -w : w);
            ctrl.general_sign = (w < 0);
            ctrl.down_step_clk = (ph == 1) && (s == 2 * m);
            tick();
          end
        end
      end
    end
    ctrl = CTRL_IDLE;
    tick();
    run_model(np);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      int got = res[r][c][MAG_W] ? -int'(res[r][c][MAG_W-1:0]) : int'(res[r][c][MAG_W-1:0]);
      checks++;
      if (got !== model[r][c]) begin
        failures++;
        if (failures < 10) $display("FAIL pixel (%0d,%0d): got %0d expected %0d", r, c, got, model[r][c]);
      end
    end
  endtask

  initial begin
    ctrl = CTRL_IDLE;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 6; trial++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) img[r][c] = $urandom_range(0, 255);
      for (int p = 0; p < 2; p++) begin
        mv[p] = (trial < 2) ? MAX_HALF : $urandom_range(0, MAX_HALF);
        mh[p] = (trial < 2) ? MAX_HALF : $urandom_range(0, MAX_HALF);
        for (int k = 0; k < N_TAPS; k++) begin
          kv[p][k] = int'($urandom_range(0, 128)) - 64;
          kh[p][k] = int'($urandom_range(0, 160)) - 80;
        end
      end
      if (trial == 0) begin  // pure shift test: each pass picks one far pixel
        for (int k = 0; k < N_TAPS; k++) begin kv[0][k] = 0; kh[0][k] = 0; kv[1][k] = 0; kh[1][k] = 0; end
        kv[0][0] = 256; kh[0][4] = 256;     // pixel two rows below, two columns right
        kv[1][4] = -256; kh[1][0] = 256;    // minus pixel two rows above, two columns left
      end
      run_frame(2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
