// tb_pta_top -- end-to-end test of the convolution array at its default size (32 x 32).
//
// A synthetic 8-bit image is turned into per-pixel PWMs (high in slot t while t < pixel
// value) aligned to the controller's slot counter. The testbench runs frames for the
// four signed kernels of the evaluation (edge detection 1 and 2, 5x5 Laplacian of
// Gaussian, sharpening), each scaled so that the largest tap is one full-rate sample
// stream, on a normal and a dim copy of the image, plus one frame built to clip the
// counters. Every pixel's Final_Result is compared with a golden model that replays
// the frame slot by slot: coefficient strobes from floor((t+1)n/N) > floor(tn/N),
// neighbour samples with zero padding, signed clipping counters, and PWM regeneration
// from the vertical result. The frame length (edge taking start to edge raising done)
// is checked against 2 + sum(1 + N*(2 + 2m_v + 2m_h)). The PSNR of each result against the ideal
// real-valued convolution with the same scaled kernel is printed for information.
// Mechanisms counted (each must occur): down counting, neighbour shifts beyond
// distance 1, multi-pass accumulation, PWM regeneration steps, counter clipping.
module tb_pta_top;
  import pta_pkg::*;

  localparam int R = 32;
  localparam int C = 32;
  localparam int N = N_SLOTS;
  localparam int LIM = 2**MAG_W - 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  frame_cfg_t cfg;
  logic pwm_in [R][C];
  logic [$clog2(N_SLOTS)-1:0] slot;
  phase_e vh;
  logic busy, done;
  logic [MAG_W:0] result [R][C];

  pta_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int img [R][C];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Photodiode front end stand-in: PWM width equals the pixel value in slots.
  always_comb
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        pwm_in[r][c] = (int'(slot) < img[r][c]);

  // ---------------- mechanism counters (observed on the control bundle) -------------
  int n_down_counts = 0, n_far_shifts = 0, n_passes_seen = 0, n_regen_steps = 0, n_clips = 0;
  int shifts_in_slot = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.ctrl.counter_clk && dut.ctrl.general_sign) n_down_counts++;
    if (dut.ctrl.clr_vert) n_passes_seen++;
    if (dut.ctrl.down_step_clk && dut.u_array.g_row[R/2].g_col[C/2].u_pe.pwm_out) n_regen_steps++;
    if (dut.ctrl.shift_clk && dut.ctrl.load_shift) n_far_shifts++;
  end

  // ---------------- configuration helpers -------------------------------------------
  function automatic tap_t mk(int w);  // signed sample count
    tap_t t;
    t.neg = (w < 0);
    t.n   = NCOUNT_W'((w < 0) ? -w : w);
    return t;
  endfunction

  // Kernel description used by both the configuration and the model:
  // kv[p][d+2], kh[p][e+2] signed sample counts, mv/mh half-widths.
  int kv [MAX_PASSES][N_TAPS];
  int kh [MAX_PASSES][N_TAPS];
  int mv [MAX_PASSES];
  int mh [MAX_PASSES];
  int np;

  function automatic void clear_kernel();
    np = 0;
    for (int p = 0; p < MAX_PASSES; p++) begin
      mv[p] = 0; mh[p] = 0;
      for (int k = 0; k < N_TAPS; k++) begin kv[p][k] = 0; kh[p][k] = 0; end
    end
  endfunction

  function automatic void build_cfg();
    cfg = '0;
    cfg.n_passes = PASS_W'(np);
    for (int p = 0; p < MAX_PASSES; p++) begin
      cfg.pass[p].v_half = HALF_W'(mv[p]);
      cfg.pass[p].h_half = HALF_W'(mh[p]);
      for (int k = 0; k < N_TAPS; k++) begin
        cfg.pass[p].v_taps[k] = mk(kv[p][k]);
        cfg.pass[p].h_taps[k] = mk(kh[p][k]);
      end
    end
  endfunction

  // ---------------- golden model -----------------------------------------------------
  int model [R][C];
  int clip_events;

  function automatic bit fires(int t, int n);
    return ((t + 1) * n) / N > (t * n) / N;
  endfunction

  function automatic int clip_step(int v, bit down);
    if (down) begin if (v == -LIM) begin clip_events++; return v; end return v - 1; end
    else      begin if (v ==  LIM) begin clip_events++; return v; end return v + 1; end
  endfunction

  function automatic void run_model();
    int rt [R][C];
    int fin [R][C];
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) fin[r][c] = 0;
    for (int p = 0; p < np; p++) begin
      // vertical step
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) rt[r][c] = 0;
      for (int t = 0; t < N; t++)
        for (int s = 0; s <= 2 * mv[p]; s++) begin
          int d = (s == 0) ? 0 : ((s % 2) ? (s + 1) / 2 : -(s / 2));
          int w = kv[p][d + MAX_HALF];
          int n = (w < 0) ? -w : w;
          if (!fires(t, n)) continue;
          for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
            int sr = r - d;   // +d = pixel above
            bit b = (sr >= 0 && sr < R) ? (t < img[sr][c]) : 1'b0;
            if (b) rt[r][c] = clip_step(rt[r][c], w < 0);
          end
        end
      // horizontal step: neighbour PWM is high while t < |Rt|, with the sign of Rt
      for (int t = 0; t < N; t++)
        for (int s = 0; s <= 2 * mh[p]; s++) begin
          int e = (s == 0) ? 0 : ((s % 2) ? (s + 1) / 2 : -(s / 2));
          int w = kh[p][e + MAX_HALF];
          int n = (w < 0) ? -w : w;
          if (!fires(t, n)) continue;
          for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
            int sc = c - e;   // +e = pixel to the left
            if (sc >= 0 && sc < C) begin
              int v = rt[r][sc];
              int a = (v < 0) ? -v : v;
              if (t < a) fin[r][c] = clip_step(fin[r][c], (w < 0) ^ (v < 0));
            end
          end
        end
    end
    model = fin;
  endfunction

  // Ideal convolution with the real weights n_v*n_h/N^2 (no quantisation, no clipping).
  function automatic real psnr_vs_ideal();
    real mse = 0.0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      real ideal = 0.0;
      real act;
      for (int p = 0; p < np; p++)
        for (int d = -mv[p]; d <= mv[p]; d++)
          for (int e = -mh[p]; e <= mh[p]; e++) begin
            int sr = r - d, sc = c - e;
            if (sr >= 0 && sr < R && sc >= 0 && sc < C)
              ideal += real'(kv[p][d + MAX_HALF]) * real'(kh[p][e + MAX_HALF]) / real'(N * N)
                       * real'(img[sr][sc]);
          end
      act = result[r][c][MAG_W] ? -real'(result[r][c][MAG_W-1:0]) : real'(result[r][c][MAG_W-1:0]);
      mse += (ideal - act) ** 2;
    end
    mse = mse / real'(R * C);
    if (mse == 0.0) return 999.0;
    return 20.0 * $log10(255.0) - 10.0 * $log10(mse);
  endfunction

  // ---------------- frame runner -----------------------------------------------------
  task automatic run_frame(string name);
    longint c0, len, exp_len;
    int bad = 0;
    build_cfg();
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    c0 = cyc;
    wait (done);
    @(negedge clk);
    len = cyc - c0 + 1;
    exp_len = 2;
    for (int p = 0; p < np; p++) exp_len += 1 + N * (2 + 2 * mv[p] + 2 * mh[p]);
    checks++;
    if (len !== exp_len) begin
      failures++;
      $display("FAIL %s: frame took %0d cycles, expected %0d", name, len, exp_len);
    end
    clip_events = 0;
    run_model();
    n_clips += clip_events;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      int got = result[r][c][MAG_W] ? -int'(result[r][c][MAG_W-1:0]) : int'(result[r][c][MAG_W-1:0]);
      checks++;
      if (got !== model[r][c]) begin
        failures++; bad++;
        if (bad <= 5) $display("FAIL %s: pixel (%0d,%0d) got %0d expected %0d", name, r, c, got, model[r][c]);
      end
    end
    $display("frame %-22s cycles=%0d mismatches=%0d clips=%0d PSNR vs ideal=%.1f dB",
             name, len, bad, clip_events, psnr_vs_ideal());
  endtask

  task automatic kernels(string tag);
    // Edge detection 1 scaled by 1/9: 9*delta - ones(3,3) = two passes.
    clear_kernel(); np = 2;
    kv[0][2] = 256; kh[0][2] = 256;
    mv[1] = 1; mh[1] = 1;
    for (int k = 1; k <= 3; k++) begin kv[1][k] = 85; kh[1][k] = -85; end
    run_frame({"edge1/9 ", tag});
    // Edge detection 2: [1 0 -1]' x [1 0 -1], separable, exact.
    clear_kernel(); np = 1; mv[0] = 1; mh[0] = 1;
    kv[0][3] = 256; kv[0][1] = -256; kh[0][3] = 256; kh[0][1] = -256;
    run_frame({"edge2 ", tag});
    // Laplacian of Gaussian 5x5 scaled by 1/16: three passes.
    clear_kernel(); np = 3;
    mv[0] = 2; mh[0] = 0; kv[0][0] = 128; kv[0][4] = 128; kh[0][2] = 32;
    mv[1] = 1; mh[1] = 1; kv[1][1] = 128; kv[1][3] = 128; kh[1][1] = 32; kh[1][2] = 64; kh[1][3] = 32;
    mv[2] = 0; mh[2] = 2; kv[2][2] = 256;
    kh[2][0] = 16; kh[2][1] = 32; kh[2][2] = -256; kh[2][3] = 32; kh[2][4] = 16;
    run_frame({"LoG/16 ", tag});
    // Sharpening scaled by 1/5: delta x [-1 5 -1] + [-1 0 -1]' x delta.
    clear_kernel(); np = 2;
    mv[0] = 0; mh[0] = 1; kv[0][2] = 256; kh[0][1] = -51; kh[0][2] = 256; kh[0][3] = -51;
    mv[1] = 1; mh[1] = 0; kv[1][1] = -51; kv[1][3] = -51; kh[1][2] = 256;
    run_frame({"sharpen/5 ", tag});
  endtask

  initial begin
    // Synthetic scene: gradient, a bright square and pseudo-random texture.
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      automatic int v = 40 + 4 * c + 2 * r + int'($urandom_range(0, 30));
      if (r > 8 && r < 20 && c > 10 && c < 24) v += 60;
      img[r][c] = (v > 255) ? 255 : v;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    kernels("normal");
    // Saturation: three full-rate positive vertical taps on a bright image.
    clear_kernel(); np = 1; mv[0] = 1; mh[0] = 1;
    kv[0][1] = 256; kv[0][2] = 256; kv[0][3] = 256; kh[0][2] = 256; kh[0][1] = -128;
    run_frame("clip");
    // Dim scene (a quarter of the light).
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) img[r][c] = img[r][c] / 4;
    kernels("dim");

    $display("mechanisms: down-counts=%0d far-shifts=%0d passes=%0d regen-steps=%0d clips=%0d",
             n_down_counts, n_far_shifts, n_passes_seen, n_regen_steps, n_clips);
    checks += 5;
    if (n_down_counts == 0) begin failures++; $display("FAIL: no down counting"); end
    if (n_far_shifts == 0)  begin failures++; $display("FAIL: no shift beyond distance 1"); end
    if (n_passes_seen <= 9) begin failures++; $display("FAIL: multi-pass frames not seen"); end
    if (n_regen_steps == 0) begin failures++; $display("FAIL: no PWM regeneration"); end
    if (n_clips == 0)       begin failures++; $display("FAIL: no counter clipping"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
