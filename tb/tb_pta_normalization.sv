// tb_pta_normalization -- sampling-rate normalisation on the full 32 x 32 design.
//
// Raising every horizontal sample count by a factor k (k = 1, 2, 3, the "X1..X3"
// sampling clocks) multiplies the whole kernel by k. The floor error of each product
// stays below one count, so dividing the result by k shrinks the error relative to
// the kernel at k = 1. This testbench runs the four evaluated kernels (edge detection
// 1 and 2, 5x5 LoG, sharpening) at k = 1, 2, 3 on a normal and a dim synthetic scene
// (24 frames). It checks every pixel against a slot-by-slot golden model and prints
// the PSNR of result/k against the ideal k = 1 convolution. It counts a failure when,
// for a kernel and scene, the PSNR at k = 3 is not above that at k = 1 (unless both are
// exact). Base sample counts are at most 85 so that 3x still fits in 256.
module tb_pta_normalization;
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

  always_comb
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        pwm_in[r][c] = (int'(slot) < img[r][c]);

  int kv [MAX_PASSES][N_TAPS];
  int kh [MAX_PASSES][N_TAPS];
  int mv [MAX_PASSES];
  int mh [MAX_PASSES];
  int np;
  int model [R][C];

  function automatic tap_t mk(int w);
    tap_t t;
    t.neg = (w < 0);
    t.n   = NCOUNT_W'((w < 0) ? -w : w);
    return t;
  endfunction

  function automatic void clear_kernel();
    np = 0;
    for (int p = 0; p < MAX_PASSES; p++) begin
      mv[p] = 0; mh[p] = 0;
      for (int k = 0; k < N_TAPS; k++) begin kv[p][k] = 0; kh[p][k] = 0; end
    end
  endfunction

  function automatic void set_kernel(int which);
    clear_kernel();
    case (which)
      0: begin  // edge detection 1: [256]x[85] + [85 85 85]x[-28 -28 -28]
        np = 2; kv[0][2] = 256; kh[0][2] = 85;
        mv[1] = 1; mh[1] = 1;
        for (int k = 1; k <= 3; k++) begin kv[1][k] = 85; kh[1][k] = -28; end
      end
      1: begin  // edge detection 2: [256 0 -256]x[85 0 -85]
        np = 1; mv[0] = 1; mh[0] = 1;
        kv[0][3] = 256; kv[0][1] = -256; kh[0][3] = 85; kh[0][1] = -85;
      end
      2: begin  // LoG / 64
        np = 3;
        mv[0] = 2; kv[0][0] = 128; kv[0][4] = 128; kh[0][2] = 8;
        mv[1] = 1; mh[1] = 1; kv[1][1] = 128; kv[1][3] = 128; kh[1][1] = 8; kh[1][2] = 16; kh[1][3] = 8;
        mh[2] = 2; kv[2][2] = 256;
        kh[2][0] = 4; kh[2][1] = 8; kh[2][2] = -64; kh[2][3] = 8; kh[2][4] = 4;
      end
      default: begin  // sharpening: [256]x[-17 85 -17] + [-51 0 -51]x[85]
        np = 2; mh[0] = 1; kv[0][2] = 256; kh[0][1] = -17; kh[0][2] = 85; kh[0][3] = -17;
        mv[1] = 1; kv[1][1] = -51; kv[1][3] = -51; kh[1][2] = 85;
      end
    endcase
  endfunction

  function automatic void build_cfg(int scale);
    cfg = '0;
    cfg.n_passes = PASS_W'(np);
    for (int p = 0; p < MAX_PASSES; p++) begin
      cfg.pass[p].v_half = HALF_W'(mv[p]);
      cfg.pass[p].h_half = HALF_W'(mh[p]);
      for (int k = 0; k < N_TAPS; k++) begin
        cfg.pass[p].v_taps[k] = mk(kv[p][k]);
        cfg.pass[p].h_taps[k] = mk(kh[p][k] * scale);
      end
    end
  endfunction

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

  function automatic void run_model(int scale);
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
          int e = offs(s), w = kh[p][offs(s) + MAX_HALF] * scale;
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

  // PSNR of result/scale against the ideal convolution with the scale-1 weights.
  function automatic real psnr(int scale);
    real mse = 0.0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      real ideal = 0.0, act;
      for (int p = 0; p < np; p++)
        for (int d = -mv[p]; d <= mv[p]; d++)
          for (int e = -mh[p]; e <= mh[p]; e++)
            if (r - d >= 0 && r - d < R && c - e >= 0 && c - e < C)
              ideal += real'(kv[p][d + MAX_HALF]) * real'(kh[p][e + MAX_HALF]) / real'(N * N)
                       * real'(img[r - d][c - e]);
      act = result[r][c][MAG_W] ? -real'(result[r][c][MAG_W-1:0]) : real'(result[r][c][MAG_W-1:0]);
      mse += (ideal - act / real'(scale)) ** 2;
    end
    mse = mse / real'(R * C);
    if (mse == 0.0) return 999.0;
    return 20.0 * $log10(255.0) - 10.0 * $log10(mse);
  endfunction

  task automatic run_frame(int scale, output real p);
    int bad = 0;
    build_cfg(scale);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    wait (done);
    @(negedge clk);
    run_model(scale);
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      int got = result[r][c][MAG_W] ? -int'(result[r][c][MAG_W-1:0]) : int'(result[r][c][MAG_W-1:0]);
      checks++;
      if (got !== model[r][c]) begin
        failures++; bad++;
        if (bad <= 3) $display("FAIL pixel (%0d,%0d) got %0d expected %0d", r, c, got, model[r][c]);
      end
    end
    p = psnr(scale);
  endtask

  initial begin
    string kname [4] = '{"edge detection 1", "edge detection 2", "LoG 5x5", "sharpening"};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int scene = 0; scene < 2; scene++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        automatic int v = 50 + 3 * c + 2 * r + int'($urandom_range(0, 40));
        if ((r - 16) * (r - 16) + (c - 14) * (c - 14) < 50) v += 70;
        if (v > 255) v = 255;
        img[r][c] = (scene == 0) ? v : v / 4;
      end
      for (int k = 0; k < 4; k++) begin
        real p [3];
        set_kernel(k);
        for (int x = 1; x <= 3; x++) run_frame(x, p[x-1]);
        $display("%-6s %-17s PSNR X1 %5.1f  X2 %5.1f  X3 %5.1f dB  (999 = exact)",
                 scene ? "dim" : "normal", kname[k], p[0], p[1], p[2]);
        checks++;
        if (!(p[2] > p[0] || (p[0] == 999.0 && p[2] == 999.0))) begin
          failures++;
          $display("FAIL: PSNR did not improve with the sampling rate");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
