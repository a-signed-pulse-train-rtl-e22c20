// tb_pixel_processor -- one cell driven through a 3-tap vertical and a 3-tap horizontal
// step with emulated neighbours.
// The testbench plays the controller (load, +1 and -1 cycles per slot, coefficient
// strobes from floor((t+1)n/N) > floor(tn/N), down step at the end of a horizontal slot)
// and the neighbours (the up/down neighbours' samples of their own PWMs in the vertical
// step, the left/right neighbours' signed regenerated PWMs and signs in the horizontal
// step). Expected: Rt = sum_d s_d*floor(P_d*n_d/N) and
// Rs = sum_e s_e*sign(Rt_e)*floor(|Rt_e|*n_e/N). The cell's own outgoing data and sign
// bits are checked in every cycle after the load.
module tb_pixel_processor;
  import pta_pkg::*;

  localparam int N = N_SLOTS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pe_ctrl_t ctrl;
  logic p_data_in, fu, fd, fl, fr, tu, td, tl, tr, lps, rps, stl, str;
  logic [MAG_W:0] final_result;
  pixel_processor dut (.clk, .rst_n, .ctrl, .p_data_in, .from_up_p(fu), .from_down_p(fd),
                       .from_left_p(fl), .from_right_p(fr), .to_up_p(tu), .to_down_p(td),
                       .to_left_p(tl), .to_right_p(tr), .left_p_sign(lps), .right_p_sign(rps),
                       .sign_to_left_pixel(stl), .sign_to_right_pixel(str), .final_result);

  function automatic bit fires(int t, int n);
    return ((t + 1) * n) / N > (t * n) / N;
  endfunction
  function automatic int iabs(int x); return (x < 0) ? -x : x; endfunction
  function automatic int sgn(int x);  return (x < 0) ? -1 : 1; endfunction

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  initial begin
    ctrl = CTRL_IDLE;
    {p_data_in, fu, fd, fl, fr, lps, rps} = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 20; trial++) begin
      automatic int P = $urandom_range(0, 255), U = $urandom_range(0, 255), D = $urandom_range(0, 255);
      int nv [3], sv [3], nh [3], sh [3];
      automatic int L = int'($urandom_range(0, 400)) - 200, Rr = int'($urandom_range(0, 400)) - 200;
      int rt, rs, got;
      for (int k = 0; k < 3; k++) begin
        nv[k] = $urandom_range(0, 85); sv[k] = $urandom_range(0, 1) ? -1 : 1;
        nh[k] = $urandom_range(0, 85); sh[k] = $urandom_range(0, 1) ? -1 : 1;
      end
      if (trial == 0) begin nv = '{256, 0, 0}; sv = '{1, 1, 1}; nh = '{256, 0, 0}; sh = '{1, 1, 1}; end
      // index 0 = centre, 1 = +1 (up/left), 2 = -1 (down/right)
      rt = sv[0] * (P * nv[0] / N) + sv[1] * (U * nv[1] / N) + sv[2] * (D * nv[2] / N);
      rs = sh[0] * sgn(rt) * (iabs(rt) * nh[0] / N) + sh[1] * sgn(L) * (iabs(L) * nh[1] / N)
         + sh[2] * sgn(Rr) * (iabs(Rr) * nh[2] / N);
      @(negedge clk);
      ctrl = CTRL_IDLE; ctrl.rs = 1'b1; tick();
      ctrl = CTRL_IDLE; ctrl.clr_vert = 1'b1; tick();
      for (int ph = 0; ph < 2; ph++)
        for (int t = 0; t < N; t++)
          for (int s = 0; s < 3; s++) begin
            automatic int n  = (ph == 0) ? nv[s] : nh[s];
            automatic int sg = (ph == 0) ? sv[s] : sh[s];
            ctrl = CTRL_IDLE;
            ctrl.vh = phase_e'(ph);
            ctrl.load_shift = (s != 0);
            ctrl.sign_load_shift = (s != 0);
            ctrl.sample_clk = (s == 2);
            ctrl.shift_clk = (s == 0);
            ctrl.sign_shift_clk = (s == 0);
            ctrl.counter_clk = fires(t, n);
            ctrl.general_sign = (sg < 0);
            ctrl.down_step_clk = (ph == 1) && (s == 2);
            p_data_in = (t < P);
            fu = (ph == 0) && (t < U);
            fd = (ph == 0) && (t < D);
            fl = (ph == 1) && (t < iabs(L));
            fr = (ph == 1) && (t < iabs(Rr));
            lps = (ph == 1) && (L < 0) && (t < iabs(L));
            rps = (ph == 1) && (Rr < 0) && (t < iabs(Rr));
            #1;
            if (s != 0) begin
              if (ph == 0) begin
                expect_eq("to_down_p", td, t < P);  expect_eq("to_up_p", tu, t < P);
                expect_eq("to_right_p idle", tr, 0); expect_eq("sign_to_right idle", str, 0);
              end else begin
                expect_eq("to_right_p", tr, t < iabs(rt)); expect_eq("to_left_p", tl, t < iabs(rt));
                expect_eq("to_down_p idle", td, 0);
                expect_eq("sign_to_right", str, (rt < 0) && (t < iabs(rt)));
                expect_eq("sign_to_left",  stl, (rt < 0) && (t < iabs(rt)));
              end
            end
            tick();
            if (ph == 0 && t == N - 1 && s == 2) begin
              ctrl = CTRL_IDLE;
            end
          end
      ctrl = CTRL_IDLE;
      #1;
      got = final_result[MAG_W] ? -int'(final_result[MAG_W-1:0]) : int'(final_result[MAG_W-1:0]);
      if (got !== rs) $display("trial %0d P=%0d U=%0d D=%0d Rt=%0d got %0d exp %0d vcnt=%0d", trial, P, U, D, rt, got, rs, dut.u_result_counter.vcnt);
      expect_eq($sformatf("final result trial %0d (Rt=%0d)", trial, rt), got, rs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
