// tb_result_counter -- checks both counters against an integer reference.
// Random phases of biased up/down counting drive the counters into their +/-255 clip
// and back; every cycle Final_Result, PWM_Out and Sign bit are compared with the
// reference. A directed part then loads a vertical result k and checks that the
// regenerated PWM stays high for exactly |k| down steps with the sign of k.
module tb_result_counter;
  import pta_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rs, clr_vert, sd, cc, sign, ds, pwm_out, sign_bit;
  phase_e vh;
  logic [8:0] final_result;
  result_counter dut (.clk, .rst_n, .rs, .clr_vert, .sampled_data(sd), .counter_clk(cc),
                      .sign, .down_step_clk(ds), .vh, .final_result, .pwm_out, .sign_bit);

  int v = 0, f = 0;
  int clips = 0;

  function automatic int clipped(int x);
    if (x > 255)  begin clips++; return 255;  end
    if (x < -255) begin clips++; return -255; end
    return x;
  endfunction

  task automatic compare(string tag);
    int fm;
    fm = (f < 0) ? -f : f;
    checks += 3;
    if (final_result !== {f < 0, 8'(fm)}) begin
      failures++; if (failures < 8) $display("FAIL %s final_result %h expected %0d", tag, final_result, f);
    end
    if (pwm_out !== (v != 0)) begin
      failures++; if (failures < 8) $display("FAIL %s pwm_out %b (v=%0d)", tag, pwm_out, v);
    end
    if (sign_bit !== (v < 0)) begin
      failures++; if (failures < 8) $display("FAIL %s sign_bit %b (v=%0d)", tag, sign_bit, v);
    end
  endtask

  task automatic cycle();
    @(posedge clk);
    if (rs) begin v = 0; f = 0; end
    else begin
      if (clr_vert) v = 0;
      else if (vh == PH_V) begin if (sd && cc) v = clipped(sign ? v - 1 : v + 1); end
      else if (ds && v != 0) v = (v > 0) ? v - 1 : v + 1;
      if (vh == PH_H && sd && cc) f = clipped(sign ? f - 1 : f + 1);
    end
    #1;
    compare("random");
  endtask

  initial begin
    {rs, clr_vert, sd, cc, sign, ds} = '0;
    vh = PH_V;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int blk = 0; blk < 40; blk++) begin
      automatic int bias = (blk % 2) ? $urandom_range(0, 10) : $urandom_range(90, 100);
      for (int n = 0; n < 1000; n++) begin
        @(negedge clk);
        rs       = ($urandom_range(0, 9999) == 0);
        clr_vert = ($urandom_range(0, 4999) == 0);
        sd       = ($urandom_range(0, 3) != 0);
        cc       = ($urandom_range(0, 3) != 0);
        sign     = ($urandom_range(0, 99) < bias);
        ds       = $urandom_range(0, 1);
        vh       = phase_e'(blk % 3 == 2);
        cycle();
      end
    end
    // Directed PWM regeneration.
    for (int i = 0; i < 12; i++) begin
      int k, high, sgn_ok;
      k = (i % 2) ? -int'($urandom_range(0, 255)) : int'($urandom_range(0, 255));
      if (i == 0) k = 255;
      if (i == 1) k = -255;
      @(negedge clk); {rs, clr_vert, sd, cc, sign, ds} = '0; vh = PH_V; clr_vert = 1;
      cycle();
      @(negedge clk); clr_vert = 0; sd = (k != 0); cc = 1; sign = (k < 0);
      repeat ((k < 0) ? -k : k) cycle();
      @(negedge clk); sd = 0; cc = 0; vh = PH_H; ds = 1;
      high = 0; sgn_ok = 1;
      for (int t = 0; t < 256; t++) begin
        #1;
        if (pwm_out) begin high++; if (sign_bit !== (k < 0)) sgn_ok = 0; end
        cycle();
        @(negedge clk);
      end
      checks += 2;
      if (high !== ((k < 0) ? -k : k)) begin failures++; $display("FAIL PWM width %0d for k=%0d", high, k); end
      if (!sgn_ok) begin failures++; $display("FAIL PWM sign for k=%0d", k); end
    end
    checks++;
    if (clips == 0) begin failures++; $display("FAIL: clipping never exercised"); end
    $display("clip events: %0d", clips);
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
