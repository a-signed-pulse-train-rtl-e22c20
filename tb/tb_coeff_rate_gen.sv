// tb_coeff_rate_gen -- for many sample counts n, checks over a full period of 256 slots
// that the strobe fires in slot t exactly when floor((t+1)n/256) > floor(tn/256), hence
// exactly n times, and that `clear` restarts the period.
module tb_coeff_rate_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 1'b0, advance = 1'b0, fire;
  logic [8:0] n = '0;
  coeff_rate_gen #(.N_SLOTS(256)) dut (.clk, .rst_n, .clear, .advance, .n, .fire);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) begin
      int nn, cnt;
      nn = (i < 6) ? (i == 5 ? 256 : i * 51) : $urandom_range(0, 256);
      n = 9'(nn);
      clear = 1; advance = 0;
      @(negedge clk); clear = 0;
      // Advance part-way, then clear: the period must restart.
      if (i % 4 == 3) begin
        advance = 1; repeat (17) @(negedge clk); advance = 0;
        clear = 1; @(negedge clk); clear = 0;
      end
      cnt = 0;
      for (int t = 0; t < 256; t++) begin
        bit exp;
        exp = ((t + 1) * nn) / 256 > (t * nn) / 256;
        // Idle cycles inside a slot must not move the generator.
        advance = 0; @(negedge clk);
        checks++;
        if (fire !== exp) begin
          failures++;
          if (failures < 8) $display("FAIL n=%0d slot %0d: fire %b expected %b", nn, t, fire, exp);
        end
        cnt += fire;
        advance = 1; @(negedge clk);
      end
      advance = 0;
      checks++;
      if (cnt !== nn) begin failures++; $display("FAIL n=%0d fired %0d times", nn, cnt); end
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
