// tb_sign_shifter -- random stimulus against a two-register reference model.
module tb_sign_shifter;
  import pta_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rs, en, ls, sb, lps, rps, to_r, to_l;
  phase_e vh;
  sign_shifter dut (.clk, .rst_n, .rs, .sign_shift_clk(en), .sign_load_shift(ls), .vh,
                    .sign_bit(sb), .left_p_sign(lps), .right_p_sign(rps),
                    .sign_to_right_pixel(to_r), .sign_to_left_pixel(to_l));
  logic rr = 1'b0, rl = 1'b0;

  initial begin
    {rs, en, ls, sb, lps, rps} = '0;
    vh = PH_V;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      {rs, en, ls, sb, lps, rps} = 6'($urandom);
      if ($urandom_range(0, 7) != 0) rs = 1'b0;
      vh = phase_e'($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (rs) begin rr = 0; rl = 0; end
      else if (en) begin
        rr = ls ? lps : sb;
        rl = ls ? rps : sb;
      end
      #1;
      checks += 2;
      if (to_r !== (rr && vh == PH_H)) begin failures++; if (failures < 6) $display("FAIL to_right at %0d", n); end
      if (to_l !== (rl && vh == PH_H)) begin failures++; if (failures < 6) $display("FAIL to_left at %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
