// tb_sign_generator -- exhaustive test of the counting-direction logic (128 cases).
// Vertical step: the direction is the coefficient sign alone. Horizontal step: the
// coefficient sign flipped when the counted data is negative; the data sign is the own
// sign in the load cycle, else the left (Sample_CLK = 0) or right (1) neighbour's.
module tb_sign_generator;
  import pta_pkg::*;

  logic left_p_sign, right_p_sign, own_sign, load_shift, sample_clk, general_sign, sign;
  phase_e vh;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  sign_generator dut (.*);

  initial begin
    for (int i = 0; i < 128; i++) begin
      logic [6:0] v;
      logic exp_sign, ds;
      v = 7'(i);
      {left_p_sign, right_p_sign, own_sign, load_shift, sample_clk, general_sign} = v[5:0];
      vh = phase_e'(v[6]);
      #1;
      if (vh == PH_V) exp_sign = general_sign;
      else begin
        ds = load_shift == 1'b0 ? own_sign : (sample_clk == 1'b0 ? left_p_sign : right_p_sign);
        exp_sign = (general_sign != ds);
      end
      checks++;
      if (sign !== exp_sign) begin
        failures++;
        if (failures < 6) $display("FAIL input %b: sign %b expected %b", v, sign, exp_sign);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
