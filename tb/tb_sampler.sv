// tb_sampler -- exhaustive test of the sampler over all 512 input combinations.
// Expected values come from a lookup written per phase and step below, not from the
// RTL's expressions: vertical load -> photodiode PWM, horizontal load -> regenerated PWM,
// neighbour cycles -> up/down (V) or left/right (H) by Sample_CLK.
module tb_sampler;
  import pta_pkg::*;

  logic p_data_in, pwm_in, from_up_p, from_left_p, from_down_p, from_right_p;
  phase_e vh;
  logic load_shift, sample_clk, shift_data_out, sampled_data;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  sampler dut (.*);

  initial begin
    for (int i = 0; i < 512; i++) begin
      logic [8:0] v;
      logic exp_sd, exp_out;
      v = 9'(i);
      {p_data_in, pwm_in, from_up_p, from_left_p, from_down_p, from_right_p} = v[5:0];
      vh = phase_e'(v[6]);
      load_shift = v[7];
      sample_clk = v[8];
      #1;
      case ({v[6], v[7], v[8]})  // {H?, neighbour?, down/right?}
        3'b000, 3'b001: begin exp_out = p_data_in; exp_sd = p_data_in;   end
        3'b010:         begin exp_out = p_data_in; exp_sd = from_up_p;   end
        3'b011:         begin exp_out = p_data_in; exp_sd = from_down_p; end
        3'b100, 3'b101: begin exp_out = pwm_in;    exp_sd = pwm_in;      end
        3'b110:         begin exp_out = pwm_in;    exp_sd = from_left_p; end
        default:        begin exp_out = pwm_in;    exp_sd = from_right_p; end
      endcase
      checks += 2;
      if (sampled_data !== exp_sd) begin
        failures++;
        if (failures < 6) $display("FAIL sampled_data for input %b: got %b", v, sampled_data);
      end
      if (shift_data_out !== exp_out) begin
        failures++;
        if (failures < 6) $display("FAIL shift_data_out for input %b: got %b", v, shift_data_out);
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
