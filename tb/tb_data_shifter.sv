// tb_data_shifter -- random stimulus against a two-register reference.
// Also a directed check: a chain of five shifters, loaded once and shifted k times,
// delivers the sample of the cell k places away (the basis of large kernels).
module tb_data_shifter;
  import pta_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rs, shift_clk, load_shift, shift_data_in, fu, fl, fd, fr;
  phase_e vh;
  logic td, tr, tu, tl;
  data_shifter dut (.clk, .rst_n, .rs, .shift_clk, .load_shift, .vh, .shift_data_in,
                    .from_up_p(fu), .from_left_p(fl), .from_down_p(fd), .from_right_p(fr),
                    .to_down_p(td), .to_right_p(tr), .to_up_p(tu), .to_left_p(tl));

  // Chain of 5 cells in a column: index 0 on top.
  localparam int L = 5;
  logic c_in [L];
  logic c_up [L], c_dn [L], c_lf [L], c_rt [L];
  logic c_rs, c_en, c_ls;
  phase_e c_vh;
  for (genvar i = 0; i < L; i++) begin : g_chain
    data_shifter u (.clk, .rst_n, .rs(c_rs), .shift_clk(c_en), .load_shift(c_ls), .vh(c_vh),
                    .shift_data_in(c_in[i]),
                    .from_up_p   ((i > 0)     ? c_dn[(i > 0) ? i - 1 : 0] : 1'b0),
                    .from_left_p ((i > 0)     ? c_rt[(i > 0) ? i - 1 : 0] : 1'b0),
                    .from_down_p ((i < L - 1) ? c_up[(i < L - 1) ? i + 1 : 0] : 1'b0),
                    .from_right_p((i < L - 1) ? c_lf[(i < L - 1) ? i + 1 : 0] : 1'b0),
                    .to_down_p(c_dn[i]), .to_right_p(c_rt[i]), .to_up_p(c_up[i]), .to_left_p(c_lf[i]));
  end

  logic ra = 1'b0, rb = 1'b0;   // reference stages

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 8) $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    {rs, shift_clk, load_shift, shift_data_in, fu, fl, fd, fr} = '0;
    vh = PH_V;
    c_rs = 0; c_en = 0; c_ls = 0; c_vh = PH_V;
    for (int i = 0; i < L; i++) c_in[i] = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      {rs, shift_clk, load_shift, shift_data_in, fu, fl, fd, fr} = 8'($urandom);
      if ($urandom_range(0, 7) != 0) rs = 1'b0;
      vh = phase_e'($urandom_range(0, 1));
      @(posedge clk);
      if (rs) begin ra = 0; rb = 0; end
      else if (shift_clk) begin
        if (!load_shift) begin ra = shift_data_in; rb = shift_data_in; end
        else if (vh == PH_V) begin ra = fu; rb = fd; end
        else begin ra = fl; rb = fr; end
      end
      #1;
      check("to_down_p",  td, ra && vh == PH_V);
      check("to_right_p", tr, ra && vh == PH_H);
      check("to_up_p",    tu, rb && vh == PH_V);
      check("to_left_p",  tl, rb && vh == PH_H);
    end
    // Directed: distance-k delivery in both directions and both orientations.
    for (int o = 0; o < 2; o++) begin
      logic [L-1:0] pat;
      pat = 5'b10110;
      @(negedge clk);
      c_vh = phase_e'(o);
      for (int i = 0; i < L; i++) c_in[i] = pat[i];
      c_en = 1; c_ls = 0;                    // load
      for (int k = 1; k < L; k++) begin
        @(negedge clk); c_ls = 1;             // shift k times
        @(posedge clk); #1;
        for (int i = 0; i < L; i++) begin
          logic a_exp, b_exp;
          a_exp = (i - k >= 0) ? pat[i - k] : 1'b0;   // travelled down/right
          b_exp = (i + k < L)  ? pat[i + k] : 1'b0;   // travelled up/left
          check("chain down/right", (o == 0) ? c_dn[i] : c_rt[i], a_exp);
          check("chain up/left",    (o == 0) ? c_up[i] : c_lf[i], b_exp);
        end
      end
      c_en = 0;
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
