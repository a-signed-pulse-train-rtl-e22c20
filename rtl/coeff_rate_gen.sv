// coeff_rate_gen -- coefficient clock of one kernel tap.
//
// A tap's weight is the rate at which the pixel PWM is sampled: n samples per PWM period
// of N_SLOTS slots give weight n/N_SLOTS. This generator spreads the n strobes as evenly
// as possible over the period with a Bresenham accumulator: in slot t it fires when
// floor((t+1)*n/N_SLOTS) > floor(t*n/N_SLOTS). It fires exactly n times per period, and a
// PWM that is high for the first D slots is sampled high exactly floor(D*n/N_SLOTS) times.
// That is the frequency-as-coefficient idea of the paper; the accumulator realisation
// is this design's choice.
//
// Interface: `clear` restarts the period at slot 0; `advance` marks the end of a slot.
// `fire` is combinational and valid for the whole current slot. n must not exceed
// N_SLOTS.
module coeff_rate_gen #(
  parameter int unsigned N_SLOTS = 256,
  localparam int unsigned NW     = $clog2(N_SLOTS) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          advance,
  input  logic [NW-1:0] n,
  output logic          fire
);

  logic [NW-1:0] acc;     // always below N_SLOTS
  logic [NW:0]   sum;

  assign sum  = {1'b0, acc} + {1'b0, n};
  assign fire = (sum >= (NW+1)'(N_SLOTS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (clear)   acc <= '0;
    else if (advance) acc <= fire ? NW'(sum - (NW+1)'(N_SLOTS)) : NW'(sum);
  end

  a_n_range: assert property (@(posedge clk) disable iff (!rst_n) n <= NW'(N_SLOTS))
    else $error("coeff_rate_gen: n above N_SLOTS");

endmodule
