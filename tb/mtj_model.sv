// mtj_model: BEHAVIOURAL MODEL of a stochastic STT-MTJ with an ideal sense
// circuit, for testbenches only.
// mtj_reset (high) puts the junction in the AP state (bit 0). A write pulse
// of width w ns then switches it to P (bit 1) with probability
//   p(w) = 1 / (1 + exp(-B * (w - C(T)))),   C(T) = C25 + KT * (T - 25 C).
// B = 0.16 /ns and C25 = 75 ns are read off the published simulated
// probability-versus-control-word curve (midpoint near word 75, 10%..90% over
// roughly 62..90). KT = 1.7 ns/C is this model's own choice, sized so that a
// fixed pulse tuned to 50% at 25 C gives about 80% at 20 C and 20% at 30 C,
// the swing of the published non-stabilised temperature-drift run.
// mtj_bit shows the current state (1 = P, low resistance).
module mtj_model #(
  parameter real B   = 0.16,
  parameter real C25 = 75.0,
  parameter real KT  = 1.7
) (
  input  logic pulse,
  input  logic mtj_reset,
  input  real  temp_c,
  output logic mtj_bit
);
  timeunit 1ns;
  timeprecision 1ps;

  realtime t_rise = 0.0;
  real     last_width = 0.0;
  real     last_prob  = 0.0;
  logic    state = 1'b0;

  assign mtj_bit = state;

  function automatic real prob(real w, real t);
    return 1.0 / (1.0 + $exp(-B * (w - (C25 + KT * (t - 25.0)))));
  endfunction

  always @(posedge mtj_reset) state = 1'b0;
  always @(posedge pulse) t_rise = $realtime;
  always @(negedge pulse) begin
    last_width = $realtime - t_rise;
    last_prob  = prob(last_width, temp_c);
    if (!state && (real'($urandom) / 4294967296.0) < last_prob) state = 1'b1;
  end
endmodule
