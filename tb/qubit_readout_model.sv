// qubit_readout_model -- behavioural stand-in for the qubit, readout chain
// and ADC, for testbenches only.
//
// On every readout trigger the model decides which state the coming trace
// shows: ground (G), excited (E) or an ambiguous, weak response (AMB).  A flip
// trigger swaps G and E (it fails with probability FLIP_FAIL_PCT percent,
// leaving the state unchanged) and turns AMB into G or E at random.
// new_episode draws a fresh random initial state.  The ADC output is a
// 250 MHz tone sampled at 1 GS/s, eight samples per clock, with amplitude
// -AMP (G), +AMP (E) or 0 (AMB) on the cosine phase, plus uniform noise of
// +-NOISE codes on every sample.
`timescale 1ns/1ps
module qubit_readout_model
  import rl_agent_pkg::*;
#(
  parameter int AMP           = 200,
  parameter int NOISE         = 20,
  parameter int FLIP_FAIL_PCT = 25
)(
  input  logic                    clk,
  input  logic                    new_episode,
  input  logic                    ro_trigger,
  input  logic                    flip_trigger,
  output logic signed [ADC_W-1:0] adc [LANES],
  output int                      shown          // 0 = G, 1 = E, 2 = AMB
);
  int state = 0;

  always @(posedge clk) begin
    if (new_episode) state = $urandom_range(2, 0);
    if (flip_trigger) begin
      if (state == 2) state = $urandom_range(1, 0);
      else if ($urandom_range(99, 0) >= FLIP_FAIL_PCT) state = 1 - state;
    end
    if (ro_trigger) shown <= state;
    for (int n = 0; n < LANES; n++) begin
      int a, c;
      a = (shown == 0) ? -AMP : ((shown == 1) ? AMP : 0);
      c = (n % 4 == 0) ? 1 : ((n % 4 == 2) ? -1 : 0);
      adc[n] <= ADC_W'(a * c + $signed($urandom_range(2 * NOISE, 0)) - NOISE);
    end
    // an ambiguous state resolves itself half of the time after a readout
    if (ro_trigger && state == 2 && $urandom_range(1, 0) == 1)
      state = $urandom_range(1, 0);
  end
endmodule
