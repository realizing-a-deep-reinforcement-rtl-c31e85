// rl_agent_pkg -- types, constants and helper functions shared by the
// real-time reinforcement-learning agent.
//
// The agent is a feed-forward policy network that decides, once per
// measurement cycle of a superconducting qubit, between the actions
// "terminate", "flip" and "idle" (optionally "gf-flip").  Everything runs on
// one 125 MHz clock (8 ns period); the ADC delivers eight 1 ns samples per
// clock.
//
// Numbers given by the paper: 8 ns clock, 12 neurons per layer, 3 actions
// (4 with gf-flip), 4 I and 4 Q down-sampled points per low-latency layer,
// a 256 ns (32 x 8 ns) readout trace, l = 2 previous cycles of memory, a
// 32-point boxcar for the memory, a 2-layer preprocessing network and the
// layer latency 1 + ceil(log4(N+1)) clocks.
//
// Choices of this design (the paper gives no number formats): activations
// and biases are 16-bit two's complement with 8 fractional bits, weights are
// 16-bit with 10 fractional bits, ADC codes are 12 bit.  The host parameter
// bus is a simple word-write bus with a 16-bit address.
package rl_agent_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int DATA_W   = 16;   // activation / bias / sample width
  localparam int ACT_FRAC = 8;    // fractional bits of activations
  localparam int W_W      = 16;   // weight width
  localparam int W_FRAC   = 10;   // fractional bits of weights
  localparam int ADC_W    = 12;   // ADC code width
  localparam int LANES    = 8;    // 1 ns samples per 8 ns clock

  localparam int PARAM_ADDR_W = 16;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [W_W-1:0]    weight_t;

  // Action encoding: order of the actions as printed top to bottom in the
  // network schematic (terminate, flip, idle); gf-flip is the optional 4th.
  typedef enum logic [1:0] {
    ACT_TERMINATE = 2'd0,
    ACT_FLIP      = 2'd1,
    ACT_IDLE      = 2'd2,
    ACT_GF_FLIP   = 2'd3
  } action_e;

  // One word written by the host into the network parameter memory.
  typedef struct packed {
    logic                    en;
    logic [PARAM_ADDR_W-1:0] addr;
    logic [DATA_W-1:0]       data;
  } param_wr_t;

  // One down-sampled (8 ns) point of the demodulated readout trace.
  typedef struct packed {
    logic  valid;
    logic  first;     // first point of a measurement trace
    data_t i;
    data_t q;
  } sample_t;

  // Status word stored by the recorder after every measurement.
  typedef struct packed {
    logic [15:0] episode;     // episode number within the batch
    logic [10:0] cycle;       // measurement cycle within the episode
    logic        forced;      // termination forced by the cycle limit
    logic        verify;      // this was the verification measurement
    logic        first;       // first cycle of the episode
    action_e     action;      // action applied after this measurement
  } rec_status_t;

  // ---------------------------------------------------------------- helpers
  // ceil(log4(n)) for n >= 1
  function automatic int clog4(input int n);
    int r, p;
    r = 0;
    p = 1;
    while (p < n) begin
      p = p * 4;
      r = r + 1;
    end
    return r;
  endfunction

  // Clock cycles of one dense layer with n inputs: one multiply cycle plus
  // ceil(log4(n+1)) cycles of two adder levels each (the +1 is the bias).
  function automatic int dense_latency(input int n);
    return 1 + clog4(n + 1);
  endfunction

  // Words of parameter memory used by a layer with n inputs, m outputs.
  function automatic int bank_words(input int n, input int m);
    return n * m + m;
  endfunction

  // Parameter-memory base address of layer idx.  Layer 0 and 1 are the
  // preprocessing layers (pre_in -> neur, neur -> neur), layers 2.. are the
  // low-latency layers (neur + 2*spl inputs), the last of which has n_act
  // outputs.
  function automatic int layer_base(input int idx, input int pre_in,
                                    input int neur, input int spl,
                                    input int n_act, input int n_ll);
    int base;
    base = 0;
    for (int k = 0; k < idx; k++) begin
      if (k == 0)           base += bank_words(pre_in, neur);
      else if (k == 1)      base += bank_words(neur, neur);
      else if (k == n_ll+1) base += bank_words(neur + 2*spl, n_act);
      else                  base += bank_words(neur + 2*spl, neur);
    end
    return base;
  endfunction

endpackage
