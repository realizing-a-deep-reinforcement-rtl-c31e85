// preprocess_net -- the two-layer preprocessing network.
//
// The information from previous cycles (filtered traces and actions, see
// history_buffer) is known as soon as the previous action has been chosen.
// It is therefore condensed by two dense ReLU layers of NEUR neurons while
// the agent waits for the next readout, and costs no feedback latency.  Its
// NEUR outputs are the "previous layer" input of the first low-latency
// layer.  Two layers of 12 neurons follow the paper.
//
// Interface: start samples x; done pulses when y is valid, after
// dense_latency(PRE_IN) + dense_latency(NEUR) clocks (4 + 3 = 7 clocks for
// the default 38 inputs).  y then holds until the next run.  The weights of
// layer 0 and layer 1 live in two param_banks at BASE0 and BASE1 of the
// shared parameter bus.
module preprocess_net
  import rl_agent_pkg::*;
#(
  parameter int PRE_IN = 38,
  parameter int NEUR   = 12,
  parameter int BASE0  = 0,
  parameter int BASE1  = BASE0 + PRE_IN * NEUR + NEUR
)(
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t wr,
  input  logic      start,
  input  data_t     x [PRE_IN],
  output logic      done,
  output data_t     y [NEUR]
);

  localparam int IDX_W = $clog2(NEUR > 1 ? NEUR : 2);

  weight_t w0 [NEUR][PRE_IN];
  data_t   b0 [NEUR];
  weight_t w1 [NEUR][NEUR];
  data_t   b1 [NEUR];
  data_t   h  [NEUR];
  logic    h_valid;
  logic [IDX_W-1:0] am0, am1;

  param_bank #(.N(PRE_IN), .M(NEUR), .BASE(BASE0)) u_bank0 (
    .clk, .rst_n, .wr, .w(w0), .b(b0));
  param_bank #(.N(NEUR), .M(NEUR), .BASE(BASE1)) u_bank1 (
    .clk, .rst_n, .wr, .w(w1), .b(b1));

  dense_layer #(.N(PRE_IN), .M(NEUR), .RELU(1'b1)) u_l0 (
    .clk, .rst_n, .in_valid(start), .x, .w(w0), .b(b0),
    .out_valid(h_valid), .y(h), .y_argmax(am0));

  dense_layer #(.N(NEUR), .M(NEUR), .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .in_valid(h_valid), .x(h), .w(w1), .b(b1),
    .out_valid(done), .y, .y_argmax(am1));

endmodule
