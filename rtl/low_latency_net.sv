// low_latency_net -- the policy network that runs while the trace arrives.
//
// The central idea of the agent: instead of waiting for the whole 256 ns
// readout trace and then evaluating a deep network, the trace is cut into
// groups of SPL down-sampled points (4 I + 4 Q = 32 ns) and group k is fed
// into layer k together with the NEUR outputs of layer k-1 (layer 0 takes
// the preprocessing network's outputs instead).  Every layer thus has
// N = NEUR + 2*SPL = 20 inputs and takes 1 + ceil(log4(21)) = 4 clocks,
// exactly the time the next group needs to arrive.  The layers run in a
// wave that follows the data, and only the last layer, started by the last
// point of the trace, adds latency: 4 clocks (32 ns).
//
// With a 32-point trace and SPL = 4 there are N_LL = 8 layers: 7 hidden ReLU
// layers of 12 neurons and an output layer of one neuron per action, as in
// the paper.  The output layer's biases receive Gumbel noise from
// gumbel_sampler and its argmax is the sampled action.
//
// Interface: s carries one I/Q point per clock while valid; s.first marks
// the first point of a trace.  Within a group the points are collected in a
// small window; layer k starts in the clock that delivers point SPL*k+SPL-1.
// Input order of a layer (this design's choice): previous-layer outputs
// 0..NEUR-1, then I points oldest first, then Q points oldest first.
// act_valid pulses 4 clocks after the last point with action and logits.
// seq_err flags a layer started before its predecessor's result was ready
// (cannot happen with at most one point per clock; kept as a check).
module low_latency_net
  import rl_agent_pkg::*;
#(
  parameter int          NEUR  = 12,
  parameter int          SPL   = 4,
  parameter int          N_LL  = 8,
  parameter int          N_ACT = 3,
  parameter int          BASE  = 0,
  parameter logic [31:0] SEED  = 32'h1234_5678
)(
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t wr,
  input  logic      noise_en,
  input  data_t     pre_y [NEUR],
  input  sample_t   s,
  output logic      act_valid,
  output action_e   action,
  output data_t     logits [N_ACT],
  output logic      seq_err
);

  localparam int NIN   = NEUR + 2 * SPL;
  localparam int NPTS  = N_LL * SPL;
  localparam int N_W   = $clog2(NPTS);
  localparam int HBANK = NIN * NEUR + NEUR;
  localparam int IDX_W = $clog2(NEUR > 1 ? NEUR : 2);
  localparam int ACT_W = $clog2(N_ACT > 1 ? N_ACT : 2);

  // ------------------------------------------------ point counter / window
  logic [N_W-1:0] n, n_now;
  data_t wi [SPL], wq [SPL];     // index SPL-1 unused (taken from s directly)
  data_t grp [2*SPL];            // the group as seen in its last clock
  logic [N_LL-1:0] start;

  always_comb begin
    n_now = s.first ? '0 : n;
    for (int p = 0; p < SPL - 1; p++) begin
      grp[p]       = wi[p];
      grp[SPL + p] = wq[p];
    end
    grp[SPL - 1]   = s.i;
    grp[2*SPL - 1] = s.q;
    for (int k = 0; k < N_LL; k++)
      start[k] = s.valid && (n_now == N_W'(k * SPL + SPL - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n  <= '0;
      wi <= '{default: '0};
      wq <= '{default: '0};
    end else if (s.valid) begin
      n <= n_now + 1'b1;
      wi[int'(n_now) % SPL] <= s.i;
      wq[int'(n_now) % SPL] <= s.q;
    end
  end

  // ------------------------------------------------ noise for sampling
  data_t noise [N_ACT];
  gumbel_sampler #(.N_OUT(N_ACT), .SEED(SEED)) u_gumbel (
    .clk, .rst_n, .en(noise_en), .noise);

  // ------------------------------------------------ the layer wave
  data_t yh [N_LL][NEUR];        // hidden outputs (index N_LL-1 unused)
  logic [N_LL-1:0] vh;           // out_valid of each layer
  logic [N_LL-1:0] rdy;          // layer result available for this trace
  logic [ACT_W-1:0] amax;

  for (genvar k = 0; k < N_LL; k++) begin : g_layer
    data_t x [NIN];
    always_comb begin
      for (int e = 0; e < NEUR; e++)
        x[e] = (k == 0) ? pre_y[e] : yh[(k == 0) ? 0 : k - 1][e];
      for (int e = 0; e < 2 * SPL; e++)
        x[NEUR + e] = grp[e];
    end

    if (k < N_LL - 1) begin : g_hidden
      weight_t w [NEUR][NIN];
      data_t   b [NEUR];
      logic [IDX_W-1:0] am_unused;
      param_bank #(.N(NIN), .M(NEUR), .BASE(BASE + k * HBANK)) u_bank (
        .clk, .rst_n, .wr, .w, .b);
      dense_layer #(.N(NIN), .M(NEUR), .RELU(1'b1)) u_dense (
        .clk, .rst_n, .in_valid(start[k]), .x, .w, .b,
        .out_valid(vh[k]), .y(yh[k]), .y_argmax(am_unused));
    end else begin : g_out
      weight_t w [N_ACT][NIN];
      data_t   b [N_ACT];
      data_t   bn [N_ACT];
      param_bank #(.N(NIN), .M(N_ACT), .BASE(BASE + k * HBANK)) u_bank (
        .clk, .rst_n, .wr, .w, .b);
      // Gumbel noise enters through the bias (saturating add)
      always_comb begin
        for (int j = 0; j < N_ACT; j++) begin
          logic signed [DATA_W:0] t;
          t = {b[j][DATA_W-1], b[j]} + {noise[j][DATA_W-1], noise[j]};
          if (t > 17'sd32767)       bn[j] = 16'sd32767;
          else if (t < -17'sd32768) bn[j] = -16'sd32768;
          else                      bn[j] = data_t'(t);
        end
      end
      dense_layer #(.N(NIN), .M(N_ACT), .RELU(1'b0)) u_dense (
        .clk, .rst_n, .in_valid(start[k]), .x, .w, .b(bn),
        .out_valid(vh[k]), .y(logits), .y_argmax(amax));
      assign yh[k] = '{default: '0};
    end
  end

  assign act_valid = vh[N_LL-1];
  assign action    = action_e'(amax);

  // ------------------------------------------------ wave-order check
  logic err_now;
  always_comb begin
    err_now = 1'b0;
    for (int k = 1; k < N_LL; k++)
      if (start[k] && !(rdy[k-1] || vh[k-1])) err_now = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdy     <= '0;
      seq_err <= 1'b0;
    end else begin
      if (s.valid && s.first) rdy <= '0;
      else                    rdy <= rdy | vh;
      seq_err <= seq_err | err_now;
    end
  end

endmodule
