// rl_agent_top -- real-time reinforcement-learning agent for qubit reset.
//
// The agent repeatedly measures a qubit and, within the same measurement
// cycle, decides with a neural-network policy whether to idle, flip the
// qubit (or, with N_ACT = 4, swap g and f) or terminate.  Data path:
//
//   ADC (8 x 1 ns samples / clock, 250 MHz IF)
//     -> ddc                 I/Q mixing, 1 clock
//     -> boxcar_downsampler  8-point boxcar, one I/Q point per 8 ns, 2 clocks
//     -> low_latency_net     8 dense layers fed group by group as the trace
//                            arrives; the last layer (4 clocks) plus Gumbel-max
//                            sampling gives the action
//     -> episode_sequencer   applies the action (flip / gf-flip triggers),
//                            runs cycles, verification measurement, episodes
//   history_buffer + preprocess_net: the filtered traces and actions of the
//     last HIST_DEPTH cycles, condensed by two dense layers before the next
//     cycle's readout, feed the first low-latency layer.
//   episode_recorder: every trace and applied action of a batch, for the
//     training PC.
//
// Latency from the last 8 ns block of the trace at the boxcar input to the
// action is 2 + 4 = 6 clocks = 48 ns, as in the paper.  All sizes default to
// the paper's configuration: 12 neurons, 7 hidden + 1 output low-latency
// layers, 4 I + 4 Q points per layer, l = 2, 3 actions, 1000 measurements per
// batch, 856 ns cycles, 10 kHz episodes.
//
// Host side (this design's choice): parameters are written word by word
// (param_wr_*; address map in rl_agent_pkg::layer_base and param_bank), the
// recorder is read with rec_rd_addr/rec_rd_data (1 clock latency), start
// launches a batch, done reports its end.  acq_delay, max_cycles and
// noise_en are run-time settings; noise_en = 0 selects the greedy action.
module rl_agent_top
  import rl_agent_pkg::*;
#(
  parameter int          HIST_DEPTH   = 2,
  parameter int          NEUR         = 12,
  parameter int          SPL          = 4,
  parameter int          NPTS         = 32,
  parameter int          N_ACT        = 3,
  parameter int          N_RECORD     = 1000,
  parameter int          CYCLE_CLKS   = 107,
  parameter int          EPISODE_CLKS = 12500,
  parameter logic [31:0] SEED         = 32'h1234_5678,
  localparam int N_LL       = NPTS / SPL,
  localparam int BOX        = 4,
  localparam int PRE_POINTS = NPTS / BOX,
  localparam int PRE_IN     = HIST_DEPTH * (2 * PRE_POINTS + N_ACT),
  localparam int REC_A_W    = $clog2(N_RECORD * (NPTS + 1)),
  localparam int REC_C_W    = $clog2(N_RECORD + 1)
)(
  input  logic                    clk,
  input  logic                    rst_n,
  // ADC
  input  logic signed [ADC_W-1:0] adc [LANES],
  // host: parameters and control
  input  logic                    param_wr_en,
  input  logic [PARAM_ADDR_W-1:0] param_wr_addr,
  input  logic [DATA_W-1:0]       param_wr_data,
  input  logic                    start,
  input  logic [7:0]              acq_delay,
  input  logic [10:0]             max_cycles,
  input  logic                    noise_en,
  output logic                    busy,
  output logic                    done,
  output logic                    error,
  // host: recorded batch
  output logic [REC_C_W-1:0]      rec_count,
  input  logic [REC_A_W-1:0]      rec_rd_addr,
  output logic [31:0]             rec_rd_data,
  // experiment triggers
  output logic                    ro_trigger,
  output logic                    flip_trigger,
  output logic                    gf_trigger,
  output logic                    episode_start,
  // observation of the decision
  output logic                    act_valid,
  output action_e                 action
);

  localparam int PRE_BASE0 = 0;
  localparam int PRE_BASE1 = PRE_BASE0 + PRE_IN * NEUR + NEUR;
  localparam int LL_BASE   = PRE_BASE1 + NEUR * NEUR + NEUR;

  param_wr_t wr;
  assign wr = '{en: param_wr_en, addr: param_wr_addr, data: param_wr_data};

  // ------------------------------------------------ front end
  logic    acq_window, acq_first;
  logic    dd_valid, dd_first;
  data_t   dd_i [LANES], dd_q [LANES];
  sample_t s;

  ddc u_ddc (
    .clk, .rst_n, .in_valid(acq_window), .in_first(acq_first), .adc,
    .out_valid(dd_valid), .out_first(dd_first), .i_out(dd_i), .q_out(dd_q));

  boxcar_downsampler u_boxcar (
    .clk, .rst_n, .in_valid(dd_valid), .in_first(dd_first),
    .i_in(dd_i), .q_in(dd_q), .out(s));

  // ------------------------------------------------ memory + preprocessing
  logic    hist_clear, hist_commit, pre_start, pre_done;
  action_e hist_action;
  data_t   pre_x [PRE_IN];
  data_t   pre_y [NEUR];

  history_buffer #(
    .HIST_DEPTH(HIST_DEPTH), .PRE_POINTS(PRE_POINTS), .BOX(BOX), .N_ACT(N_ACT)
  ) u_hist (
    .clk, .rst_n, .clear(hist_clear), .s, .commit(hist_commit),
    .commit_action(hist_action), .x(pre_x));

  preprocess_net #(
    .PRE_IN(PRE_IN), .NEUR(NEUR), .BASE0(PRE_BASE0), .BASE1(PRE_BASE1)
  ) u_pre (
    .clk, .rst_n, .wr, .start(pre_start), .x(pre_x), .done(pre_done),
    .y(pre_y));

  // ------------------------------------------------ low-latency policy
  data_t logits [N_ACT];
  logic  net_err;

  low_latency_net #(
    .NEUR(NEUR), .SPL(SPL), .N_LL(N_LL), .N_ACT(N_ACT), .BASE(LL_BASE),
    .SEED(SEED)
  ) u_ll (
    .clk, .rst_n, .wr, .noise_en, .pre_y, .s, .act_valid, .action, .logits,
    .seq_err(net_err));

  // ------------------------------------------------ sequencing + recording
  logic        rec_full, rec_clear, rec_commit, seq_err;
  rec_status_t rec_status;

  episode_sequencer #(
    .CYCLE_CLKS(CYCLE_CLKS), .EPISODE_CLKS(EPISODE_CLKS), .NPTS(NPTS)
  ) u_seq (
    .clk, .rst_n, .start, .acq_delay, .max_cycles, .busy, .done, .seq_err,
    .ro_trigger, .acq_window, .acq_first, .flip_trigger, .gf_trigger,
    .episode_start, .act_valid, .action, .hist_clear, .hist_commit,
    .hist_action, .pre_start, .rec_full, .rec_clear, .rec_commit,
    .rec_status);

  episode_recorder #(.N_RECORD(N_RECORD), .NPTS(NPTS)) u_rec (
    .clk, .rst_n, .clear(rec_clear), .s, .commit(rec_commit),
    .status(rec_status), .full(rec_full), .count(rec_count),
    .rd_addr(rec_rd_addr), .rd_data(rec_rd_data));

  // The preprocessing result must be ready before the first point of the
  // next trace reaches the network.
  logic pre_busy, pre_late;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_busy <= 1'b0;
      pre_late <= 1'b0;
    end else begin
      if (pre_start)     pre_busy <= 1'b1;
      else if (pre_done) pre_busy <= 1'b0;
      if (s.valid && s.first && pre_busy) pre_late <= 1'b1;
    end
  end

  assign error = seq_err | net_err | pre_late;

endmodule
