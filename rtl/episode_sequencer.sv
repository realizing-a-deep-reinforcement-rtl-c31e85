// episode_sequencer -- runs the initialization episodes of a training batch.
//
// An episode is a series of measurement cycles of fixed length CYCLE_CLKS
// (856 ns = 107 clocks in the paper).  In every cycle the readout is
// triggered, the ADC samples of the acquisition window (NPTS clocks =
// 256 ns) flow through the network, and the sampled action is applied:
// idle does nothing, flip (and the optional gf-flip) fires a trigger for
// the conditional pulse generator, terminate ends the feedback part of the
// episode.  The cycle after a terminate is the verification measurement,
// whose trace is recorded but whose action is ignored.  Episodes start on a
// fixed grid of EPISODE_CLKS (100 us, the paper's 10 kHz repetition rate);
// the batch ends with the first episode boundary at which the recorder is
// full (1000 measurements in the paper).
//
// Choices of this design (the paper is silent on them): the acquisition
// window opens acq_delay clocks after the readout trigger (covering cable and
// converter delays); an episode is forced to terminate after max_cycles
// feedback cycles so that it always fits its slot; every recorded action is
// the one actually applied.  After each action the history is updated and the
// preprocessing network is restarted for the next cycle; at the start of an
// episode the history is cleared and the preprocessing network runs on zeros.
//
// Interface: start (pulse) begins a batch; busy is high until done goes high.
// All outputs are registered.  act_valid/action come from the network.
// seq_err is set if a feedback cycle ends without an action (acq_delay too
// large for the cycle length).
module episode_sequencer
  import rl_agent_pkg::*;
#(
  parameter int CYCLE_CLKS   = 107,
  parameter int EPISODE_CLKS = 12500,
  parameter int NPTS         = 32
)(
  input  logic        clk,
  input  logic        rst_n,
  // host
  input  logic        start,
  input  logic [7:0]  acq_delay,
  input  logic [10:0] max_cycles,
  output logic        busy,
  output logic        done,
  output logic        seq_err,
  // experiment
  output logic        ro_trigger,
  output logic        acq_window,
  output logic        acq_first,
  output logic        flip_trigger,
  output logic        gf_trigger,
  output logic        episode_start,
  // network
  input  logic        act_valid,
  input  action_e     action,
  output logic        hist_clear,
  output logic        hist_commit,
  output action_e     hist_action,
  output logic        pre_start,
  // recorder
  input  logic        rec_full,
  output logic        rec_clear,
  output logic        rec_commit,
  output rec_status_t rec_status
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_CYCLE, S_DONE} state_e;

  localparam int EP_W = $clog2(EPISODE_CLKS);
  localparam int CY_W = $clog2(CYCLE_CLKS);

  state_e          state;
  logic [EP_W-1:0] ep_timer;
  logic [CY_W-1:0] cyc_cnt;
  logic [10:0]     j;            // feedback cycle within the episode
  logic [15:0]     ep_num;
  logic            verify, verify_next, ep_end, got_act;
  logic            pre_req;

  // decision for the current action
  logic    forced;
  action_e applied;
  always_comb begin
    forced  = (j + 11'd1 >= max_cycles) && (action != ACT_TERMINATE);
    applied = forced ? ACT_TERMINATE : action;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      ep_timer      <= '0;
      cyc_cnt       <= '0;
      j             <= '0;
      ep_num        <= '0;
      verify        <= 1'b0;
      verify_next   <= 1'b0;
      ep_end        <= 1'b0;
      got_act       <= 1'b0;
      pre_req       <= 1'b0;
      busy          <= 1'b0;
      done          <= 1'b0;
      seq_err       <= 1'b0;
      ro_trigger    <= 1'b0;
      acq_window    <= 1'b0;
      acq_first     <= 1'b0;
      flip_trigger  <= 1'b0;
      gf_trigger    <= 1'b0;
      episode_start <= 1'b0;
      hist_clear    <= 1'b0;
      hist_commit   <= 1'b0;
      hist_action   <= ACT_IDLE;
      pre_start     <= 1'b0;
      rec_clear     <= 1'b0;
      rec_commit    <= 1'b0;
      rec_status    <= '0;
    end else begin
      // single-clock pulses
      ro_trigger    <= 1'b0;
      acq_first     <= 1'b0;
      flip_trigger  <= 1'b0;
      gf_trigger    <= 1'b0;
      episode_start <= 1'b0;
      hist_clear    <= 1'b0;
      hist_commit   <= 1'b0;
      rec_clear     <= 1'b0;
      rec_commit    <= 1'b0;
      // the preprocessing network starts one clock after the history changed
      pre_req   <= hist_clear | hist_commit;
      pre_start <= pre_req;

      ep_timer <= (ep_timer == EP_W'(EPISODE_CLKS - 1)) ? '0 : ep_timer + 1'b1;

      unique case (state)
        S_IDLE, S_DONE: begin
          acq_window <= 1'b0;
          if (start) begin
            state     <= S_WAIT;
            busy      <= 1'b1;
            done      <= 1'b0;
            seq_err   <= 1'b0;
            rec_clear <= 1'b1;
            ep_timer  <= '0;
            ep_num    <= '0;
          end
        end

        S_WAIT: begin
          acq_window <= 1'b0;
          if (ep_timer == '0) begin
            if (rec_full) begin
              state <= S_DONE;
              busy  <= 1'b0;
              done  <= 1'b1;
            end else begin
              state         <= S_CYCLE;
              episode_start <= 1'b1;
              hist_clear    <= 1'b1;
              cyc_cnt       <= '0;
              j             <= '0;
              verify        <= 1'b0;
              verify_next   <= 1'b0;
              ep_end        <= 1'b0;
              got_act       <= 1'b0;
            end
          end
        end

        S_CYCLE: begin
          // readout trigger and acquisition window
          ro_trigger <= (cyc_cnt == '0);
          acq_window <= (int'(cyc_cnt) >= int'(acq_delay)) &&
                        (int'(cyc_cnt) <  int'(acq_delay) + NPTS);
          acq_first  <= (int'(cyc_cnt) == int'(acq_delay));

          // the network's decision for this cycle
          if (act_valid && !got_act) begin
            got_act    <= 1'b1;
            rec_commit <= 1'b1;
            rec_status <= '{episode: ep_num, cycle: j,
                            forced:  !verify && forced,
                            verify:  verify,
                            first:   (j == '0) && !verify,
                            action:  verify ? action : applied};
            if (verify) begin
              ep_end <= 1'b1;
            end else begin
              flip_trigger <= (applied == ACT_FLIP);
              gf_trigger   <= (applied == ACT_GF_FLIP);
              hist_commit  <= 1'b1;
              hist_action  <= applied;
              verify_next  <= (applied == ACT_TERMINATE);
            end
          end

          // end of the measurement cycle
          if (cyc_cnt == CY_W'(CYCLE_CLKS - 1)) begin
            cyc_cnt <= '0;
            got_act <= 1'b0;
            if (!got_act && !(act_valid && !got_act)) seq_err <= 1'b1;
            if (ep_end || (verify && act_valid)) begin
              state   <= S_WAIT;
              ep_num  <= ep_num + 1'b1;
            end else begin
              verify <= verify_next ||
                        (act_valid && !got_act && applied == ACT_TERMINATE);
              if (!verify) j <= j + 1'b1;
            end
          end else begin
            cyc_cnt <= cyc_cnt + 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
