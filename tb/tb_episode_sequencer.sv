// tb_episode_sequencer -- self-checking test of episode_sequencer.
//
// The network is replaced by a stand-in that answers every acquisition
// window with a random action 7 clocks after the window's last clock (the
// front-end and last-layer latency of the real agent), and the recorder by a
// counter that reports full after 40 measurements.  Checked:
//  * measurement cycles are 107 clocks apart, the acquisition window is 32
//    clocks long and opens acq_delay clocks after the readout trigger;
//  * episodes start on the 600-clock grid (shortened from 12500);
//  * flip / gf-flip triggers follow the applied action one clock later;
//  * after terminate exactly one verification cycle follows;
//  * an episode is forced to terminate after max_cycles feedback cycles;
//  * each recorded status carries the right cycle, flags and action;
//  * the history is cleared at episode start and committed after every
//    feedback action, and the preprocessing start follows two clocks later;
//  * the batch ends (done) at the first episode boundary with a full
//    recorder.
`timescale 1ns/1ps
module tb_episode_sequencer;
  import rl_agent_pkg::*;

  localparam int CYC = 107, EP = 600, NPTS = 32, NFULL = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start = 1'b0;
  logic [7:0]  acq_delay = 8'd25;
  logic [10:0] max_cycles = 11'd4;
  logic busy, done, seq_err, ro_trigger, acq_window, acq_first, flip_trigger,
        gf_trigger, episode_start, act_valid, hist_clear, hist_commit,
        pre_start, rec_full, rec_clear, rec_commit;
  action_e     action, hist_action;
  rec_status_t rec_status;

  episode_sequencer #(.CYCLE_CLKS(CYC), .EPISODE_CLKS(EP), .NPTS(NPTS)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- stand-in network and recorder
  int win_len = 0, countdown = -1, n_rec = 0;
  always @(posedge clk) begin
    act_valid <= 1'b0;
    if (!rst_n) win_len <= 0;   // outputs are undefined before the first reset edge
    else if (acq_window) win_len <= win_len + 1;
    else if (win_len != 0) begin
      checks++;
      if (win_len != NPTS) begin failures++; $display("window %0d clocks", win_len); end
      win_len   <= 0;
      countdown <= 5;
    end
    if (countdown == 0) begin
      act_valid <= 1'b1;
      action    <= action_e'($urandom_range(3, 0));
    end
    if (countdown >= 0) countdown <= countdown - 1;
    if (rec_clear) n_rec <= 0;
    else if (rec_commit) n_rec <= n_rec + 1;
  end
  assign rec_full = (n_rec >= NFULL);

  // ---------------- checking model
  int  last_ro = -1, last_ep = -1, t_start = 0;
  int  j = 0;
  bit  in_verify = 1'b0;
  action_e exp_applied;
  bit  exp_flip = 1'b0, exp_gf = 1'b0, exp_commit = 1'b0;
  int  n_flip = 0, n_gf = 0, n_term = 0, n_forced = 0, n_idle = 0, n_ver = 0;
  int  n_episodes = 0;
  int  t_hist = -10;

  always @(posedge clk) begin
    if (rst_n) begin
      // readout trigger spacing and window position
      if (ro_trigger) begin
        if (last_ro >= 0 && !episode_start_seen) begin
          checks++;
          if (cyc - last_ro != CYC) begin
            failures++; $display("cycle length %0d", cyc - last_ro); end
        end
        last_ro = cyc;
        episode_start_seen = 1'b0;
      end
      if (acq_first) begin
        checks++;
        if (cyc - last_ro != int'(acq_delay)) begin
          failures++; $display("window opens %0d after trigger", cyc - last_ro); end
      end
      if (episode_start) begin
        checks++;
        if ((cyc - t_start) % EP != 1) begin
          failures++; $display("episode start off grid: %0d", cyc - t_start); end
        n_episodes++;
        j = 0;
        in_verify = 1'b0;
        episode_start_seen = 1'b1;
      end
      // triggers one clock after the decision
      checks++;
      if (flip_trigger !== exp_flip || gf_trigger !== exp_gf) begin
        failures++; $display("trigger flip=%b gf=%b exp %b %b", flip_trigger,
                             gf_trigger, exp_flip, exp_gf); end
      exp_flip = 1'b0;
      exp_gf   = 1'b0;
      if (rec_commit) begin
        checks++;
        if (!exp_commit) begin failures++; $display("unexpected commit"); end
        checks++;
        if (rec_status.verify !== in_verify || int'(rec_status.cycle) != j ||
            rec_status.first !== (j == 0 && !in_verify) ||
            (!in_verify && rec_status.action != exp_applied) ||
            rec_status.forced !== (!in_verify && exp_forced)) begin
          failures++;
          $display("status v%b c%0d f%b a%0d, exp v%b c%0d a%0d", rec_status.verify,
                   rec_status.cycle, rec_status.first, rec_status.action,
                   in_verify, j, exp_applied);
        end
        if (in_verify) n_ver++;
        if (rec_status.forced) n_forced++;
        exp_commit = 1'b0;
        if (!in_verify) begin
          if (exp_applied == ACT_TERMINATE) in_verify = 1'b1;
          j++;                   // the verification carries cycle number n
        end
      end
      if (hist_commit) begin
        checks++;
        if (hist_action != exp_applied || in_verify_at_decision) begin
          failures++; $display("history commit %0d exp %0d", hist_action, exp_applied); end
        t_hist = cyc;
      end
      if (hist_clear) t_hist = cyc;
      if (pre_start) begin
        checks++;
        if (cyc - t_hist != 2) begin
          failures++; $display("pre_start %0d clocks after history", cyc - t_hist); end
      end
      // decision of the stand-in network
      if (act_valid) begin
        exp_commit = 1'b1;
        in_verify_at_decision = in_verify;
        if (!in_verify) begin
          bit forced;
          forced = (j + 1 >= int'(max_cycles)) && action != ACT_TERMINATE;
          exp_applied = forced ? ACT_TERMINATE : action;
          exp_forced  = forced;
          exp_flip = (exp_applied == ACT_FLIP);
          exp_gf   = (exp_applied == ACT_GF_FLIP);
          case (exp_applied)
            ACT_FLIP:    n_flip++;
            ACT_GF_FLIP: n_gf++;
            ACT_IDLE:    n_idle++;
            default:     n_term++;
          endcase
        end
      end
    end
  end
  bit episode_start_seen = 1'b1;
  bit exp_forced = 1'b0;
  bit in_verify_at_decision = 1'b0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    t_start = cyc + 1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("not busy after start"); end
    wait (done);
    @(negedge clk);
    checks++;
    if (n_rec != NFULL && !(n_rec > NFULL && n_rec < NFULL + 6)) begin
      failures++; $display("%0d measurements recorded", n_rec); end
    checks++;
    if (seq_err) begin failures++; $display("seq_err"); end
    $display("episodes %0d flips %0d gf %0d idles %0d terminates %0d forced %0d verifications %0d",
             n_episodes, n_flip, n_gf, n_idle, n_term, n_forced, n_ver);
    checks++;
    if (n_flip == 0 || n_gf == 0 || n_idle == 0 || n_term == 0 || n_forced == 0 ||
        n_ver != n_episodes) begin
      failures++; $display("a mechanism was not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
