// tb_rl_agent_top -- end-to-end test of the agent at its default size.
//
// A behavioural qubit/readout model (qubit_readout_model) closes the loop.
// The host port loads a hand-made policy into all ten layers:
//   * the preprocessing network passes a constant offset C = 8000 and the
//     flag "previous action was idle" (from the history's action bits);
//   * every low-latency layer adds its 4 I points / 8 to the running sum in
//     neuron 0 and carries the flag in neuron 1;
//   * the output layer gives terminate = -U + 2000*flag, flip = +U and
//     idle = 1000 (U = sum of all I points / 8, offset removed).
// So the agent terminates on a ground-state trace, flips on an excited one,
// idles on an ambiguous one, and thanks to its memory never idles twice.
// One batch of 1000 measurements (the paper's size) is run with 856 ns
// cycles and 100 us episodes; the Gumbel noise is off for the first half
// (greedy policy) and on for the second.  max_cycles is 3, so repeated
// failed flips force terminations.
//
// Checked: every decision against an independent integer model of the whole
// network (history filtering, preprocessing, eight low-latency layers,
// output noise read from the sampler); every decision against the simple
// rule above where it is unambiguous; flip triggers; the 48 ns network
// latency (6 clocks from the last 8 ns block entering the boxcar filter);
// every recorded word of the batch read back through the host port; and
// that idle, flip, terminate, forced termination, verification, the memory
// path, noisy sampling and the end of the batch all occurred.
`timescale 1ns/1ps
module tb_rl_agent_top;
  import rl_agent_pkg::*;
  import nn_ref_pkg::*;

  localparam int NEUR = 12, SPL = 4, NPTS = 32, N_ACT = 3, L = 2, NR = 1000;
  localparam int N_LL = NPTS / SPL;
  localparam int PRE_IN = L * (2 * 8 + N_ACT);
  localparam int NIN = NEUR + 2 * SPL;
  localparam int B1 = PRE_IN * NEUR + NEUR;
  localparam int LLB = B1 + NEUR * NEUR + NEUR;
  localparam int HB = NIN * NEUR + NEUR;
  localparam int OB = LLB + (N_LL - 1) * HB;
  localparam int WORDS = OB + NIN * N_ACT + N_ACT;
  localparam int C = 8000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- DUT
  logic signed [ADC_W-1:0] adc [LANES];
  logic        param_wr_en = 1'b0, start = 1'b0, noise_en = 1'b0;
  logic [15:0] param_wr_addr = '0, param_wr_data = '0;
  logic [7:0]  acq_delay = 8'd25;
  logic [10:0] max_cycles = 11'd3;
  logic        busy, done, error, ro_trigger, flip_trigger, gf_trigger,
               episode_start, act_valid;
  logic [9:0]  rec_count;
  logic [15:0] rec_rd_addr = '0;
  logic [31:0] rec_rd_data;
  action_e     action;

  rl_agent_top dut (.*);

  int shown;
  qubit_readout_model u_env (.clk, .new_episode(episode_start), .ro_trigger,
                             .flip_trigger, .adc, .shown);

  // ---------------- policy image
  int img [];
  task automatic build_policy();
    img = new[WORDS];
    foreach (img[a]) img[a] = 0;
    img[PRE_IN * NEUR + 0] = C;                  // pre layer 0: bias of n0
    img[1 * PRE_IN + 2 * 8 + 2] = 1024;  // n1 <- idle bit (action 2) of slot 0
    img[B1 + 0 * NEUR + 0] = 1024;               // pre layer 1: copy n0, n1
    img[B1 + 1 * NEUR + 1] = 1024;
    for (int k = 0; k < N_LL - 1; k++) begin
      int b;
      b = LLB + k * HB;
      img[b + 0] = 1024;                         // n0 <- n0
      for (int e = 0; e < SPL; e++) img[b + NEUR + e] = 128;  // + I/8
      img[b + NIN + 1] = 1024;                   // n1 <- n1
    end
    img[OB + 0 * NIN + 0] = -1024;               // terminate
    img[OB + 0 * NIN + 1] = 8000;
    for (int e = 0; e < SPL; e++) img[OB + 0 * NIN + NEUR + e] = -128;
    img[OB + N_ACT * NIN + 0] = C;
    img[OB + 1 * NIN + 0] = 1024;                // flip
    for (int e = 0; e < SPL; e++) img[OB + 1 * NIN + NEUR + e] = 128;
    img[OB + N_ACT * NIN + 1] = -C;
    img[OB + N_ACT * NIN + 2] = 1000;            // idle
  endtask

  // ---------------- capture of every trace the agent acquires
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int cur_i [NPTS], cur_q [NPTS], npt = 0, t_last_blk = 0;
  always @(posedge clk) begin
    if (dut.acq_window) begin
      int si, sq;
      if (dut.acq_first) npt = 0;
      si = 0; sq = 0;
      for (int n = 0; n < LANES; n++) begin
        if (n % 4 == 0) si += int'(adc[n]);
        if (n % 4 == 2) si -= int'(adc[n]);
        if (n % 4 == 1) sq += int'(adc[n]);
        if (n % 4 == 3) sq -= int'(adc[n]);
      end
      cur_i[npt] = si;
      cur_q[npt] = sq;
      npt++;
      t_last_blk = cyc + 1;          // this block enters the boxcar next clock
    end
  end

  // noise that entered the output layer
  int noise_seen [N_ACT];
  always @(posedge clk)
    if (dut.u_ll.start[N_LL - 1])
      for (int j = 0; j < N_ACT; j++) noise_seen[j] = int'(dut.u_ll.noise[j]);

  // ---------------- reference model of one decision
  int hist_x [PRE_IN];
  function automatic void ref_decide(output int act_exact, output int act_greedy);
    ivec_t x, prev, xin, y;
    longint sums [];
    x = new[PRE_IN];
    foreach (hist_x[e]) x[e] = hist_x[e];
    prev = dense(x, 0, PRE_IN, NEUR, 1'b1, img, sums);
    prev = dense(prev, B1, NEUR, NEUR, 1'b1, img, sums);
    for (int k = 0; k < N_LL; k++) begin
      xin = new[NIN];
      for (int e = 0; e < NEUR; e++) xin[e] = prev[e];
      for (int e = 0; e < SPL; e++) begin
        xin[NEUR + e]       = sat16(cur_i[SPL*k + e]);
        xin[NEUR + SPL + e] = sat16(cur_q[SPL*k + e]);
      end
      if (k < N_LL - 1) prev = dense(xin, LLB + k * HB, NIN, NEUR, 1'b1, img, sums);
      else begin
        ivec_t nz;
        nz = new[N_ACT];
        foreach (nz[j]) nz[j] = 0;
        y = dense_noisy(xin, OB, NIN, N_ACT, img, nz, sums);
        act_greedy = argmax(sums);
        foreach (nz[j]) nz[j] = noise_en ? noise_seen[j] : 0;
        y = dense_noisy(xin, OB, NIN, N_ACT, img, nz, sums);
        act_exact = argmax(sums);
      end
    end
  endfunction

  function automatic void push_history(int act);
    for (int e = PRE_IN - 1; e >= PRE_IN / L; e--) hist_x[e] = hist_x[e - PRE_IN / L];
    for (int p = 0; p < 8; p++) begin
      hist_x[p]     = sat16(sat16(cur_i[4*p]) + sat16(cur_i[4*p+1]) + sat16(cur_i[4*p+2]) + sat16(cur_i[4*p+3]));
      hist_x[8 + p] = sat16(sat16(cur_q[4*p]) + sat16(cur_q[4*p+1]) + sat16(cur_q[4*p+2]) + sat16(cur_q[4*p+3]));
    end
    for (int a = 0; a < N_ACT; a++) hist_x[16 + a] = (a == act) ? 256 : 0;
  endfunction

  // ---------------- expected behaviour, decision by decision
  typedef struct { int i [NPTS]; int q [NPTS]; logic [31:0] status; } rec_t;
  rec_t log_q [$];

  int  j = 0, ep = -1, prev_act = -1;
  bit  verify = 1'b0, exp_flip = 1'b0;
  int  n_idle = 0, n_flip = 0, n_term = 0, n_forced = 0, n_verify = 0,
       n_memory = 0, n_noisy = 0, n_episodes = 0, n_ver_ground = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (flip_trigger !== exp_flip) begin
        failures++; $display("flip trigger %b, expected %b", flip_trigger, exp_flip); end
      exp_flip = 1'b0;
      if (episode_start) begin
        foreach (hist_x[e]) hist_x[e] = 0;
        j = 0; verify = 1'b0; prev_act = -1; ep++; n_episodes++;
      end
      if (act_valid) begin
        int ex, gr, applied, rule;
        bit forced;
        rec_t r;
        rec_status_t st;
        ref_decide(ex, gr);
        checks++;
        if (cyc - t_last_blk != 6) begin
          failures++; $display("network latency %0d clocks, expected 6", cyc - t_last_blk); end
        checks++;
        if (int'(action) != ex) begin
          failures++;
          $display("ep %0d cycle %0d: action %0d, model %0d (shown %0d)", ep, j, action, ex, shown);
        end
        if (noise_en && ex != gr) n_noisy++;
        // the simple rule, where the trace is unambiguous
        rule = (shown == 0) ? int'(ACT_TERMINATE) : (shown == 1) ? int'(ACT_FLIP) :
               (prev_act == int'(ACT_IDLE)) ? int'(ACT_TERMINATE) : int'(ACT_IDLE);
        if (!noise_en || shown != 2) begin
          checks++;
          if (int'(action) != rule) begin
            failures++; $display("action %0d breaks the rule (%0d) for state %0d", action, rule, shown); end
        end
        forced  = !verify && (j + 1 >= int'(max_cycles)) && action != ACT_TERMINATE;
        applied = forced ? int'(ACT_TERMINATE) : int'(action);
        st = '{episode: 16'(ep), cycle: 11'(j), forced: forced, verify: verify,
               first: (j == 0) && !verify, action: verify ? action : action_e'(applied)};
        r.i = cur_i; r.q = cur_q; r.status = st;
        if (log_q.size() < NR) log_q.push_back(r);
        if (verify) begin
          n_verify++;
          if (shown == 0) n_ver_ground++;
        end else begin
          if (forced) n_forced++;
          if (applied == int'(ACT_IDLE)) n_idle++;
          if (applied == int'(ACT_FLIP)) begin n_flip++; exp_flip = 1'b1; end
          if (applied == int'(ACT_TERMINATE)) n_term++;
          if (shown == 2 && prev_act == int'(ACT_IDLE) && applied == int'(ACT_TERMINATE))
            n_memory++;
          push_history(applied);
          prev_act = applied;
          j++;
          if (applied == int'(ACT_TERMINATE)) verify = 1'b1;
        end
      end
    end
  end

  // ---------------- host sequence
  initial begin
    build_policy();
    foreach (hist_x[e]) hist_x[e] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      param_wr_en = 1'b1; param_wr_addr = 16'(a); param_wr_data = 16'(img[a]);
    end
    @(negedge clk);
    param_wr_en = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    // second half of the batch with Gumbel sampling
    wait (rec_count >= 10'(NR / 2));
    @(negedge clk);
    noise_en = 1'b1;
    wait (done);
    @(negedge clk);
    checks++;
    if (int'(rec_count) != NR || error) begin
      failures++; $display("batch ended with %0d measurements, error %b", rec_count, error); end
    // read the whole batch back
    for (int m = 0; m < NR; m++) begin
      for (int p = 0; p <= NPTS; p++) begin
        logic [31:0] e;
        rec_rd_addr = 16'(m * (NPTS + 1) + p);
        @(negedge clk);
        if (p < NPTS) e = {16'(sat16(log_q[m].i[p])), 16'(sat16(log_q[m].q[p]))};
        else          e = log_q[m].status;
        checks++;
        if (rec_rd_data !== e) begin
          failures++;
          if (failures < 20) $display("record %0d word %0d = %h, expected %h", m, p, rec_rd_data, e);
        end
      end
    end
    $display("episodes %0d: idle %0d flip %0d terminate %0d forced %0d verify %0d (ground %0d) memory %0d noisy %0d",
             n_episodes, n_idle, n_flip, n_term, n_forced, n_verify, n_ver_ground, n_memory, n_noisy);
    checks++;
    if (n_idle == 0 || n_flip == 0 || n_term == 0 || n_forced == 0 || n_verify == 0 ||
        n_memory == 0 || n_noisy == 0) begin
      failures++; $display("a mechanism never occurred"); end
    checks++;
    if (n_verify != n_episodes) begin failures++; $display("verification count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
