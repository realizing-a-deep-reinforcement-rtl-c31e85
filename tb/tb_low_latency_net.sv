// tb_low_latency_net -- self-checking test of low_latency_net.
//
// Random weights for all 8 layers are written over the parameter bus, and
// random traces of 32 I/Q points are streamed in, one point per clock as the
// down-sampler delivers them (one trace also with gaps).  For each trace the
// reference model (nn_ref_pkg) evaluates layer k on the previous layer's
// outputs (the preprocessing outputs for k = 0) and points 4k..4k+3, and the
// logits and action are compared.  The action must be valid 4 clocks (32 ns)
// after the last point.  Traces run first with the Gumbel noise off (greedy)
// and then on; with noise on, the noise that entered the output layer is
// read from the sampler in the clock the last layer starts.
// N_ACT (default 3) may be set to 4 to test the network with the gf-flip
// action; every action must then be chosen at least once.
`timescale 1ns/1ps
module tb_low_latency_net #(parameter int N_ACT = 3);
  import rl_agent_pkg::*;
  import nn_ref_pkg::*;

  localparam int NEUR = 12, SPL = 4, N_LL = 8;
  localparam int NIN = NEUR + 2 * SPL;
  localparam int HB = NIN * NEUR + NEUR;
  localparam int WORDS = (N_LL - 1) * HB + NIN * N_ACT + N_ACT;
  localparam int NPTS = N_LL * SPL;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  param_wr_t wr;
  logic      noise_en = 1'b0;
  data_t     pre_y [NEUR];
  sample_t   s;
  logic      act_valid, seq_err;
  action_e   action;
  data_t     logits [N_ACT];

  low_latency_net #(.NEUR(NEUR), .SPL(SPL), .N_LL(N_LL), .N_ACT(N_ACT),
                    .BASE(0)) dut (
    .clk, .rst_n, .wr, .noise_en, .pre_y, .s, .act_valid, .action, .logits,
    .seq_err);

  int img [];
  int cyc = 0;
  int t_valid = -1;
  ivec_t noise_seen;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (act_valid) t_valid <= cyc;
  // the noise added to the output-layer biases in the clock that starts it
  always @(posedge clk)
    if (s.valid && dut.n_now == 5'(NPTS - 1))
      for (int j = 0; j < N_ACT; j++) noise_seen[j] = int'(dut.noise[j]);

  initial begin
    int actions_seen [N_ACT];
    wr = '0;
    s  = '0;
    noise_seen = new[N_ACT];
    for (int j = 0; j < NEUR; j++) pre_y[j] = 0;
    for (int a = 0; a < N_ACT; a++) actions_seen[a] = 0;
    img = new[WORDS];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < WORDS; a++) begin
      img[a] = $urandom_range(1000, 0) - 500;
      @(negedge clk);
      wr = '{en: 1'b1, addr: 16'(a), data: 16'(img[a])};
    end
    @(negedge clk);
    wr = '0;

    for (int tr = 0; tr < 24; tr++) begin
      ivec_t prev, xin, ye;
      longint sums [];
      int pi [NPTS], pq [NPTS];
      int t_last;
      noise_en = (tr >= 12);
      prev = new[NEUR];
      for (int j = 0; j < NEUR; j++) begin
        prev[j] = $urandom_range(3000, 0);
        pre_y[j] = data_t'(prev[j]);
      end
      for (int p = 0; p < NPTS; p++) begin
        pi[p] = $urandom_range(6000, 0) - 3000;
        pq[p] = $urandom_range(6000, 0) - 3000;
        @(negedge clk);
        s = '{valid: 1'b1, first: (p == 0), i: data_t'(pi[p]), q: data_t'(pq[p])};
        t_last = cyc;
        if (tr == 5 && p % 3 == 1) begin @(negedge clk); s = '0; end
      end
      @(negedge clk);
      s = '0;
      repeat (5) @(negedge clk);
      // reference
      for (int k = 0; k < N_LL; k++) begin
        xin = new[NIN];
        for (int e = 0; e < NEUR; e++) xin[e] = prev[e];
        for (int e = 0; e < SPL; e++) begin
          xin[NEUR + e]       = pi[SPL*k + e];
          xin[NEUR + SPL + e] = pq[SPL*k + e];
        end
        if (k < N_LL - 1) prev = dense(xin, k*HB, NIN, NEUR, 1'b1, img, sums);
        else begin
          ivec_t nz;
          nz = new[N_ACT];
          for (int j = 0; j < N_ACT; j++) nz[j] = noise_en ? noise_seen[j] : 0;
          ye = dense_noisy(xin, k*HB, NIN, N_ACT, img, nz, sums);
        end
      end
      checks++;
      if (t_valid - t_last != 4) begin
        failures++; $display("trace %0d: action after %0d clocks, expected 4",
                             tr, t_valid - t_last); end
      for (int j = 0; j < N_ACT; j++) begin
        checks++;
        if (int'(logits[j]) != ye[j]) begin
          failures++; $display("trace %0d logit %0d = %0d exp %0d", tr, j, logits[j], ye[j]); end
      end
      checks++;
      if (int'(action) != argmax(sums)) begin
        failures++; $display("trace %0d action %0d exp %0d", tr, action, argmax(sums)); end
      actions_seen[int'(action)]++;
    end
    checks++;
    if (seq_err) begin failures++; $display("seq_err set"); end
    for (int a = 0; a < N_ACT; a++) begin
      $display("action %0d chosen %0d times", a, actions_seen[a]);
      checks++;
      if (actions_seen[a] == 0) begin failures++; $display("action %0d never chosen", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
