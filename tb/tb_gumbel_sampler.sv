// tb_gumbel_sampler -- self-checking test of gumbel_sampler.
//
// 1) Every noise value is compared with an independent model: the same
//    Galois LFSR per output and g(u) = -ln(-ln((u + 0.5)/256)) * 256,
//    rounded, computed here with real arithmetic.
// 2) Statistics: the sample mean must be close to the Euler constant
//    0.5772 (Gumbel mean), and argmax(logit_j + g_j) must choose action j with
//    probability softmax(logit)_j (Gumbel-max trick), checked for logits
//    (0, ln 2, ln 4) -> (1/7, 2/7, 4/7).
// 3) With en low the noise is zero.
`timescale 1ns/1ps
module tb_gumbel_sampler;
  import rl_agent_pkg::*;

  localparam int NO = 3;
  localparam logic [31:0] SEED = 32'hACE1_2468;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  data_t noise [NO];
  gumbel_sampler #(.N_OUT(NO), .SEED(SEED)) dut (.clk, .rst_n, .en, .noise);

  logic [31:0] m [NO];

  function automatic int g_of(int u);
    real p;
    p = (real'(u) + 0.5) / 256.0;
    return int'($floor(-$ln(-$ln(p)) * 256.0 + 0.5));
  endfunction

  initial begin
    real mean;
    int  wins [NO];
    int  n;
    real lg [NO];
    lg[0] = 0.0; lg[1] = $ln(2.0); lg[2] = $ln(4.0);
    for (int j = 0; j < NO; j++) begin
      m[j] = SEED ^ (32'h9E37_79B9 * 32'(j + 1));
      wins[j] = 0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // en low: zeros
    repeat (4) begin
      @(negedge clk);
      for (int j = 0; j < NO; j++) begin
        checks++;
        if (noise[j] != 0) begin failures++; $display("noise with en low"); end
      end
    end
    // restart the generators with en high
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    en = 1'b1;
    mean = 0.0;
    n = 20000;
    for (int t = 0; t < n; t++) begin
      int best;
      real bv;
      @(negedge clk);
      if (t > 0) begin
        for (int j = 0; j < NO; j++) begin
          checks++;
          if (int'(noise[j]) != g_of(int'(m[j][7:0]))) begin
            failures++;
            if (failures < 10) $display("t=%0d j=%0d noise %0d exp %0d", t, j,
                                        noise[j], g_of(int'(m[j][7:0])));
          end
          m[j] = m[j][0] ? ((m[j] >> 1) ^ 32'h8020_0003) : (m[j] >> 1);
        end
      end else begin
        // output of the first clock after reset: from the seed state
        for (int j = 0; j < NO; j++) begin
          checks++;
          if (int'(noise[j]) != g_of(int'(m[j][7:0]))) begin
            failures++; $display("first noise wrong"); end
          m[j] = m[j][0] ? ((m[j] >> 1) ^ 32'h8020_0003) : (m[j] >> 1);
        end
      end
      best = 0;
      bv   = -1.0e9;
      for (int j = 0; j < NO; j++) begin
        mean += real'(noise[j]) / 256.0;
        if (lg[j] + real'(noise[j]) / 256.0 > bv) begin
          bv = lg[j] + real'(noise[j]) / 256.0; best = j;
        end
      end
      wins[best]++;
    end
    mean = mean / real'(n * NO);
    checks++;
    if (mean < 0.52 || mean > 0.64) begin
      failures++; $display("mean %f, expected about 0.577", mean); end
    for (int j = 0; j < NO; j++) begin
      real f, e;
      f = real'(wins[j]) / real'(n);
      e = real'(1 << j) / 7.0;
      checks++;
      if (f < e - 0.03 || f > e + 0.03) begin
        failures++; $display("action %0d chosen %f, expected %f", j, f, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
