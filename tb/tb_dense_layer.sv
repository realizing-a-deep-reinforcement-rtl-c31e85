// tb_dense_layer -- self-checking test of dense_layer.
//
// Two layers with the low-latency network's shape (N = 20 inputs): a ReLU
// hidden layer with 12 outputs and a linear output layer with 3 outputs and
// argmax.  Random inputs, weights and biases are presented, partly
// back-to-back, and every result is compared with a plain integer model of
// y_j = f(sum_k w_jk x_k + b_j), requantised by >>> 10 and saturated to 16
// bits.  The latency must be 1 + ceil(log4(21)) = 4 clocks (32 ns).  A third
// layer with N = 12 checks the 3-clock case.
`timescale 1ns/1ps
module tb_dense_layer;
  import rl_agent_pkg::*;

  localparam int N  = 20;
  localparam int M  = 12;
  localparam int MO = 3;
  localparam int N2 = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  int checks = 0, failures = 0;

  data_t   x  [N];
  weight_t w  [M][N];
  data_t   b  [M];
  weight_t wo [MO][N];
  data_t   bo [MO];
  data_t   x2 [N2];
  weight_t w2 [M][N2];
  logic    vin = 1'b0;

  logic  v1, v2, v3;
  data_t y1 [M], y2 [MO], y3 [M];
  logic [3:0] am1;
  logic [1:0] am2;
  logic [3:0] am3;

  dense_layer #(.N(N), .M(M), .RELU(1'b1)) dut_h (
    .clk, .rst_n, .in_valid(vin), .x, .w, .b,
    .out_valid(v1), .y(y1), .y_argmax(am1));
  dense_layer #(.N(N), .M(MO), .RELU(1'b0)) dut_o (
    .clk, .rst_n, .in_valid(vin), .x, .w(wo), .b(bo),
    .out_valid(v2), .y(y2), .y_argmax(am2));
  dense_layer #(.N(N2), .M(M), .RELU(1'b1)) dut_s (
    .clk, .rst_n, .in_valid(vin), .x(x2), .w(w2), .b,
    .out_valid(v3), .y(y3), .y_argmax(am3));

  // expected results, indexed by the cycle the input was applied
  typedef struct {
    int    t;
    data_t yh [M];
    data_t yo [MO];
    int    amax;
    data_t ys [M];
  } exp_t;
  exp_t q[$];
  int cyc = 0;

  function automatic data_t requant(longint s, bit relu);
    longint r;
    if (relu && s < 0) return 0;
    r = s >>> W_FRAC;
    if (r > 32767)  return 32767;
    if (r < -32768) return -32768;
    return data_t'(r);
  endfunction

  function automatic data_t rnd16(int range);
    return data_t'($signed($urandom_range(2*range, 0)) - range);
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // compare outputs
  always @(posedge clk) begin
    if (rst_n && v1) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        checks++;
        if (cyc - e.t != 4) begin
          failures++; $display("latency %0d, expected 4", cyc - e.t); end
        for (int j = 0; j < M; j++) begin
          checks++;
          if (y1[j] !== e.yh[j]) begin
            failures++; $display("hidden y[%0d]=%0d exp %0d", j, y1[j], e.yh[j]); end
        end
        checks++;
        if (!v2) begin failures++; $display("output layer valid missing"); end
        for (int j = 0; j < MO; j++) begin
          checks++;
          if (y2[j] !== e.yo[j]) begin
            failures++; $display("logit[%0d]=%0d exp %0d", j, y2[j], e.yo[j]); end
        end
        checks++;
        if (int'(am2) != e.amax) begin
          failures++; $display("argmax %0d exp %0d", am2, e.amax); end
      end
    end
  end

  // the N = 12 layer must finish one clock earlier
  exp_t q3[$];
  always @(posedge clk) begin
    if (rst_n && v3) begin
      exp_t e;
      e = q3.pop_front();
      checks++;
      if (cyc - e.t != 3) begin
        failures++; $display("N=12 latency %0d, expected 3", cyc - e.t); end
      for (int j = 0; j < M; j++) begin
        checks++;
        if (y3[j] !== e.ys[j]) begin
          failures++; $display("small y[%0d]=%0d exp %0d", j, y3[j], e.ys[j]); end
      end
    end
  end

  initial begin
    for (int j = 0; j < M; j++) begin
      for (int k = 0; k < N; k++) w[j][k] = 0;
      for (int k = 0; k < N2; k++) w2[j][k] = 0;
      b[j] = 0;
    end
    for (int j = 0; j < MO; j++) begin
      for (int k = 0; k < N; k++) wo[j][k] = 0;
      bo[j] = 0;
    end
    for (int k = 0; k < N; k++) x[k] = 0;
    for (int k = 0; k < N2; k++) x2[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 60; it++) begin
      exp_t e;
      @(negedge clk);
      // new random parameters and inputs; some large to hit saturation
      for (int k = 0; k < N; k++) x[k] = rnd16(it < 50 ? 4000 : 32767);
      for (int k = 0; k < N2; k++) x2[k] = rnd16(4000);
      for (int j = 0; j < M; j++) begin
        for (int k = 0; k < N; k++) w[j][k] = rnd16(it < 50 ? 600 : 32767);
        for (int k = 0; k < N2; k++) w2[j][k] = rnd16(600);
        b[j] = rnd16(8000);
      end
      for (int j = 0; j < MO; j++) begin
        for (int k = 0; k < N; k++) wo[j][k] = rnd16(600);
        bo[j] = rnd16(8000);
      end
      vin = ($urandom_range(3, 0) != 0);
      if (vin) begin
        longint s, best;
        e.t = cyc;
        for (int j = 0; j < M; j++) begin
          s = longint'(b[j]) <<< W_FRAC;
          for (int k = 0; k < N; k++) s += longint'(x[k]) * longint'(w[j][k]);
          e.yh[j] = requant(s, 1'b1);
          s = longint'(b[j]) <<< W_FRAC;
          for (int k = 0; k < N2; k++) s += longint'(x2[k]) * longint'(w2[j][k]);
          e.ys[j] = requant(s, 1'b1);
        end
        e.amax = 0;
        best = 0;
        for (int j = 0; j < MO; j++) begin
          s = longint'(bo[j]) <<< W_FRAC;
          for (int k = 0; k < N; k++) s += longint'(x[k]) * longint'(wo[j][k]);
          e.yo[j] = requant(s, 1'b0);
          if (j == 0 || s > best) begin best = s; e.amax = j; end
        end
        q.push_back(e);
        q3.push_back(e);
      end
    end
    @(negedge clk) vin = 1'b0;
    repeat (8) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
