// tb_preprocess_net -- self-checking test of preprocess_net.
//
// Random weights and biases for both layers (38 -> 12 -> 12) are written
// over the parameter bus, then several random input vectors are run.  The
// output must equal the reference model (nn_ref_pkg) and done must come
// 4 + 3 = 7 clocks after start.
`timescale 1ns/1ps
module tb_preprocess_net;
  import rl_agent_pkg::*;
  import nn_ref_pkg::*;

  localparam int PRE_IN = 38, NEUR = 12;
  localparam int B0 = 0, B1 = PRE_IN * NEUR + NEUR;
  localparam int WORDS = B1 + NEUR * NEUR + NEUR;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  param_wr_t wr;
  logic      start = 1'b0, done;
  data_t     x [PRE_IN];
  data_t     y [NEUR];

  preprocess_net #(.PRE_IN(PRE_IN), .NEUR(NEUR), .BASE0(B0), .BASE1(B1)) dut (
    .clk, .rst_n, .wr, .start, .x, .done, .y);

  int img [];

  initial begin
    wr = '0;
    for (int k = 0; k < PRE_IN; k++) x[k] = 0;
    img = new[WORDS];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < WORDS; a++) begin
      img[a] = $urandom_range(1200, 0) - 600;
      if (a >= B0 + PRE_IN*NEUR && a < B1) img[a] = $urandom_range(2000, 0) - 1000;
      @(negedge clk);
      wr = '{en: 1'b1, addr: 16'(a), data: 16'(img[a])};
    end
    @(negedge clk);
    wr = '0;
    for (int it = 0; it < 20; it++) begin
      ivec_t xv, h, ye;
      longint sums [];
      int lat;
      xv = new[PRE_IN];
      for (int k = 0; k < PRE_IN; k++) begin
        xv[k] = $urandom_range(8000, 0) - 4000;
        x[k] = data_t'(xv[k]);
      end
      h  = dense(xv, B0, PRE_IN, NEUR, 1'b1, img, sums);
      ye = dense(h, B1, NEUR, NEUR, 1'b1, img, sums);
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 7) begin failures++; $display("latency %0d, expected 7", lat); end
      for (int j = 0; j < NEUR; j++) begin
        checks++;
        if (int'(y[j]) != ye[j]) begin
          failures++; $display("y[%0d]=%0d exp %0d", j, y[j], ye[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
