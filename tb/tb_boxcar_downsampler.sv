// tb_boxcar_downsampler -- self-checking test of boxcar_downsampler.
//
// Random 1 ns I/Q samples (eight per clock) are applied; each output point
// must be the sum of the eight samples of one clock, saturated to 16 bits,
// and must appear exactly two clocks (16 ns) after its input, with its valid
// and first flags.
`timescale 1ns/1ps
module tb_boxcar_downsampler;
  import rl_agent_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic    in_valid = 1'b0, in_first = 1'b0;
  data_t   i_in [LANES], q_in [LANES];
  sample_t out;

  boxcar_downsampler dut (.clk, .rst_n, .in_valid, .in_first, .i_in, .q_in, .out);

  typedef struct { int i; int q; bit v; bit f; } exp_t;
  exp_t hist [$];

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    for (int n = 0; n < LANES; n++) begin i_in[n] = 0; q_in[n] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 300; it++) begin
      exp_t e;
      @(negedge clk);
      // compare the output with the input of two clocks ago
      if (hist.size() == 2) begin
        e = hist.pop_front();
        checks++;
        if (out.valid !== e.v || out.first !== e.f ||
            int'(out.i) != e.i || int'(out.q) != e.q) begin
          failures++;
          $display("got v%b f%b %0d %0d exp v%b f%b %0d %0d",
                   out.valid, out.first, out.i, out.q, e.v, e.f, e.i, e.q);
        end
      end
      e.i = 0; e.q = 0;
      for (int n = 0; n < LANES; n++) begin
        int r;
        r = (it % 50 < 5) ? 32767 : 4100;          // some clocks saturate
        i_in[n] = data_t'($signed($urandom_range(2*r, 0)) - r);
        q_in[n] = data_t'($signed($urandom_range(2*r, 0)) - r);
        e.i += int'(i_in[n]);
        e.q += int'(q_in[n]);
      end
      e.i = sat(e.i);
      e.q = sat(e.q);
      in_valid = $urandom_range(1, 0);
      in_first = $urandom_range(1, 0);
      e.v = in_valid;
      e.f = in_first;
      hist.push_back(e);
    end
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
