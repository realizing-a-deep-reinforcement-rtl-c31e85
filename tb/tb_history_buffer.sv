// tb_history_buffer -- self-checking test of history_buffer.
//
// Several 32-point traces of random I/Q points (with gaps between points)
// are fed, each followed by a commit with a random action.  After every
// commit the 38-entry output must equal a model: slot 0 = the newest
// trace's 4-point sums (8 I, 8 Q, saturated to 16 bits) and its one-hot
// action (1.0 = 256), slot 1 = the trace before.  clear must empty it.
`timescale 1ns/1ps
module tb_history_buffer;
  import rl_agent_pkg::*;

  localparam int L = 2, P = 8, BOX = 4, NA = 3;
  localparam int SLOT = 2 * P + NA;
  localparam int NX = L * SLOT;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic    clear = 1'b0, commit = 1'b0;
  sample_t s;
  action_e act;
  data_t   x [NX];

  history_buffer #(.HIST_DEPTH(L), .PRE_POINTS(P), .BOX(BOX), .N_ACT(NA)) dut (
    .clk, .rst_n, .clear, .s, .commit, .commit_action(act), .x);

  int model [NX];

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic check(string what);
    for (int e = 0; e < NX; e++) begin
      checks++;
      if (int'(x[e]) != model[e]) begin
        failures++;
        $display("%s: x[%0d]=%0d exp %0d", what, e, x[e], model[e]);
      end
    end
  endtask

  initial begin
    s = '0;
    act = ACT_IDLE;
    for (int e = 0; e < NX; e++) model[e] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int tr = 0; tr < 6; tr++) begin
      int si [32], sq [32];
      int slot [SLOT];
      for (int p = 0; p < 32; p++) begin
        int r;
        r = (tr == 3) ? 32000 : 8000;           // trace 3 saturates
        si[p] = $urandom_range(2*r, 0) - r;
        sq[p] = $urandom_range(2*r, 0) - r;
        if (tr == 3) begin si[p] = r; sq[p] = -r; end
        @(negedge clk);
        s = '{valid: 1'b1, first: (p == 0), i: data_t'(si[p]), q: data_t'(sq[p])};
        if ($urandom_range(3, 0) == 0) begin      // a gap
          @(negedge clk);
          s = '0;
        end
      end
      @(negedge clk);
      s = '0;
      repeat (3) @(negedge clk);
      act = action_e'($urandom_range(2, 0));
      commit = 1'b1;
      @(negedge clk);
      commit = 1'b0;
      // model
      for (int e = SLOT; e < NX; e++) model[e] = model[e - SLOT];
      for (int p = 0; p < P; p++) begin
        model[p]     = sat(si[4*p] + si[4*p+1] + si[4*p+2] + si[4*p+3]);
        model[P + p] = sat(sq[4*p] + sq[4*p+1] + sq[4*p+2] + sq[4*p+3]);
      end
      for (int a = 0; a < NA; a++) model[2*P + a] = (int'(act) == a) ? 256 : 0;
      check($sformatf("trace %0d", tr));
    end
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int e = 0; e < NX; e++) model[e] = 0;
    check("clear");
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
