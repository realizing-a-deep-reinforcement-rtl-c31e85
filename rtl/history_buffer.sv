// history_buffer -- memory of the last l measurement cycles of an episode.
//
// The agent sees, besides the current readout trace, the traces and actions
// of up to l previous cycles of the same episode (the paper uses l = 2).
// To keep that input small, each previous trace is passed through a 32-point
// boxcar filter (32 ns): here four consecutive 8 ns points, each already the
// sum of eight 1 ns samples, are added, so a 256 ns trace leaves 8 I and 8 Q
// values.  Each previous action is a one-hot string of N_ACT bits (three
// bits, a fourth with the gf-flip action), each bit entering the network as
// 0 or 1.0 (1 << ACT_FRAC).
//
// Interface: every valid point of s is accumulated into the current cycle's
// filtered trace (s.first restarts it).  commit shifts the current trace and
// commit_action into slot 0 of the history (slot 1 is the cycle before, and
// so on); clear empties the history at the start of an episode, so the first
// cycle sees zeros.  x is the preprocessing network's input vector, slot by
// slot: PRE_POINTS I values, PRE_POINTS Q values, N_ACT action bits.  It is
// registered and changes one clock after commit or clear.  Filtered values
// are saturated to 16 bits (this design's choice).
module history_buffer
  import rl_agent_pkg::*;
#(
  parameter int HIST_DEPTH = 2,
  parameter int PRE_POINTS = 8,
  parameter int BOX        = 4,
  parameter int N_ACT      = 3,
  localparam int SLOT      = 2 * PRE_POINTS + N_ACT,
  localparam int PRE_IN    = HIST_DEPTH * SLOT
)(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  sample_t s,
  input  logic    commit,
  input  action_e commit_action,
  output data_t   x [PRE_IN]
);

  localparam int SC_W = $clog2(PRE_POINTS * BOX);

  typedef logic signed [DATA_W+$clog2(BOX):0] acc_t;

  data_t cur_i [PRE_POINTS], cur_q [PRE_POINTS];
  acc_t  acc_i, acc_q;
  logic [SC_W-1:0] sc;

  data_t slot_in [SLOT];

  function automatic data_t sat(input acc_t v);
    if (v > acc_t'(32767))       return 16'sd32767;
    else if (v < -acc_t'(32768)) return -16'sd32768;
    else                         return data_t'(v);
  endfunction

  // ------------------------------------------------ 32-point boxcar of the
  // current trace
  acc_t  nxt_i, nxt_q;
  logic [SC_W-1:0] sc_now;
  always_comb begin
    sc_now = s.first ? '0 : sc;
    nxt_i  = ((int'(sc_now) % BOX) == 0) ? acc_t'(s.i) : acc_i + acc_t'(s.i);
    nxt_q  = ((int'(sc_now) % BOX) == 0) ? acc_t'(s.q) : acc_q + acc_t'(s.q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc    <= '0;
      acc_i <= '0;
      acc_q <= '0;
      cur_i <= '{default: '0};
      cur_q <= '{default: '0};
    end else if (clear) begin
      sc    <= '0;
      cur_i <= '{default: '0};
      cur_q <= '{default: '0};
    end else if (s.valid) begin
      sc    <= sc_now + 1'b1;
      acc_i <= nxt_i;
      acc_q <= nxt_q;
      if ((int'(sc_now) % BOX) == BOX - 1) begin
        cur_i[int'(sc_now) / BOX] <= sat(nxt_i);
        cur_q[int'(sc_now) / BOX] <= sat(nxt_q);
      end
    end
  end

  // ------------------------------------------------ history shift register
  always_comb begin
    for (int p = 0; p < PRE_POINTS; p++) begin
      slot_in[p]              = cur_i[p];
      slot_in[PRE_POINTS + p] = cur_q[p];
    end
    for (int a = 0; a < N_ACT; a++)
      slot_in[2*PRE_POINTS + a] = (int'(commit_action) == a)
                                  ? data_t'(1 << ACT_FRAC) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '{default: '0};
    end else if (clear) begin
      x <= '{default: '0};
    end else if (commit) begin
      for (int e = 0; e < SLOT; e++) begin
        x[e] <= slot_in[e];
        for (int d = 1; d < HIST_DEPTH; d++)
          x[d*SLOT + e] <= x[(d-1)*SLOT + e];
      end
    end
  end

endmodule
