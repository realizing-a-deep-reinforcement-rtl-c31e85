// dense_layer -- one fully connected layer, all M output neurons in parallel.
//
// y_j = f( sum_k w_jk * x_k + b_j ),  j = 0..M-1, k = 0..N-1
//
// How it works (follows the paper's dense-layer scheme):
//   cycle 1      all N products w_jk*x_k are formed and registered, the bias
//                is aligned to the product scale and registered with them;
//   cycle 2..S   each cycle performs two levels of pairwise additions, so the
//                number of summands shrinks by 4 per cycle;
//   cycle S+1    the last two adder levels and the activation f.
// The latency is therefore 1 + ceil(log4(N+1)) clocks (4 clocks = 32 ns for
// the paper's N = 20).  The layer is fully pipelined: a new input vector may
// be presented every clock.
//
// RELU = 1 gives the hidden-layer ReLU.  RELU = 0 is the output layer: the
// outputs are the linear logits and y_argmax is the index of the largest
// full-precision sum (lowest index on a tie), computed in the same last
// cycle, so that action selection adds no clock.
//
// Interface: x is sampled when in_valid is high; out_valid pulses LAT = 1 + S clocks
// later and y / y_argmax hold their value until the next result.
// Fixed point (this design's choice): x, b and y carry ACT_FRAC fractional
// bits, w carries W_FRAC; y = sat16(sum >>> W_FRAC).  The order in which the
// summands are paired differs from the paper's figure (which adds the bias
// late); the cycle count is the same.
module dense_layer
  import rl_agent_pkg::*;
#(
  parameter int N    = 20,
  parameter int M    = 12,
  parameter bit RELU = 1'b1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  data_t         x        [N],
  input  weight_t       w        [M][N],
  input  data_t         b        [M],
  output logic          out_valid,
  output data_t         y        [M],
  output logic [$clog2(M > 1 ? M : 2)-1:0] y_argmax
);

  localparam int T     = N + 1;                 // summands incl. bias
  localparam int S     = clog4(T);              // summation cycles
  localparam int ACC_W = DATA_W + W_W + $clog2(T) + 1;
  localparam int IDX_W = $clog2(M > 1 ? M : 2);

  typedef logic signed [ACC_W-1:0] acc_t;

  logic [S-1:0] vpipe;

  function automatic acc_t sum4(input acc_t v [T], input int base);
    acc_t t0, t1, t2, t3;
    t0 = (base     < T) ? v[base]     : '0;
    t1 = (base + 1 < T) ? v[base + 1] : '0;
    t2 = (base + 2 < T) ? v[base + 2] : '0;
    t3 = (base + 3 < T) ? v[base + 3] : '0;
    return (t0 + t1) + (t2 + t3);
  endfunction

  // g_st[0].v: products and aligned bias (cycle 1)
  // g_st[s].v: partial sums of up to 4^s summands (cycles 2..S)
  for (genvar s = 0; s < S; s++) begin : g_st
    acc_t v [M][T];
    if (s == 0) begin : g_mul
      always_ff @(posedge clk) begin
        for (int j = 0; j < M; j++) begin
          for (int k = 0; k < N; k++)
            v[j][k] <= acc_t'(x[k]) * acc_t'(w[j][k]);
          v[j][N] <= acc_t'(b[j]) <<< W_FRAC;
        end
      end
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int j = 0; j < M; j++)
          for (int i = 0; i < T; i++)
            v[j][i] <= sum4(g_st[s-1].v[j], 4 * i);
      end
    end
  end

  // -------- last cycle: final two adder levels + activation
  acc_t  total [M];
  data_t act   [M];
  logic [IDX_W-1:0] amax;

  always_comb begin
    for (int j = 0; j < M; j++) begin
      total[j] = sum4(g_st[S-1].v[j], 0);
      if (RELU && total[j] < 0)
        act[j] = '0;
      else if ((total[j] >>> W_FRAC) > acc_t'(32767))
        act[j] = 16'sd32767;
      else if ((total[j] >>> W_FRAC) < -acc_t'(32768))
        act[j] = -16'sd32768;
      else
        act[j] = data_t'(total[j] >>> W_FRAC);
    end
    amax = '0;
    for (int j = 1; j < M; j++)
      if (total[j] > total[amax]) amax = IDX_W'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y        <= '{default: '0};
      y_argmax <= '0;
    end else if (vpipe[S-1]) begin
      y        <= act;
      y_argmax <= amax;
    end
  end

  // -------- valid pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= S'({vpipe, in_valid});
  end

  // vpipe[S-1] is high in the last compute cycle; the result is visible
  // one clock later, LAT clocks after in_valid.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vpipe[S-1];
  end

endmodule
