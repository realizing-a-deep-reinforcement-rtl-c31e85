// boxcar_downsampler -- eight-point boxcar filter and down-sampling to 8 ns.
//
// The network is fed one I and one Q point per 8 ns clock.  Each point is
// the sum of the eight 1 ns samples of that clock (an eight-point boxcar,
// evaluated once per clock, i.e. down-sampled by eight).  The sum is not
// divided by eight; the factor is absorbed into the first-layer weights.
//
// Timing (follows the paper): the filter adds 16 ns, i.e. two clocks.  The
// first clock adds pairs of pairs ((a+b)+(c+d), two adder levels, as in the
// dense layers); the second clock adds the two partial sums.  The valid and
// first flags travel with the data.  With 12-bit ADC codes the sum of the
// four non-zero lanes of a quadrature always fits the 16-bit output; larger
// sums are saturated.
module boxcar_downsampler
  import rl_agent_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    in_first,
  input  data_t   i_in [LANES],
  input  data_t   q_in [LANES],
  output sample_t out
);

  typedef logic signed [DATA_W+2:0] wide_t;

  wide_t i_part [2], q_part [2];
  logic  v1, f1;

  function automatic wide_t sum4(input data_t a, input data_t b,
                                 input data_t c, input data_t d);
    return (wide_t'(a) + wide_t'(b)) + (wide_t'(c) + wide_t'(d));
  endfunction

  function automatic data_t sat(input wide_t v);
    if (v > wide_t'(32767))       return 16'sd32767;
    else if (v < -wide_t'(32768)) return -16'sd32768;
    else                          return data_t'(v);
  endfunction

  // clock 1: two 4-input partial sums per quadrature
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      f1     <= 1'b0;
      i_part <= '{default: '0};
      q_part <= '{default: '0};
    end else begin
      v1 <= in_valid;
      f1 <= in_first;
      for (int h = 0; h < 2; h++) begin
        i_part[h] <= sum4(i_in[4*h], i_in[4*h+1], i_in[4*h+2], i_in[4*h+3]);
        q_part[h] <= sum4(q_in[4*h], q_in[4*h+1], q_in[4*h+2], q_in[4*h+3]);
      end
    end
  end

  // clock 2: final add
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out <= '0;
    end else begin
      out.valid <= v1;
      out.first <= f1;
      out.i     <= sat(i_part[0] + i_part[1]);
      out.q     <= sat(q_part[0] + q_part[1]);
    end
  end

endmodule
