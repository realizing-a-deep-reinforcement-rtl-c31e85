// gumbel_sampler -- Gumbel noise for sampling an action from the policy.
//
// The output layer of the policy network produces one logit per action.
// Drawing an action with probability softmax(logits) is the same as taking
// argmax(logit_j + g_j) with independent Gumbel variables g_j (Gumbel-max
// trick, as the paper does).  Here the noise is added to the output-layer
// biases, which enter the adder tree anyway, and the argmax is taken in the
// layer's last cycle, so sampling costs no clock.
//
// How it works (this design's choice; the paper names only the trick): each
// action has its own 32-bit Galois LFSR (polynomial x^32+x^22+x^2+x+1,
// different seeds), stepped every clock.  Its low 8 bits u index a 256-entry
// table of g(u) = -ln(-ln((u + 0.5)/256)), stored as 16-bit values with 8
// fractional bits (range -1.83 .. +6.24), read from gumbel_lut.hex.  The
// noise output is registered; with en low it is zero (greedy policy).
module gumbel_sampler
  import rl_agent_pkg::*;
#(
  parameter int          N_OUT = 3,
  parameter logic [31:0] SEED  = 32'h1234_5678
)(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  output data_t noise [N_OUT]
);

  logic [DATA_W-1:0] lut [256];
  logic [31:0]       lfsr [N_OUT];

  initial $readmemh("rtl/gumbel_lut.hex", lut);

  function automatic logic [31:0] lfsr_step(input logic [31:0] v);
    return v[0] ? ((v >> 1) ^ 32'h8020_0003) : (v >> 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_OUT; j++)
        lfsr[j] <= SEED ^ (32'h9E37_79B9 * 32'(j + 1));
      noise <= '{default: '0};
    end else begin
      for (int j = 0; j < N_OUT; j++) begin
        lfsr[j]  <= lfsr_step(lfsr[j]);
        noise[j] <= en ? data_t'(lut[lfsr[j][7:0]]) : '0;
      end
    end
  end

endmodule
