// param_bank -- the host-writable weights and biases of one dense layer.
//
// The policy parameters theta are computed on a PC and written into the
// agent between training steps.  All weights of a layer are read in
// parallel by its multipliers, so they are held in registers, not in a RAM.
//
// Address map (this design's choice, the paper does not describe the
// transfer): word BASE + j*N + k holds weight w_jk, word BASE + M*N + j holds
// bias b_j.  A write with wr.en high and an address outside
// [BASE, BASE + M*N + M) is ignored, so all banks of the network share one
// write bus.  Writes take effect one clock after they are presented.  Reset
// clears all parameters to zero.
module param_bank
  import rl_agent_pkg::*;
#(
  parameter int N    = 20,
  parameter int M    = 12,
  parameter int BASE = 0
)(
  input  logic      clk,
  input  logic      rst_n,
  input  param_wr_t wr,
  output weight_t   w [M][N],
  output data_t     b [M]
);

  localparam int WORDS = M * N + M;

  logic [PARAM_ADDR_W:0] off;
  logic                  hit;

  assign off = {1'b0, wr.addr} - (PARAM_ADDR_W+1)'(BASE);
  assign hit = wr.en && ({1'b0, wr.addr} >= (PARAM_ADDR_W+1)'(BASE))
                     && (off < (PARAM_ADDR_W+1)'(WORDS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w <= '{default: '0};
      b <= '{default: '0};
    end else if (hit) begin
      for (int j = 0; j < M; j++) begin
        for (int k = 0; k < N; k++)
          if (off == (PARAM_ADDR_W+1)'(j * N + k)) w[j][k] <= wr.data;
        if (off == (PARAM_ADDR_W+1)'(M * N + j)) b[j] <= wr.data;
      end
    end
  end

endmodule
