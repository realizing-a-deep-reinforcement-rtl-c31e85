// ddc -- digital down-conversion of the readout signal to I and Q.
//
// The readout signal reaches the ADC on a 250 MHz intermediate frequency and
// is sampled every 1 ns, i.e. eight samples per 8 ns clock.  At 1 GS/s the
// 250 MHz local oscillator has exactly four samples per period, so its cosine
// is +1, 0, -1, 0 and its sine 0, +1, 0, -1, and because eight samples make
// two whole periods, lane n of every clock always sees the same oscillator
// phase n*pi/2.  Mixing therefore reduces to a per-lane sign or zero:
//     I_n = x_n * cos(n*pi/2),  Q_n = x_n * sin(n*pi/2).
// The 2*IF image that this mixing leaves is removed by the following
// eight-point boxcar, which spans four of its periods.
//
// The paper states that the FPGA receives the IF signal and that the network
// consumes I and Q quadratures, but not how it demodulates; this simplest
// mixer is this design's choice.  The I/Q phase reference is lane 0 of the
// clock.  Latency: one clock; in_valid/in_first travel with the data.
module ddc
  import rl_agent_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic signed [ADC_W-1:0] adc [LANES],
  output logic                    out_valid,
  output logic                    out_first,
  output data_t                   i_out [LANES],
  output data_t                   q_out [LANES]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      i_out     <= '{default: '0};
      q_out     <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      for (int n = 0; n < LANES; n++) begin
        unique case (n % 4)
          0: begin i_out[n] <=  data_t'(adc[n]); q_out[n] <= '0;              end
          1: begin i_out[n] <= '0;              q_out[n] <=  data_t'(adc[n]); end
          2: begin i_out[n] <= -data_t'(adc[n]); q_out[n] <= '0;              end
          default: begin i_out[n] <= '0;        q_out[n] <= -data_t'(adc[n]); end
        endcase
      end
    end
  end

endmodule
