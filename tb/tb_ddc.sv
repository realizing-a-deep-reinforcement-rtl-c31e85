// tb_ddc -- self-checking test of ddc.
//
// Feeds random 12-bit ADC codes and checks, one clock later, that lane n
// gives I = x*cos(n*pi/2) and Q = x*sin(n*pi/2) and that the valid and first
// flags are delayed by one clock with the data.  A pure 250 MHz tone of
// amplitude A and phase 0 must give I = +A on lanes 0, 2, 4, 6 and Q = 0.
`timescale 1ns/1ps
module tb_ddc;
  import rl_agent_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, in_first = 1'b0;
  logic signed [ADC_W-1:0] adc [LANES];
  logic out_valid, out_first;
  data_t i_out [LANES], q_out [LANES];

  ddc dut (.clk, .rst_n, .in_valid, .in_first, .adc, .out_valid, .out_first,
           .i_out, .q_out);

  int    ei [LANES], eq [LANES];
  logic  ev, ef;
  bit    have = 1'b0;

  const int cosv [4] = '{1, 0, -1, 0};
  const int sinv [4] = '{0, 1, 0, -1};

  always @(posedge clk) begin
    if (have) begin
      checks++;
      if (out_valid !== ev || out_first !== ef) begin
        failures++; $display("flags %b%b exp %b%b", out_valid, out_first, ev, ef); end
      for (int n = 0; n < LANES; n++) begin
        checks++;
        if (int'(i_out[n]) != ei[n] || int'(q_out[n]) != eq[n]) begin
          failures++; $display("lane %0d: I=%0d Q=%0d exp %0d %0d",
                               n, i_out[n], q_out[n], ei[n], eq[n]); end
      end
    end
  end

  initial begin
    for (int n = 0; n < LANES; n++) adc[n] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int n = 0; n < LANES; n++) begin
        if (it < 10) adc[n] = ADC_W'(700 * cosv[n % 4]);   // pure IF tone
        else         adc[n] = ADC_W'($urandom);
      end
      in_valid = $urandom_range(1, 0);
      in_first = $urandom_range(1, 0);
      @(posedge clk);
      #1;
      for (int n = 0; n < LANES; n++) begin
        ei[n] = int'(adc[n]) * cosv[n % 4];
        eq[n] = int'(adc[n]) * sinv[n % 4];
        if (it < 10) begin
          checks++;
          if (ei[n] != ((n % 2 == 0) ? 700 : 0)) begin
            failures++; $display("tone model wrong"); end
        end
      end
      ev = in_valid;
      ef = in_first;
      have = 1'b1;
    end
    @(negedge clk);
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
