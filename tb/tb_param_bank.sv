// tb_param_bank -- self-checking test of param_bank.
//
// Two banks share one write bus, as the layers of the network do: bank A
// (N = 5, M = 3) at base 100 and bank B (N = 20, M = 12, the low-latency
// layer shape) directly behind it at 118.  Random words are written to
// every address from 90 to 400 in random order, then each weight and bias is
// compared with a model of the address map w_jk @ BASE + j*N + k,
// b_j @ BASE + M*N + j.  Writes outside a bank must not change it.
`timescale 1ns/1ps
module tb_param_bank;
  import rl_agent_pkg::*;

  localparam int NA = 5,  MA = 3,  BA = 100;
  localparam int NB = 20, MB = 12, BB = BA + NA * MA + MA;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  param_wr_t wr;
  weight_t wa [MA][NA];
  data_t   ba [MA];
  weight_t wb [MB][NB];
  data_t   bb [MB];

  param_bank #(.N(NA), .M(MA), .BASE(BA)) dut_a (.clk, .rst_n, .wr, .w(wa), .b(ba));
  param_bank #(.N(NB), .M(MB), .BASE(BB)) dut_b (.clk, .rst_n, .wr, .w(wb), .b(bb));

  logic [15:0] model [int];

  task automatic check_all();
    for (int j = 0; j < MA; j++) begin
      for (int k = 0; k < NA; k++) begin
        checks++;
        if (wa[j][k] !== data_t'(model.exists(BA + j*NA + k) ? model[BA + j*NA + k] : 0)) begin
          failures++; $display("A w[%0d][%0d]=%0d", j, k, wa[j][k]); end
      end
      checks++;
      if (ba[j] !== data_t'(model.exists(BA + MA*NA + j) ? model[BA + MA*NA + j] : 0)) begin
        failures++; $display("A b[%0d]=%0d", j, ba[j]); end
    end
    for (int j = 0; j < MB; j++) begin
      for (int k = 0; k < NB; k++) begin
        checks++;
        if (wb[j][k] !== data_t'(model.exists(BB + j*NB + k) ? model[BB + j*NB + k] : 0)) begin
          failures++; $display("B w[%0d][%0d]=%0d", j, k, wb[j][k]); end
      end
      checks++;
      if (bb[j] !== data_t'(model.exists(BB + MB*NB + j) ? model[BB + MB*NB + j] : 0)) begin
        failures++; $display("B b[%0d]=%0d", j, bb[j]); end
    end
  endtask

  initial begin
    int addrs [$];
    wr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_all();                       // reset value is zero
    for (int a = 90; a <= 400; a++) addrs.push_back(a);
    addrs.shuffle();
    foreach (addrs[i]) begin
      logic [15:0] d;
      d = 16'($urandom);
      @(negedge clk);
      wr = '{en: 1'b1, addr: 16'(addrs[i]), data: d};
      if ((addrs[i] >= BA && addrs[i] < BA + NA*MA + MA) ||
          (addrs[i] >= BB && addrs[i] < BB + NB*MB + MB))
        model[addrs[i]] = d;
    end
    // a write with en low must be ignored
    @(negedge clk);
    wr = '{en: 1'b0, addr: 16'(BA), data: 16'hDEAD};
    @(negedge clk);
    wr = '0;
    @(negedge clk);
    check_all();
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
