// tb_episode_recorder -- self-checking test of episode_recorder.
//
// A recorder for 5 measurements of 32 points receives 7 traces (with gaps)
// and status commits.  The first 5 must be read back word for word through
// the host port ({I,Q} per point, then the status word), count must follow
// the commits, full must rise after the 5th, and the 6th and 7th traces must
// not overwrite anything.  clear must restart the batch at address 0.
`timescale 1ns/1ps
module tb_episode_recorder;
  import rl_agent_pkg::*;

  localparam int NR = 5, NPTS = 32, WPM = NPTS + 1;
  localparam int A_W = $clog2(NR * WPM), C_W = $clog2(NR + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic        clear = 1'b0, commit = 1'b0, full;
  sample_t     s;
  rec_status_t status;
  logic [C_W-1:0] count;
  logic [A_W-1:0] rd_addr;
  logic [31:0]    rd_data;

  episode_recorder #(.N_RECORD(NR), .NPTS(NPTS)) dut (
    .clk, .rst_n, .clear, .s, .commit, .status, .full, .count, .rd_addr, .rd_data);

  logic [31:0] model [NR * WPM];

  task automatic send_trace(int m, bit store);
    rec_status_t st;
    for (int p = 0; p < NPTS; p++) begin
      logic [15:0] vi, vq;
      vi = 16'($urandom);
      vq = 16'($urandom);
      @(negedge clk);
      s = '{valid: 1'b1, first: (p == 0), i: vi, q: vq};
      if (store) model[m * WPM + p] = {vi, vq};
      if (p % 7 == 3) begin @(negedge clk); s = '0; end
    end
    @(negedge clk);
    s = '0;
    repeat (4) @(negedge clk);
    st = '{episode: 16'(m / 2), cycle: 11'(m % 2), forced: 1'b0, verify: m[0],
           first: !m[0], action: action_e'(m % 3)};
    status = st;
    commit = 1'b1;
    if (store) model[m * WPM + NPTS] = st;
    @(negedge clk);
    commit = 1'b0;
  endtask

  task automatic read_all(string what);
    for (int a = 0; a < NR * WPM; a++) begin
      @(negedge clk);
      rd_addr = A_W'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin
        failures++; $display("%s: word %0d = %h exp %h", what, a, rd_data, model[a]); end
    end
  endtask

  initial begin
    s = '0;
    status = '0;
    rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int m = 0; m < NR + 2; m++) begin
      send_trace(m, m < NR);
      checks++;
      if (int'(count) != ((m + 1 < NR) ? m + 1 : NR)) begin
        failures++; $display("count %0d after %0d commits", count, m + 1); end
      checks++;
      if (full !== (m + 1 >= NR)) begin
        failures++; $display("full=%b after %0d commits", full, m + 1); end
    end
    read_all("batch");
    // new batch overwrites from address 0
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    checks++;
    if (count != 0 || full) begin failures++; $display("clear failed"); end
    send_trace(0, 1'b1);
    read_all("second batch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
