// episode_recorder -- batch memory of observations and actions for training.
//
// Training runs on a PC: the agent collects a batch of measurements
// (the paper uses 1000 per training step), the PC reads them, computes the
// rewards from the verification measurements and updates the policy.  This
// block stores, for each measurement, the trace exactly as the network saw
// it (the NPTS down-sampled I/Q points) and a status word with the action
// applied after it.  From these the PC can rebuild every network input,
// including the filtered history.
//
// Layout (this design's choice): measurement m occupies words
// m*(NPTS+1) .. m*(NPTS+1)+NPTS of a single-port-write, single-port-read
// memory of 32-bit words.  Word m*(NPTS+1)+p holds {I[15:0], Q[15:0]} of
// point p; word m*(NPTS+1)+NPTS holds rec_status_t (episode number, cycle
// in episode, forced / verify / first flags, action).
//
// Interface: clear starts a new batch.  Each valid point of s is written at
// the current measurement's base plus its index (s.first restarts the index);
// commit writes the status word and advances to the next measurement.
// Once N_RECORD measurements are stored, full is high and further writes are
// ignored.  The host reads with rd_addr; rd_data follows one clock later.
module episode_recorder
  import rl_agent_pkg::*;
#(
  parameter int N_RECORD = 1000,
  parameter int NPTS     = 32,
  localparam int WPM     = NPTS + 1,
  localparam int DEPTH   = N_RECORD * WPM,
  localparam int A_W     = $clog2(DEPTH),
  localparam int C_W     = $clog2(N_RECORD + 1)
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  sample_t          s,
  input  logic             commit,
  input  rec_status_t      status,
  output logic             full,
  output logic [C_W-1:0]   count,
  input  logic [A_W-1:0]   rd_addr,
  output logic [31:0]      rd_data
);

  localparam int P_W = $clog2(NPTS);

  logic [31:0]    mem [DEPTH];
  logic [A_W-1:0] base;
  logic [P_W-1:0] p, p_now;

  assign full  = (count == C_W'(N_RECORD));
  assign p_now = s.first ? '0 : p;

  // point index within the current trace
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       p <= '0;
    else if (clear)   p <= '0;
    else if (s.valid) p <= p_now + 1'b1;
  end

  // measurement counter and base address
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      base  <= '0;
    end else if (clear) begin
      count <= '0;
      base  <= '0;
    end else if (commit && !full) begin
      count <= count + 1'b1;
      base  <= base + A_W'(WPM);
    end
  end

  // memory write port (trace points and status word never coincide: the
  // status is committed after the last point has passed the network)
  always_ff @(posedge clk) begin
    if (!clear && !full) begin
      if (commit)
        mem[base + A_W'(NPTS)] <= status;
      else if (s.valid)
        mem[base + A_W'(p_now)] <= {s.i, s.q};
    end
  end

  // host read port
  always_ff @(posedge clk) rd_data <= mem[rd_addr];

endmodule
