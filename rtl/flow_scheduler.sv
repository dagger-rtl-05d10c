// Flow Scheduler of the TX path.
//
// A flow is eligible when its flow FIFO holds at least `batch` slot ids (a full CCI-P batch) and
// the CCI-P transmitter reports room for a batch in that flow's host RX ring (credit_ok). Among
// eligible flows below num_flows, the scheduler grants the first one at or after a round-robin
// pointer, which then moves past the granted flow. The paper says only that the scheduler "picks a
// Flow FIFO that already contains enough requests to form a transmission batch"; round-robin
// order is this design's choice. There is no timeout: a partly filled batch waits, which is the
// latency cost of batching at low load that the paper reports.
// Timing: grant_valid/grant_flow are combinational from the inputs; the pointer moves on the edge
// where grant_valid and grant_ready are both high.
module flow_scheduler
  import dagger_pkg::*;
#(
  parameter int NUM_FLOWS = 64,
  parameter int CW        = 4,
  localparam int FW       = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [CW-1:0]      count [NUM_FLOWS],
  input  logic [NUM_FLOWS-1:0] credit_ok,
  input  logic [BATCH_W-1:0] batch,
  input  logic [FLOW_W:0]    num_flows,
  input  logic               enable,
  output logic               grant_valid,
  input  logic               grant_ready,
  output logic [FW-1:0]      grant_flow
);
  logic [FW-1:0]        rr;
  logic [NUM_FLOWS-1:0] elig;

  always_comb begin
    for (int f = 0; f < NUM_FLOWS; f++)
      elig[f] = enable && (f < int'(num_flows)) && credit_ok[f] &&
                (32'(count[f]) >= 32'(batch)) && (batch != '0);
  end

  // first eligible flow at or above rr, else the first eligible flow overall
  always_comb begin
    logic found_hi, found_lo;
    logic [FW-1:0] hi, lo;
    found_hi = 1'b0; found_lo = 1'b0; hi = '0; lo = '0;
    for (int f = NUM_FLOWS - 1; f >= 0; f--) begin
      if (elig[f]) begin
        found_lo = 1'b1; lo = FW'(f);
        if (FW'(f) >= rr) begin found_hi = 1'b1; hi = FW'(f); end
      end
    end
    grant_valid = found_lo;
    grant_flow  = found_hi ? hi : lo;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rr <= '0;
    else if (grant_valid && grant_ready) rr <= grant_flow + 1'b1;
  end
endmodule
