// Packet Monitor: statistics counters of the NIC.
//
// One saturating CNT_W-bit counter per event line (see EV_* in dagger_pkg): RPCs fetched from and
// delivered to the host, frames sent, received and dropped, connection-cache misses, input stalls
// of the TX path and polling-mode switches. Each event input is a one-cycle pulse; the counter
// increments at the next clock edge. clear zeroes all counters. The paper names the block and says
// it collects networking statistics; the counter set and the saturating behaviour are this
// design's own. Counters are read over MMIO through soft_config.
module packet_monitor
  import dagger_pkg::*;
#(
  parameter int NUM_EV = NUM_EVENTS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [NUM_EV-1:0] events,
  output logic [CNT_W-1:0] counters [NUM_EV]
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < NUM_EV; i++) begin
      if (!rst_n || clear)                    counters[i] <= '0;
      else if (events[i] && ~&counters[i])    counters[i] <= counters[i] + 1'b1;
    end
  end
endmodule
