// Flow FIFOs: one FIFO of request-buffer slot ids per NIC flow.
//
// Each host RX ring has a dedicated flow FIFO on the NIC (paper, TX path). All NUM_FLOWS FIFOs
// share one memory of NUM_FLOWS*DEPTH entries; flow f uses the block starting at f*DEPTH with its
// own read pointer, write pointer and occupancy counter. One push (load balancer / input
// controller) and one pop (CCI-P transmitter) per cycle, to any flows. The occupancy of every
// flow is an output, which the flow scheduler uses to find a flow with a full batch. pop_slot is
// the head of pop_flow, read combinationally. Pushing to a full flow or popping an empty one is
// an error that the assertions flag; the caller checks count first.
module flow_fifos #(
  parameter int NUM_FLOWS = 64,
  parameter int DEPTH     = 8,
  parameter int SW        = 8,
  localparam int FW       = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1,
  localparam int PW       = $clog2(DEPTH),
  localparam int CW       = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [FW-1:0] push_flow,
  input  logic [SW-1:0] push_slot,
  input  logic          pop,
  input  logic [FW-1:0] pop_flow,
  output logic [SW-1:0] pop_slot,
  output logic [CW-1:0] count [NUM_FLOWS]
);
  logic [SW-1:0] mem [NUM_FLOWS*DEPTH];
  logic [PW-1:0] rd_ptr [NUM_FLOWS];
  logic [PW-1:0] wr_ptr [NUM_FLOWS];

  function automatic int unsigned addr(input logic [FW-1:0] f, input logic [PW-1:0] p);
    return int'(f) * DEPTH + int'(p);
  endfunction

  assign pop_slot = mem[addr(pop_flow, rd_ptr[pop_flow])];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int f = 0; f < NUM_FLOWS; f++) begin
        rd_ptr[f] <= '0;
        wr_ptr[f] <= '0;
        count[f]  <= '0;
      end
    end else begin
      for (int f = 0; f < NUM_FLOWS; f++) begin
        if (push && push_flow == FW'(f)) wr_ptr[f] <= wr_ptr[f] + 1'b1;
        if (pop  && pop_flow  == FW'(f)) rd_ptr[f] <= rd_ptr[f] + 1'b1;
        count[f] <= count[f] + CW'(push && push_flow == FW'(f)) - CW'(pop && pop_flow == FW'(f));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[addr(push_flow, wr_ptr[push_flow])] <= push_slot;
  end

  a_push_not_full: assert property (@(posedge clk) disable iff (!rst_n)
                                    push |-> (32'(count[push_flow]) < DEPTH));
  a_pop_not_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                    pop |-> (count[pop_flow] != '0));
endmodule
