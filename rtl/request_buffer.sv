// Request buffer of the TX path: a table of RPC objects indexed by slot_id.
//
// Rather than keeping 64-byte RPCs in one FIFO per flow, the TX path stores each incoming RPC once
// in this table and moves only its slot_id through the flow FIFOs, as the paper describes (the
// green table of its TX-path figure). The paper sizes the table at B * N_flows entries. One write
// port (input controller) and one read port (CCI-P transmitter). The read is registered: rd_data
// holds the entry addressed in the last cycle rd_en was high, and keeps it while rd_en is low.
module request_buffer
  import dagger_pkg::*;
#(
  parameter int ENTRIES = 256,
  localparam int SW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [SW-1:0] wr_slot,
  input  rpc_obj_t      wr_data,
  input  logic          rd_en,
  input  logic [SW-1:0] rd_slot,
  output rpc_obj_t      rd_data
);
  rpc_obj_t mem [ENTRIES];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot] <= wr_data;
    if (rd_en) rd_data <= mem[rd_slot];
  end
endmodule
