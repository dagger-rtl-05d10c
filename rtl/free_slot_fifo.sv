// Free Slot FIFO of the TX path: the list of request-buffer slots that are not in use.
//
// After reset it fills itself with slot ids 0..ENTRIES-1, one per cycle (out_valid stays low
// until the fill is done). The input controller pops a slot for each incoming RPC and the CCI-P
// transmitter pushes the slot back once the RPC has been written to host memory. Because slots
// are conserved the FIFO can never overflow; an assertion checks this. First-word-fall-through:
// out_slot is the oldest free slot while out_valid is high.
module free_slot_fifo #(
  parameter int ENTRIES = 256,
  localparam int SW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [SW-1:0] out_slot,
  input  logic          in_valid,
  input  logic [SW-1:0] in_slot,
  output logic [SW:0]   count
);
  logic [SW-1:0] mem [ENTRIES];
  logic [SW-1:0] rd_ptr, wr_ptr;
  logic [SW:0]   fill;
  wire           filling = !fill[SW];

  wire pop  = out_valid && out_ready;
  wire push = filling || in_valid;

  assign out_valid = !filling && (count != '0);
  assign out_slot  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fill   <= '0;
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (filling) fill <= fill + 1'b1;
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (SW+1)'(push) - (SW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= filling ? fill[SW-1:0] : in_slot;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  in_valid |-> (!filling && count < ENTRIES));
endmodule
