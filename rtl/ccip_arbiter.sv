// CCI-P arbiter: shares one CCI-P port among NUM_NICS NIC instances (the paper's PCIe/UPI arbiter).
//
// Read and write request channels are each granted round-robin: among the NICs with a pending
// request, the first one after the last NIC granted on that channel wins, so every NIC gets a fair
// share of the bus, as the paper describes for its two-NIC and eight-NIC setups. The winner's
// index is stamped into tag.nic of read requests, and read responses are routed back to the NIC
// named by that field. MMIO accesses carry the NIC index in address bits [11:8] and the register
// index in [7:0]; a read response is returned from the NIC that was addressed (one MMIO read in
// flight at a time). Request channels are combinational pass-throughs of the winner; nothing is
// buffered here. The tag's NIC field is NIC_W = 3 bits wide, so at most 8 NICs share the port,
// which covers the paper's largest setup (eight virtualized NICs).
module ccip_arbiter
  import dagger_pkg::*;
#(
  parameter int NUM_NICS = 2,
  localparam int NW      = (NUM_NICS > 1) ? $clog2(NUM_NICS) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  // host side
  output logic         h_rd_req_valid,
  input  logic         h_rd_req_ready,
  output ccip_rd_req_t h_rd_req,
  input  logic         h_rd_rsp_valid,
  input  ccip_rd_rsp_t h_rd_rsp,
  output logic         h_wr_req_valid,
  input  logic         h_wr_req_ready,
  output ccip_wr_req_t h_wr_req,
  input  logic         h_mmio_wr_valid,
  input  logic [11:0]  h_mmio_wr_addr,
  input  logic [63:0]  h_mmio_wr_data,
  input  logic         h_mmio_rd_valid,
  input  logic [11:0]  h_mmio_rd_addr,
  output logic         h_mmio_rd_rsp_valid,
  output logic [63:0]  h_mmio_rd_rsp_data,
  // NIC side
  input  logic         n_rd_req_valid [NUM_NICS],
  output logic         n_rd_req_ready [NUM_NICS],
  input  ccip_rd_req_t n_rd_req       [NUM_NICS],
  output logic         n_rd_rsp_valid [NUM_NICS],
  output ccip_rd_rsp_t n_rd_rsp,
  input  logic         n_wr_req_valid [NUM_NICS],
  output logic         n_wr_req_ready [NUM_NICS],
  input  ccip_wr_req_t n_wr_req       [NUM_NICS],
  output logic         n_mmio_wr_valid [NUM_NICS],
  output logic [7:0]   n_mmio_wr_addr,
  output logic [63:0]  n_mmio_wr_data,
  output logic         n_mmio_rd_valid [NUM_NICS],
  output logic [7:0]   n_mmio_rd_addr,
  input  logic         n_mmio_rd_rsp_valid [NUM_NICS],
  input  logic [63:0]  n_mmio_rd_rsp_data  [NUM_NICS]
);
  logic [NW-1:0] rd_last, wr_last, rd_win, wr_win;
  logic          rd_any, wr_any;

  // round-robin pick: first requester after `last`
  function automatic logic [NW:0] rr_pick(input logic req [NUM_NICS], input logic [NW-1:0] last);
    logic [NW:0] r;
    r = '0;
    // scanning downwards leaves the nearest requester after `last` in r
    for (int k = NUM_NICS; k >= 1; k--)
      if (req[(int'(last) + k) % NUM_NICS]) r = {1'b1, NW'((int'(last) + k) % NUM_NICS)};
    return r;
  endfunction

  assign {rd_any, rd_win} = rr_pick(n_rd_req_valid, rd_last);
  assign {wr_any, wr_win} = rr_pick(n_wr_req_valid, wr_last);

  always_comb begin
    h_rd_req_valid = rd_any;
    h_rd_req       = n_rd_req[rd_win];
    h_rd_req.tag.nic = NIC_W'(rd_win);
    h_wr_req_valid = wr_any;
    h_wr_req       = n_wr_req[wr_win];
    for (int i = 0; i < NUM_NICS; i++) begin
      n_rd_req_ready[i] = h_rd_req_ready && rd_any && (rd_win == NW'(i));
      n_wr_req_ready[i] = h_wr_req_ready && wr_any && (wr_win == NW'(i));
      n_rd_rsp_valid[i] = h_rd_rsp_valid && (h_rd_rsp.tag.nic == NIC_W'(i));
      n_mmio_wr_valid[i] = h_mmio_wr_valid && (h_mmio_wr_addr[11:8] == 4'(i));
      n_mmio_rd_valid[i] = h_mmio_rd_valid && (h_mmio_rd_addr[11:8] == 4'(i));
    end
  end
  assign n_rd_rsp       = h_rd_rsp;
  assign n_mmio_wr_addr = h_mmio_wr_addr[7:0];
  assign n_mmio_wr_data = h_mmio_wr_data;
  assign n_mmio_rd_addr = h_mmio_rd_addr[7:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_last <= NW'(NUM_NICS - 1);
      wr_last <= NW'(NUM_NICS - 1);
    end else begin
      if (h_rd_req_valid && h_rd_req_ready) rd_last <= rd_win;
      if (h_wr_req_valid && h_wr_req_ready) wr_last <= wr_win;
    end
  end

  always_comb begin
    h_mmio_rd_rsp_valid = 1'b0;
    h_mmio_rd_rsp_data  = '0;
    for (int i = 0; i < NUM_NICS; i++)
      if (n_mmio_rd_rsp_valid[i]) begin
        h_mmio_rd_rsp_valid = 1'b1;
        h_mmio_rd_rsp_data  = n_mmio_rd_rsp_data[i];
      end
  end
  if (NUM_NICS > (1 << NIC_W)) begin : g_nic_limit
    $error("NUM_NICS exceeds the tag's NIC field");
  end
endmodule
