// Dagger FPGA top: NUM_NICS Dagger NICs sharing one CCI-P port and one ToR switch model.
//
// This is the arrangement the paper evaluates: several identical NIC instances in the FPGA's
// user region, given fair round-robin access to the CCI-P bus (ccip_arbiter) and connected to
// each other through a switch with a static table (tor_switch). With the default of two NICs the
// switch acts as the loop-back network of the paper's experiments; with eight it is the
// virtualised setup of its microservice experiment. The CCI-P stack, the host-coherent cache,
// the Ethernet PHY and the host itself are outside the FPGA user logic and appear as the CCI-P
// and MMIO ports of this module.
//
// Ports: CCI-P read request/response and write request toward host memory (one line per beat,
// read responses unthrottled), MMIO with a 12-bit address {nic[3:0], register[7:0]}, the switch
// table (IPv4 address per NIC), and per-NIC status (polling mode and packet monitor events).
module dagger_fpga
  import dagger_pkg::*;
#(
  parameter int NUM_NICS  = 2,
  parameter int NUM_FLOWS = 64,
  parameter int N_CONN    = 65536,
  parameter int MAX_BATCH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  // CCI-P
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output ccip_rd_req_t  rd_req,
  input  logic          rd_rsp_valid,
  input  ccip_rd_rsp_t  rd_rsp,
  output logic          wr_req_valid,
  input  logic          wr_req_ready,
  output ccip_wr_req_t  wr_req,
  // MMIO
  input  logic          mmio_wr_valid,
  input  logic [11:0]   mmio_wr_addr,
  input  logic [63:0]   mmio_wr_data,
  input  logic          mmio_rd_valid,
  input  logic [11:0]   mmio_rd_addr,
  output logic          mmio_rd_rsp_valid,
  output logic [63:0]   mmio_rd_rsp_data,
  // switch table
  input  logic [31:0]   switch_ip [NUM_NICS],
  // status
  output logic          poll_direct [NUM_NICS],
  output logic [NUM_EVENTS-1:0] nic_events [NUM_NICS],
  output logic          sw_drop,
  output logic          sw_contend
);
  logic         n_rd_req_valid [NUM_NICS];
  logic         n_rd_req_ready [NUM_NICS];
  ccip_rd_req_t n_rd_req       [NUM_NICS];
  logic         n_rd_rsp_valid [NUM_NICS];
  ccip_rd_rsp_t n_rd_rsp;
  logic         n_wr_req_valid [NUM_NICS];
  logic         n_wr_req_ready [NUM_NICS];
  ccip_wr_req_t n_wr_req       [NUM_NICS];
  logic         n_mmio_wr_valid [NUM_NICS];
  logic [7:0]   n_mmio_wr_addr, n_mmio_rd_addr;
  logic [63:0]  n_mmio_wr_data;
  logic         n_mmio_rd_valid [NUM_NICS];
  logic         n_mmio_rd_rsp_valid [NUM_NICS];
  logic [63:0]  n_mmio_rd_rsp_data  [NUM_NICS];

  logic         tx_valid [NUM_NICS], tx_ready [NUM_NICS];
  net_frame_t   tx_frame [NUM_NICS];
  logic         rx_valid [NUM_NICS], rx_ready [NUM_NICS];
  net_frame_t   rx_frame [NUM_NICS];

  ccip_arbiter #(.NUM_NICS(NUM_NICS)) u_arb (
    .clk, .rst_n,
    .h_rd_req_valid(rd_req_valid), .h_rd_req_ready(rd_req_ready), .h_rd_req(rd_req),
    .h_rd_rsp_valid(rd_rsp_valid), .h_rd_rsp(rd_rsp),
    .h_wr_req_valid(wr_req_valid), .h_wr_req_ready(wr_req_ready), .h_wr_req(wr_req),
    .h_mmio_wr_valid(mmio_wr_valid), .h_mmio_wr_addr(mmio_wr_addr), .h_mmio_wr_data(mmio_wr_data),
    .h_mmio_rd_valid(mmio_rd_valid), .h_mmio_rd_addr(mmio_rd_addr),
    .h_mmio_rd_rsp_valid(mmio_rd_rsp_valid), .h_mmio_rd_rsp_data(mmio_rd_rsp_data),
    .n_rd_req_valid, .n_rd_req_ready, .n_rd_req, .n_rd_rsp_valid, .n_rd_rsp,
    .n_wr_req_valid, .n_wr_req_ready, .n_wr_req,
    .n_mmio_wr_valid, .n_mmio_wr_addr, .n_mmio_wr_data,
    .n_mmio_rd_valid, .n_mmio_rd_addr, .n_mmio_rd_rsp_valid, .n_mmio_rd_rsp_data);

  for (genvar i = 0; i < NUM_NICS; i++) begin : g_nic
    dagger_nic #(.NUM_FLOWS(NUM_FLOWS), .N_CONN(N_CONN), .MAX_BATCH(MAX_BATCH)) u_nic (
      .clk, .rst_n,
      .mmio_wr_valid(n_mmio_wr_valid[i]), .mmio_wr_addr(n_mmio_wr_addr), .mmio_wr_data(n_mmio_wr_data),
      .mmio_rd_valid(n_mmio_rd_valid[i]), .mmio_rd_addr(n_mmio_rd_addr),
      .mmio_rd_rsp_valid(n_mmio_rd_rsp_valid[i]), .mmio_rd_rsp_data(n_mmio_rd_rsp_data[i]),
      .rd_req_valid(n_rd_req_valid[i]), .rd_req_ready(n_rd_req_ready[i]), .rd_req(n_rd_req[i]),
      .rd_rsp_valid(n_rd_rsp_valid[i]), .rd_rsp(n_rd_rsp),
      .wr_req_valid(n_wr_req_valid[i]), .wr_req_ready(n_wr_req_ready[i]), .wr_req(n_wr_req[i]),
      .net_tx_valid(tx_valid[i]), .net_tx_ready(tx_ready[i]), .net_tx_frame(tx_frame[i]),
      .net_rx_valid(rx_valid[i]), .net_rx_ready(rx_ready[i]), .net_rx_frame(rx_frame[i]),
      .poll_direct(poll_direct[i]), .events(nic_events[i]));
  end

  tor_switch #(.NUM_PORTS(NUM_NICS)) u_sw (
    .clk, .rst_n, .table_ip(switch_ip),
    .in_valid(tx_valid), .in_ready(tx_ready), .in_frame(tx_frame),
    .out_valid(rx_valid), .out_ready(rx_ready), .out_frame(rx_frame),
    .ev_drop(sw_drop), .ev_contend(sw_contend));
endmodule
