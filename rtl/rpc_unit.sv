// RPC unit: the middle stage of the Dagger RPC pipeline (paper's RPC-unit zoom-in).
//
// Outgoing direction (host to network): an RPC object from the CPU-NIC interface presents its
// connection id to connection-manager port A. One cycle later the destination credentials are
// back; the serializer joins them with the object and the packet goes to the transport. RPCs of
// connections that are not cached are dropped and reported (ev_miss).
//
// Incoming direction (network to host): a payload from the transport is checked by the
// deserializer (bad ones are dropped, ev_bad) and presents its connection id to port B. One cycle
// later src_flow and the load-balancer choice are back and the load balancer picks the flow; the
// object and flow go to the TX path. Misses are dropped (ev_miss).
//
// Each direction has one pipeline register holding the RPC while the connection table is read.
// While that register is stalled the table is re-read with the held connection id, so the lookup
// result always matches the held RPC. The paper's Protocol block is idle (it forwards all
// packets), so the serializer feeds the transport directly. The connection manager is outside
// this module because the NIC's command path shares it.
module rpc_unit
  import dagger_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [FLOW_W:0]      num_flows,
  // outgoing: from the CPU-NIC interface
  input  logic                 host_valid,
  output logic                 host_ready,
  input  rpc_obj_t             host_rpc,
  // outgoing: to the transport
  output logic                 net_tx_valid,
  input  logic                 net_tx_ready,
  output ser_pkt_t             net_tx_pkt,
  // incoming: from the transport
  input  logic                 net_rx_valid,
  output logic                 net_rx_ready,
  input  rpc_obj_t             net_rx_payload,
  // incoming: to the TX path
  output logic                 nic_rx_valid,
  input  logic                 nic_rx_ready,
  output rpc_obj_t             nic_rx_rpc,
  output logic [FLOW_W-1:0]    nic_rx_flow,
  // connection manager port A (outgoing) and B (incoming)
  output logic [CONN_ID_W-1:0] cm_a_conn_id,
  input  logic                 cm_a_hit,
  input  net_addr_t            cm_a_dest,
  output logic [CONN_ID_W-1:0] cm_b_conn_id,
  input  logic                 cm_b_hit,
  input  logic [FLOW_W-1:0]    cm_b_src_flow,
  input  lb_e                  cm_b_lb,
  // events
  output logic                 ev_miss,
  output logic                 ev_bad
);
  // ------------------------------------------------------------ outgoing
  logic     o_valid;
  rpc_obj_t o_rpc;
  logic     ser_err;
  wire      o_adv = o_valid && (!cm_a_hit || net_tx_ready);
  assign host_ready   = !o_valid || o_adv;
  assign cm_a_conn_id = (o_valid && !o_adv) ? o_rpc.hdr.conn_id : host_rpc.hdr.conn_id;

  serializer u_ser (.rpc(o_rpc), .dest(cm_a_dest), .pkt(net_tx_pkt), .err(ser_err));
  assign net_tx_valid = o_valid && cm_a_hit;

  always_ff @(posedge clk) begin
    if (!rst_n) o_valid <= 1'b0;
    else if (host_ready) o_valid <= host_valid;
    if (host_ready && host_valid) o_rpc <= host_rpc;
  end

  // ------------------------------------------------------------ incoming
  rpc_obj_t             d_rpc;
  logic [CONN_ID_W-1:0] d_conn;
  logic                 d_ok;
  deserializer u_des (.payload(net_rx_payload), .rpc(d_rpc), .conn_id(d_conn), .ok(d_ok));

  logic     i_valid;
  rpc_obj_t i_rpc;
  wire      i_adv = i_valid && (!cm_b_hit || nic_rx_ready);
  assign net_rx_ready = !i_valid || i_adv;
  assign cm_b_conn_id = (i_valid && !i_adv) ? i_rpc.hdr.conn_id : d_conn;

  always_ff @(posedge clk) begin
    if (!rst_n) i_valid <= 1'b0;
    else if (net_rx_ready) i_valid <= net_rx_valid && d_ok;
    if (net_rx_ready && net_rx_valid) i_rpc <= d_rpc;
  end

  assign nic_rx_valid = i_valid && cm_b_hit;
  assign nic_rx_rpc   = i_rpc;

  load_balancer u_lb (
    .clk, .rst_n, .fire(nic_rx_valid && nic_rx_ready),
    .hdr(i_rpc.hdr), .args(i_rpc.args), .src_flow(cm_b_src_flow), .lb(cm_b_lb),
    .num_flows, .flow(nic_rx_flow));

  assign ev_miss = (o_valid && !cm_a_hit) || (i_valid && !cm_b_hit);
  assign ev_bad  = (net_rx_valid && net_rx_ready && !d_ok) || (o_valid && cm_a_hit && net_tx_ready && ser_err);
endmodule
