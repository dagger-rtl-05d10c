// One Dagger NIC: the full RPC pipeline between host memory and the network.
//
// Host to network: rx_fsm polls the per-flow TX buffers in host memory over CCI-P and hands new
// RPC objects to the RPC unit, which looks up the destination in the connection manager and
// serializes them; the transport frames them as UDP/IPv4 and sends them out.
// Network to host: the transport checks received frames, the RPC unit deserializes them, looks up
// the connection and lets the load balancer choose a flow, and the TX path (request buffer, flow
// FIFOs, flow scheduler, CCI-P transmitter) writes them in batches into the host RX buffers.
// soft_config holds the run-time registers and drives connection open/close/query commands into
// the connection manager's write port and third read port; the packet monitor counts events.
// Synchronous FIFOs decouple the three pipeline stages as in the paper's top-level figure.
//
// The NIC's CCI-P read channel is shared by rx_fsm (TX-buffer polls) and the transmitter (RX-free
// polls), the write channel by the transmitter (RPC data) and rx_fsm (bookkeeping). Reads give
// the transmitter priority (its polls are rare); writes alternate priority when both wait. Read
// responses are routed by tag.src. All logic runs on one clock (the paper runs the stages at
// 200 MHz); reset is synchronous and active low.
module dagger_nic
  import dagger_pkg::*;
#(
  parameter int NUM_FLOWS = 64,
  parameter int N_CONN    = 65536,
  parameter int MAX_BATCH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // MMIO
  input  logic             mmio_wr_valid,
  input  logic [7:0]       mmio_wr_addr,
  input  logic [63:0]      mmio_wr_data,
  input  logic             mmio_rd_valid,
  input  logic [7:0]       mmio_rd_addr,
  output logic             mmio_rd_rsp_valid,
  output logic [63:0]      mmio_rd_rsp_data,
  // CCI-P
  output logic             rd_req_valid,
  input  logic             rd_req_ready,
  output ccip_rd_req_t     rd_req,
  input  logic             rd_rsp_valid,
  input  ccip_rd_rsp_t     rd_rsp,
  output logic             wr_req_valid,
  input  logic             wr_req_ready,
  output ccip_wr_req_t     wr_req,
  // network
  output logic             net_tx_valid,
  input  logic             net_tx_ready,
  output net_frame_t       net_tx_frame,
  input  logic             net_rx_valid,
  output logic             net_rx_ready,
  input  net_frame_t       net_rx_frame,
  // status
  output logic             poll_direct,
  output logic [NUM_EVENTS-1:0] events
);
  localparam int FIFO_D = 8;
  logic [$clog2(FIFO_D+1)-1:0] c_ser, c_des, c_nic;

  nic_cfg_t    cfg;
  logic        cm_busy, cm_wr_valid;
  cm_cmd_t     cm_wr_cmd;
  logic [CONN_ID_W-1:0] cm_a_id, cm_b_id, cm_c_id;
  logic        cm_a_hit, cm_b_hit, cm_c_hit;
  net_addr_t   cm_a_dest;
  logic [FLOW_W-1:0] cm_b_flow;
  lb_e         cm_b_lb;
  conn_tuple_t cm_c_tuple;
  logic [CNT_W-1:0] counters [NUM_EVENTS];

  // ------------------------------------------------------------ control
  soft_config #(.NUM_FLOWS(NUM_FLOWS), .MAX_BATCH(MAX_BATCH)) u_cfg (
    .clk, .rst_n,
    .mmio_wr_valid, .mmio_wr_addr, .mmio_wr_data, .mmio_rd_valid, .mmio_rd_addr,
    .mmio_rd_rsp_valid, .mmio_rd_rsp_data, .cfg,
    .cm_wr_valid, .cm_wr_cmd, .cm_query_id(cm_c_id), .cm_query_hit(cm_c_hit),
    .cm_query_tuple(cm_c_tuple), .counters);

  connection_manager #(.N_ENTRIES(N_CONN)) u_cm (
    .clk, .rst_n, .busy(cm_busy), .wr_valid(cm_wr_valid), .wr_cmd(cm_wr_cmd),
    .a_conn_id(cm_a_id), .a_hit(cm_a_hit), .a_dest(cm_a_dest),
    .b_conn_id(cm_b_id), .b_hit(cm_b_hit), .b_src_flow(cm_b_flow), .b_lb(cm_b_lb),
    .c_conn_id(cm_c_id), .c_hit(cm_c_hit), .c_tuple(cm_c_tuple));

  packet_monitor u_mon (.clk, .rst_n, .clear(1'b0), .events, .counters);

  nic_cfg_t run_cfg;
  always_comb begin
    run_cfg = cfg;
    run_cfg.enable = cfg.enable && !cm_busy;
  end

  // ------------------------------------------------------------ CPU-NIC interface: RX FSM
  logic rx_rd_valid, rx_rd_ready, rx_wr_valid, rx_wr_ready;
  ccip_rd_req_t rx_rd;
  ccip_wr_req_t rx_wr;
  logic h_valid, h_ready;
  rpc_obj_t h_rpc;
  logic [FLOW_W-1:0] h_flow;
  logic ev_rpc_in, ev_mode;

  rx_fsm #(.NUM_FLOWS(NUM_FLOWS)) u_rx (
    .clk, .rst_n, .cfg(run_cfg),
    .rd_req_valid(rx_rd_valid), .rd_req_ready(rx_rd_ready), .rd_req(rx_rd),
    .rd_rsp_valid(rd_rsp_valid && rd_rsp.tag.src == TAG_SRC_RX), .rd_rsp,
    .wr_req_valid(rx_wr_valid), .wr_req_ready(rx_wr_ready), .wr_req(rx_wr),
    .rpc_valid(h_valid), .rpc_ready(h_ready), .rpc(h_rpc), .rpc_flow(h_flow),
    .poll_direct, .ev_rpc(ev_rpc_in), .ev_mode_switch(ev_mode));

  // ------------------------------------------------------------ RPC unit
  logic     s_valid, s_ready, sf_valid, sf_ready;
  ser_pkt_t s_pkt, sf_pkt;
  logic     d_valid, d_ready, df_valid, df_ready;
  rpc_obj_t d_rpc, df_rpc;
  logic     n_valid, n_ready, nf_valid, nf_ready;
  rpc_obj_t n_rpc, nf_rpc;
  logic [FLOW_W-1:0] n_flow, nf_flow;
  logic     ev_miss, ev_bad, ev_tx, ev_rx, ev_drop, ev_rpc_out, ev_stall, ev_cpoll;

  rpc_unit u_rpc (
    .clk, .rst_n, .num_flows(cfg.num_flows),
    .host_valid(h_valid), .host_ready(h_ready), .host_rpc(h_rpc),
    .net_tx_valid(s_valid), .net_tx_ready(s_ready), .net_tx_pkt(s_pkt),
    .net_rx_valid(df_valid), .net_rx_ready(df_ready), .net_rx_payload(df_rpc),
    .nic_rx_valid(n_valid), .nic_rx_ready(n_ready), .nic_rx_rpc(n_rpc), .nic_rx_flow(n_flow),
    .cm_a_conn_id(cm_a_id), .cm_a_hit, .cm_a_dest,
    .cm_b_conn_id(cm_b_id), .cm_b_hit, .cm_b_src_flow(cm_b_flow), .cm_b_lb,
    .ev_miss, .ev_bad);

  sync_fifo #(.WIDTH($bits(ser_pkt_t)), .DEPTH(FIFO_D)) u_f_ser (
    .clk, .rst_n, .in_valid(s_valid), .in_ready(s_ready), .in_data(s_pkt),
    .out_valid(sf_valid), .out_ready(sf_ready), .out_data(sf_pkt), .count(c_ser));
  sync_fifo #(.WIDTH(LINE_W), .DEPTH(FIFO_D)) u_f_des (
    .clk, .rst_n, .in_valid(d_valid), .in_ready(d_ready), .in_data(d_rpc),
    .out_valid(df_valid), .out_ready(df_ready), .out_data(df_rpc), .count(c_des));
  sync_fifo #(.WIDTH(LINE_W + FLOW_W), .DEPTH(FIFO_D)) u_f_nic (
    .clk, .rst_n, .in_valid(n_valid), .in_ready(n_ready), .in_data({n_flow, n_rpc}),
    .out_valid(nf_valid), .out_ready(nf_ready), .out_data({nf_flow, nf_rpc}), .count(c_nic));

  // ------------------------------------------------------------ transport
  transport u_tp (
    .clk, .rst_n, .local_addr(cfg.local_addr),
    .tx_in_valid(sf_valid), .tx_in_ready(sf_ready), .tx_in_pkt(sf_pkt),
    .tx_out_valid(net_tx_valid), .tx_out_ready(net_tx_ready), .tx_out_frame(net_tx_frame),
    .rx_in_valid(net_rx_valid), .rx_in_ready(net_rx_ready), .rx_in_frame(net_rx_frame),
    .rx_out_valid(d_valid), .rx_out_ready(d_ready), .rx_out_payload(d_rpc),
    .ev_tx, .ev_rx, .ev_drop);

  // ------------------------------------------------------------ CPU-NIC interface: TX path
  logic tx_rd_valid, tx_rd_ready, tx_wr_valid, tx_wr_ready;
  ccip_rd_req_t tx_rd;
  ccip_wr_req_t tx_wr;

  tx_path #(.NUM_FLOWS(NUM_FLOWS), .MAX_BATCH(MAX_BATCH)) u_txp (
    .clk, .rst_n, .cfg(run_cfg),
    .in_valid(nf_valid), .in_ready(nf_ready), .in_rpc(nf_rpc), .in_flow(nf_flow),
    .rd_req_valid(tx_rd_valid), .rd_req_ready(tx_rd_ready), .rd_req(tx_rd),
    .rd_rsp_valid(rd_rsp_valid && rd_rsp.tag.src == TAG_SRC_TX), .rd_rsp,
    .wr_req_valid(tx_wr_valid), .wr_req_ready(tx_wr_ready), .wr_req(tx_wr),
    .ev_rpc_out, .ev_stall, .ev_credit_poll(ev_cpoll));

  // ------------------------------------------------------------ CCI-P channel sharing
  assign rd_req_valid = tx_rd_valid || rx_rd_valid;
  assign rd_req       = tx_rd_valid ? tx_rd : rx_rd;
  assign tx_rd_ready  = rd_req_ready;
  assign rx_rd_ready  = rd_req_ready && !tx_rd_valid;

  logic wr_last_tx;
  wire  wr_pick_tx = tx_wr_valid && (!rx_wr_valid || !wr_last_tx);
  assign wr_req_valid = tx_wr_valid || rx_wr_valid;
  assign wr_req       = wr_pick_tx ? tx_wr : rx_wr;
  assign tx_wr_ready  = wr_req_ready && wr_pick_tx;
  assign rx_wr_ready  = wr_req_ready && !wr_pick_tx;
  always_ff @(posedge clk) begin
    if (!rst_n) wr_last_tx <= 1'b0;
    else if (wr_req_valid && wr_req_ready) wr_last_tx <= wr_pick_tx;
  end

  // ------------------------------------------------------------ events
  always_comb begin
    events = '0;
    events[EV_HOST_RPC_IN]  = ev_rpc_in;
    events[EV_HOST_RPC_OUT] = ev_rpc_out;
    events[EV_NET_TX]       = ev_tx;
    events[EV_NET_RX]       = ev_rx;
    events[EV_NET_DROP]     = ev_drop || ev_bad;
    events[EV_CONN_MISS]    = ev_miss;
    events[EV_TX_STALL]     = ev_stall;
    events[EV_POLL_SWITCH]  = ev_mode;
  end

  logic unused;
  assign unused = ^{h_flow, ev_cpoll, c_ser, c_des, c_nic};
endmodule
