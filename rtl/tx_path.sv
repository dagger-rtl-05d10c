// TX path of the CPU-NIC interface (NIC to host), built as in the paper's TX-path figure (B).
//
// An incoming RPC arrives with the flow chosen by the load balancer. The input controller takes
// a free slot id from the free slot FIFO, stores the RPC in the request buffer at that slot and
// pushes the slot id into the flow's FIFO. The flow scheduler grants a flow holding a full batch
// with room in its host RX ring, and the CCI-P transmitter moves that batch from the request
// buffer into host memory, returning the slots. The request buffer and free slot list hold
// MAX_BATCH * NUM_FLOWS entries, the paper's sizing rule.
//
// Back-pressure: in_ready is low (an input stall, reported on ev_stall) when no slot is free or
// the target flow FIFO is full. in_flow must be below NUM_FLOWS.
module tx_path
  import dagger_pkg::*;
#(
  parameter int NUM_FLOWS = 64,
  parameter int MAX_BATCH = 4,
  parameter int FIFO_DEPTH = 2 * MAX_BATCH,
  localparam int ENTRIES  = MAX_BATCH * NUM_FLOWS,
  localparam int SW       = $clog2(ENTRIES),
  localparam int FW       = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1,
  localparam int CW       = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  nic_cfg_t          cfg,
  // incoming RPCs from the RPC unit
  input  logic              in_valid,
  output logic              in_ready,
  input  rpc_obj_t          in_rpc,
  input  logic [FLOW_W-1:0] in_flow,
  // CCI-P
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output ccip_rd_req_t      rd_req,
  input  logic              rd_rsp_valid,
  input  ccip_rd_rsp_t      rd_rsp,
  output logic              wr_req_valid,
  input  logic              wr_req_ready,
  output ccip_wr_req_t      wr_req,
  // events
  output logic              ev_rpc_out,
  output logic              ev_stall,
  output logic              ev_credit_poll
);
  logic          fs_valid;
  logic [SW-1:0] fs_slot;
  logic          ret_valid;
  logic [SW-1:0] ret_slot;
  logic [SW:0]   fs_count;

  logic          pop;
  logic [FW-1:0] pop_flow;
  logic [SW-1:0] pop_slot;
  logic [CW-1:0] count [NUM_FLOWS];

  logic          rb_rd_en;
  logic [SW-1:0] rb_rd_slot;
  rpc_obj_t      rb_rd_data;

  logic                 g_valid, g_ready;
  logic [FW-1:0]        g_flow;
  logic [NUM_FLOWS-1:0] credit_ok;

  // ------------------------------------------------------------ input controller
  wire [FW-1:0] fl   = in_flow[FW-1:0];
  assign in_ready    = fs_valid && (32'(count[fl]) < FIFO_DEPTH);
  wire   in_fire     = in_valid && in_ready;
  assign ev_stall    = in_valid && !in_ready;

  free_slot_fifo #(.ENTRIES(ENTRIES)) u_free (
    .clk, .rst_n,
    .out_valid(fs_valid), .out_ready(in_fire), .out_slot(fs_slot),
    .in_valid (ret_valid), .in_slot(ret_slot), .count(fs_count));

  request_buffer #(.ENTRIES(ENTRIES)) u_buf (
    .clk,
    .wr_en(in_fire), .wr_slot(fs_slot), .wr_data(in_rpc),
    .rd_en(rb_rd_en), .rd_slot(rb_rd_slot), .rd_data(rb_rd_data));

  flow_fifos #(.NUM_FLOWS(NUM_FLOWS), .DEPTH(FIFO_DEPTH), .SW(SW)) u_ff (
    .clk, .rst_n,
    .push(in_fire), .push_flow(fl), .push_slot(fs_slot),
    .pop, .pop_flow, .pop_slot, .count);

  flow_scheduler #(.NUM_FLOWS(NUM_FLOWS), .CW(CW)) u_sched (
    .clk, .rst_n, .count, .credit_ok, .batch(cfg.batch), .num_flows(cfg.num_flows),
    .enable(cfg.enable), .grant_valid(g_valid), .grant_ready(g_ready), .grant_flow(g_flow));

  ccip_transmitter #(.NUM_FLOWS(NUM_FLOWS), .ENTRIES(ENTRIES), .CW(CW)) u_tx (
    .clk, .rst_n, .cfg,
    .grant_valid(g_valid), .grant_ready(g_ready), .grant_flow(g_flow), .credit_ok,
    .count, .pop, .pop_flow, .pop_slot,
    .rd_en(rb_rd_en), .rd_slot(rb_rd_slot), .rd_data(rb_rd_data),
    .ret_valid, .ret_slot,
    .rd_req_valid, .rd_req_ready, .rd_req, .rd_rsp_valid, .rd_rsp,
    .wr_req_valid, .wr_req_ready, .wr_req, .ev_rpc_out, .ev_credit_poll);

  a_flow_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    in_valid |-> (32'(in_flow) < NUM_FLOWS));
endmodule
