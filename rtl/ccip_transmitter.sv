// CCI-P transmitter (TX FSM) of the CPU-NIC interface: writes RPCs into the host RX buffers.
//
// When idle it accepts a grant for one flow from the flow scheduler and sends a batch of `batch`
// RPCs for it: for each one it pops a slot id from the flow's FIFO, reads the RPC object from the
// request buffer, writes it as one cache line to entry wp of the flow's host RX ring
// (rx_base + f*rx_ring_size + wp) with the flow's phase bit in ctl[0], and returns the slot to the
// free slot FIFO. Reads and writes are overlapped so a batch moves one line per cycle while the
// write channel is ready.
//
// Ring credit: the NIC counts the lines it wrote per flow; software reports how many it has
// released by writing a running count into the low 16 bits of the flow's line in the RX free
// buffer (rx_free_base + f). A flow may be granted only when its ring has room for a whole batch
// (credit_ok). When a flow holds a batch but lacks room, the transmitter polls that flow's RX free
// line (one poll per flow in flight, flows visited round-robin) until room appears; this is the
// paper's "asynchronously fetches the next free entries during bookkeeping". The free-count
// format, the phase bit and the rule that the ring size is a multiple of the batch size are this
// design's choices.
module ccip_transmitter
  import dagger_pkg::*;
#(
  parameter int NUM_FLOWS = 64,
  parameter int ENTRIES   = 256,
  parameter int CW        = 4,
  localparam int SW       = $clog2(ENTRIES),
  localparam int FW       = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  nic_cfg_t             cfg,
  // flow scheduler
  input  logic                 grant_valid,
  output logic                 grant_ready,
  input  logic [FW-1:0]        grant_flow,
  output logic [NUM_FLOWS-1:0] credit_ok,
  // flow FIFOs
  input  logic [CW-1:0]        count [NUM_FLOWS],
  output logic                 pop,
  output logic [FW-1:0]        pop_flow,
  input  logic [SW-1:0]        pop_slot,
  // request buffer
  output logic                 rd_en,
  output logic [SW-1:0]        rd_slot,
  input  rpc_obj_t             rd_data,
  // free slot FIFO
  output logic                 ret_valid,
  output logic [SW-1:0]        ret_slot,
  // CCI-P
  output logic                 rd_req_valid,
  input  logic                 rd_req_ready,
  output ccip_rd_req_t         rd_req,
  input  logic                 rd_rsp_valid,
  input  ccip_rd_rsp_t         rd_rsp,
  output logic                 wr_req_valid,
  input  logic                 wr_req_ready,
  output ccip_wr_req_t         wr_req,
  output logic                 ev_rpc_out,
  output logic                 ev_credit_poll
);
  logic [RING_W-1:0] wp      [NUM_FLOWS];
  logic              phase   [NUM_FLOWS];
  logic [15:0]       written [NUM_FLOWS];
  logic [15:0]       freed   [NUM_FLOWS];
  logic              pbusy   [NUM_FLOWS];

  logic              active;
  logic [FW-1:0]     cur;
  logic [BATCH_W:0]  remaining;
  logic              line_valid;
  logic [SW-1:0]     line_slot;
  logic [FW-1:0]     pp;

  // ------------------------------------------------------------ credit
  always_comb begin
    for (int f = 0; f < NUM_FLOWS; f++) begin
      logic [15:0] used;
      used = written[f] - freed[f];
      credit_ok[f] = (32'(cfg.rx_ring_size) >= 32'(used) + 32'(cfg.batch));
    end
  end

  // ------------------------------------------------------------ batch transfer
  wire wr_fire   = wr_req_valid && wr_req_ready;
  wire fetch     = active && (remaining != '0) && (!line_valid || wr_fire);

  assign grant_ready = !active;
  assign pop      = fetch;
  assign pop_flow = cur;
  assign rd_en    = fetch;
  assign rd_slot  = pop_slot;

  rpc_obj_t line;
  always_comb begin
    line = rd_data;
    line.hdr.ctl[0] = phase[cur];
  end
  assign wr_req_valid = line_valid;
  assign wr_req = '{addr: cfg.rx_base + ADDR_W'(cur) * ADDR_W'(cfg.rx_ring_size) + ADDR_W'(wp[cur]),
                    data: line};
  assign ret_valid  = wr_fire;
  assign ret_slot   = line_slot;
  assign ev_rpc_out = wr_fire;

  wire [RING_W-1:0] wp_nxt = (wp[cur] + 1'b1 >= cfg.rx_ring_size) ? '0 : wp[cur] + 1'b1;

  // ------------------------------------------------------------ RX free polling
  wire need_poll = cfg.enable && (32'(pp) < 32'(cfg.num_flows)) && !credit_ok[pp] && !pbusy[pp] &&
                   (32'(count[pp]) >= 32'(cfg.batch));
  assign rd_req_valid = need_poll;
  assign rd_req = '{addr: cfg.rx_free_base + ADDR_W'(pp), cached: 1'b0,
                    tag: '{nic: '0, src: TAG_SRC_TX, seq: '0, flow: FLOW_W'(pp)}};
  wire poll_issue = rd_req_valid && rd_req_ready;
  wire [FW-1:0] rf = rd_rsp.tag.flow[FW-1:0];
  assign ev_credit_poll = poll_issue;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int f = 0; f < NUM_FLOWS; f++) begin
        wp[f] <= '0; phase[f] <= 1'b1; written[f] <= '0; freed[f] <= '0; pbusy[f] <= 1'b0;
      end
      active     <= 1'b0;
      cur        <= '0;
      remaining  <= '0;
      line_valid <= 1'b0;
      line_slot  <= '0;
      pp         <= '0;
    end else begin
      if (grant_valid && grant_ready) begin
        active    <= 1'b1;
        cur       <= grant_flow;
        remaining <= (BATCH_W+1)'(cfg.batch);
      end
      if (fetch) begin
        remaining  <= remaining - 1'b1;
        line_valid <= 1'b1;
        line_slot  <= pop_slot;
      end else if (wr_fire) begin
        line_valid <= 1'b0;
      end
      if (wr_fire) begin
        wp[cur]      <= wp_nxt;
        written[cur] <= written[cur] + 1'b1;
        if (wp_nxt == '0) phase[cur] <= !phase[cur];
      end
      if (active && remaining == '0 && (!line_valid || wr_fire)) active <= 1'b0;
      // RX free polls
      if (rd_rsp_valid) begin
        freed[rf] <= rd_rsp.data[15:0];
        pbusy[rf] <= 1'b0;
      end
      if (poll_issue) pbusy[pp] <= 1'b1;
      if (!(need_poll && !rd_req_ready))
        pp <= (32'(pp) + 1 >= 32'(cfg.num_flows)) ? '0 : pp + 1'b1;
    end
  end

  a_pop_has_data: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count[pop_flow] != '0);
endmodule
