// RX FSM of the CPU-NIC interface: fetches new RPC objects from the host TX buffers.
//
// Every active flow owns a ring of tx_ring_size cache lines in host memory (flow f starts at
// tx_base + f*tx_ring_size). Software writes an RPC object into the next entry and flips the
// entry's phase bit (ctl[0]) on every lap of the ring. The FSM polls the entry at each flow's head
// with CCI-P reads, visiting flows round-robin, so many asynchronous reads overlap the long
// interconnect latency (the paper quotes 400 ns and up to 128 outstanding requests; OUT_DEPTH, the
// bound on polls in flight plus queued results, defaults to that 128). Each flow runs a poll
// pointer ahead of its head and keeps up to 8 polls of consecutive entries in flight (never more
// than its ring size): with an 80-cycle read that is up to 8 RPCs per 80 cycles per flow, about
// 20 Mrps at 200 MHz, above the paper's 12.4-16.5 Mrps per core. The read tag carries a 3-bit
// sequence number that names the entry a poll reads. A returned line counts only if it is the
// entry at the head and its phase bit equals the flow's expected phase: it is a new RPC, queued
// for the RPC unit together with its flow id; the head advances, and a bookkeeping line (released
// entry index in [15:0], running count of released entries in [31:16]) is written to the flow's
// line in the TX free buffer (tx_free_base + f) so software can reuse the entry. A stale line, or
// a line for an entry beyond the head that arrives early, is dropped and the poll pointer is
// rewound to that entry, so it is read again; RPCs of a flow therefore leave in ring order. Each
// rewind bumps a 2-bit per-flow epoch recorded with every poll, and responses to polls from an
// earlier epoch cannot rewind again (they may still be accepted at the head), which keeps one
// stale line from restarting the whole window of polls behind it over and over.
//
// Polling mode: as in the paper, polling starts through the FPGA-side coherent cache (read hint
// cached=1) and switches to direct reads of the processor's LLC (cached=0) when the load is high.
// Load is the number of RPCs accepted in a window of LOAD_WINDOW cycles, compared at the end of
// each window with the programmable poll_threshold. The phase-bit protocol, ring layout,
// bookkeeping format and load window are this design's choices.
//
// Interface: CCI-P read request (valid/ready), read response (valid, no back-pressure: a poll is
// only issued when the output queues can take its result), write request (valid/ready). RPC
// output is valid/ready with the flow id alongside.
module rx_fsm
  import dagger_pkg::*;
#(
  parameter int NUM_FLOWS   = 64,
  parameter int OUT_DEPTH   = 128,
  parameter int LOAD_WINDOW = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  nic_cfg_t          cfg,
  // CCI-P
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output ccip_rd_req_t      rd_req,
  input  logic              rd_rsp_valid,
  input  ccip_rd_rsp_t      rd_rsp,
  output logic              wr_req_valid,
  input  logic              wr_req_ready,
  output ccip_wr_req_t      wr_req,
  // RPC objects to the RPC unit
  output logic              rpc_valid,
  input  logic              rpc_ready,
  output rpc_obj_t          rpc,
  output logic [FLOW_W-1:0] rpc_flow,
  // status
  output logic              poll_direct,
  output logic              ev_rpc,
  output logic              ev_mode_switch
);
  localparam int FI_W = (NUM_FLOWS > 1) ? $clog2(NUM_FLOWS) : 1;
  localparam int CW   = $clog2(OUT_DEPTH + 1);
  localparam int OW   = $clog2(OUT_DEPTH + 1);
  localparam int WW   = $clog2(LOAD_WINDOW);

  localparam int MAXP = 1 << SEQ_W;         // polls per flow in flight, bounded by the tag
  localparam int PW   = SEQ_W + 1;

  logic [RING_W-1:0] head   [NUM_FLOWS];
  logic [15:0]       nfreed [NUM_FLOWS];
  logic              phase  [NUM_FLOWS];
  logic [PW-1:0]     poff   [NUM_FLOWS];       // next entry to poll, as an offset from head
  logic [SEQ_W-1:0]  nseq   [NUM_FLOWS];       // sequence number of the flow's next poll
  logic [MAXP-1:0]   pend   [NUM_FLOWS];       // polls in flight, by sequence number
  logic [RING_W-1:0] ent    [NUM_FLOWS][MAXP]; // ring entry each poll in flight reads
  logic [1:0]        epoch  [NUM_FLOWS];       // bumped on every rewind
  logic [1:0]        pep    [NUM_FLOWS][MAXP]; // epoch each poll in flight was issued in
  logic [FI_W-1:0]   rr;
  logic [OW-1:0]     outstanding;

  // output queues
  logic              oq_in_ready, bq_in_ready;
  logic [CW-1:0]     oq_count, bq_count;
  logic              accept;

  // ------------------------------------------------------------ poll issue
  wire [FLOW_W:0]  nf       = cfg.num_flows;
  wire             room     = (32'(outstanding) + 32'(oq_count) < OUT_DEPTH) &&
                              (32'(outstanding) + 32'(bq_count) < OUT_DEPTH);
  wire [PW-1:0]    plimit   = (32'(cfg.tx_ring_size) < MAXP) ? PW'(cfg.tx_ring_size) : PW'(MAXP);
  wire             can_poll = cfg.enable && room && (poff[rr] < plimit) && !pend[rr][nseq[rr]];
  wire [RING_W-1:0] psum    = head[rr] + RING_W'(poff[rr]);
  wire [RING_W-1:0] pent    = (psum >= cfg.tx_ring_size) ? psum - cfg.tx_ring_size : psum;
  assign rd_req_valid = can_poll;
  assign rd_req = '{addr:   cfg.tx_base + ADDR_W'(rr) * ADDR_W'(cfg.tx_ring_size) + ADDR_W'(pent),
                    cached: !poll_direct,
                    tag:    '{nic: '0, src: TAG_SRC_RX, seq: nseq[rr], flow: FLOW_W'(rr)}};
  wire issue = rd_req_valid && rd_req_ready;

  // ------------------------------------------------------------ poll response
  wire [FI_W-1:0]  rf   = rd_rsp.tag.flow[FI_W-1:0];
  wire [SEQ_W-1:0] rs   = rd_rsp.tag.seq;
  rpc_obj_t        robj;
  assign robj   = rd_rsp.data;
  // position of the returned entry relative to the flow's head (ring distance)
  wire [RING_W-1:0] re   = ent[rf][rs];
  wire [RING_W-1:0] roff = (re >= head[rf]) ? re - head[rf] : re + cfg.tx_ring_size - head[rf];
  assign accept = rd_rsp_valid && (roff == '0) && (robj.hdr.ctl[0] == phase[rf]);
  // a stale or out-of-order line at or beyond the head rewinds polling to that entry
  // only polls issued since the last rewind may rewind again; older ones are already repeated
  wire   rewind = rd_rsp_valid && !accept && (pep[rf][rs] == epoch[rf]) && (32'(roff) < 32'(poff[rf]));

  wire [RING_W-1:0] head_nxt = (head[rf] + 1'b1 >= cfg.tx_ring_size) ? '0 : head[rf] + 1'b1;
  wire [PW-1:0]     poff_rsp = accept ? ((poff[rf] == '0) ? '0 : poff[rf] - 1'b1)
                                      : rewind ? PW'(roff) : poff[rf];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int f = 0; f < NUM_FLOWS; f++) begin
        head[f]   <= '0;
        nfreed[f] <= '0;
        phase[f]  <= 1'b1;          // host zeroes its rings, so the first lap carries phase 1
        poff[f]   <= '0;
        nseq[f]   <= '0;
        pend[f]   <= '0;
        epoch[f]  <= '0;
        for (int k = 0; k < MAXP; k++) begin
          ent[f][k] <= '0;
          pep[f][k] <= '0;
        end
      end
      rr          <= '0;
      outstanding <= '0;
    end else begin
      if (rd_rsp_valid) begin
        pend[rf][rs] <= 1'b0;
        poff[rf]     <= poff_rsp;
        if (rewind) epoch[rf] <= epoch[rf] + 1'b1;
        if (accept) begin
          head[rf]   <= head_nxt;
          nfreed[rf] <= nfreed[rf] + 1'b1;
          if (head_nxt == '0) phase[rf] <= !phase[rf];
        end
      end
      if (issue) begin
        pend[rr][nseq[rr]] <= 1'b1;
        ent[rr][nseq[rr]]  <= pent;
        pep[rr][nseq[rr]]  <= (rewind && rf == rr) ? epoch[rr] + 1'b1 : epoch[rr];
        nseq[rr]           <= nseq[rr] + 1'b1;
        if (rd_rsp_valid && rf == rr) begin
          if (!rewind) poff[rr] <= poff_rsp + 1'b1;
        end else begin
          poff[rr] <= poff[rr] + 1'b1;
        end
      end
      // advance the round-robin pointer unless a poll is waiting on the bus
      if (!(can_poll && !rd_req_ready))
        rr <= (32'(rr) + 1 >= 32'(nf)) ? '0 : rr + 1'b1;
      outstanding <= outstanding + OW'(issue) - OW'(rd_rsp_valid);
    end
  end

  // RPC queue: {flow, object}
  sync_fifo #(.WIDTH(FLOW_W + LINE_W), .DEPTH(OUT_DEPTH)) u_oq (
    .clk, .rst_n,
    .in_valid (accept), .in_ready(oq_in_ready),
    .in_data  ({FLOW_W'(rf), rd_rsp.data}),
    .out_valid(rpc_valid), .out_ready(rpc_ready),
    .out_data ({rpc_flow, rpc}),
    .count    (oq_count));

  // bookkeeping queue: writes to the TX free buffer
  ccip_wr_req_t bk;
  assign bk = '{addr: cfg.tx_free_base + ADDR_W'(rf),
                data: LINE_W'({nfreed[rf] + 16'd1, 9'd0, head[rf]})};
  sync_fifo #(.WIDTH($bits(ccip_wr_req_t)), .DEPTH(OUT_DEPTH)) u_bq (
    .clk, .rst_n,
    .in_valid (accept), .in_ready(bq_in_ready),
    .in_data  (bk),
    .out_valid(wr_req_valid), .out_ready(wr_req_ready),
    .out_data (wr_req),
    .count    (bq_count));

  // ------------------------------------------------------------ load monitor / poll mode
  logic [WW-1:0] win_cnt;
  logic [15:0]   load_cnt;
  wire           win_end = (win_cnt == WW'(LOAD_WINDOW - 1));
  wire           go_direct = (load_cnt > cfg.poll_threshold);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win_cnt        <= '0;
      load_cnt       <= '0;
      poll_direct    <= 1'b0;
      ev_mode_switch <= 1'b0;
    end else begin
      win_cnt        <= win_cnt + 1'b1;
      ev_mode_switch <= 1'b0;
      if (win_end) begin
        load_cnt    <= 16'(accept);
        poll_direct <= go_direct;
        ev_mode_switch <= (go_direct != poll_direct);
      end else if (accept && ~&load_cnt) begin
        load_cnt <= load_cnt + 1'b1;
      end
    end
  end
  assign ev_rpc = accept;

  a_queues_have_room: assert property (@(posedge clk) disable iff (!rst_n)
                                       accept |-> (oq_in_ready && bq_in_ready));
  a_poll_was_pending: assert property (@(posedge clk) disable iff (!rst_n)
                                       rd_rsp_valid |-> pend[rf][rs]);
endmodule
