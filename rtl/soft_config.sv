// Soft-Reconfiguration Unit: host-visible register file of one NIC.
//
// The host reaches it with MMIO writes and reads (64-bit data, 8-bit register index). It holds the
// run-time parameters the paper tunes without a new bitstream: the CCI-P batch size, the number of
// active flows, base address and size of the TX/RX rings and their free buffers, the load
// threshold at which polling switches to the LLC, and the NIC's own address. It also issues the
// connection-manager commands (open/close a connection, query an entry) and returns the Packet
// Monitor counters. The register map and reset values are this design's choice; reset values
// follow the paper's sizing (batch 4, TX ring 10 entries, RX ring 4 entries).
//
// Register map (index: meaning):
//   0x00 CTRL        [0] enable          0x01 NUM_FLOWS      0x02 BATCH
//   0x03 TX_RING     0x04 RX_RING        0x05 TX_BASE        0x06 TX_FREE_BASE
//   0x07 RX_BASE     0x08 RX_FREE_BASE   0x09 POLL_THRESHOLD
//   0x0A LOCAL_ADDR  [31:0] IPv4, [47:32] UDP port
//   0x10 CONN_ID     0x11 CONN_TUPLE [8:0] src_flow, [10:9] lb, [47:16] dest IP, [63:48] dest port
//   0x12 CONN_CMD    write: [0] 1 = open, 0 = close, using CONN_ID/CONN_TUPLE
//   0x13 CONN_QUERY  write: c_id to look up; read: last c_id written
//   0x14 CONN_STATUS read: [63] done, [62] hit, [10:9] lb, [8:0] src_flow
//   0x15 CONN_DEST   read: [31:0] dest IP, [47:32] dest port of the last query
//   0x20+i           read: packet monitor counter i
// Values written to NUM_FLOWS, BATCH and the ring sizes are clamped into their legal range.
// Timing: a write takes effect at the next edge; read data appears one cycle after rd_valid.
module soft_config
  import dagger_pkg::*;
#(
  parameter int NUM_FLOWS = 64,
  parameter int MAX_BATCH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // MMIO
  input  logic                 mmio_wr_valid,
  input  logic [7:0]           mmio_wr_addr,
  input  logic [63:0]          mmio_wr_data,
  input  logic                 mmio_rd_valid,
  input  logic [7:0]           mmio_rd_addr,
  output logic                 mmio_rd_rsp_valid,
  output logic [63:0]          mmio_rd_rsp_data,
  // configuration out
  output nic_cfg_t             cfg,
  // connection manager
  output logic                 cm_wr_valid,
  output cm_cmd_t              cm_wr_cmd,
  output logic [CONN_ID_W-1:0] cm_query_id,
  input  logic                 cm_query_hit,
  input  conn_tuple_t          cm_query_tuple,
  // packet monitor
  input  logic [CNT_W-1:0]     counters [NUM_EVENTS]
);
  logic [CONN_ID_W-1:0] conn_id_q;
  conn_tuple_t          conn_tuple_q;
  logic [1:0]           query_pend;
  logic [63:0]          conn_status_q;
  logic [63:0]          conn_dest_q;

  function automatic conn_tuple_t unpack_tuple(input logic [63:0] d);
    return '{src_flow: d[8:0], lb: lb_e'(d[10:9]), dest: '{ip: d[47:16], port: d[63:48]}};
  endfunction
  function automatic logic [63:0] pack_tuple(input conn_tuple_t t);
    return {t.dest.port, t.dest.ip, 5'd0, t.lb, t.src_flow};
  endfunction
  function automatic logic [RING_W-1:0] clamp_ring(input logic [63:0] d);
    if (d == 0)        return RING_W'(1);
    if (d > RING_MAX)  return RING_W'(RING_MAX);
    return d[RING_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg            <= '0;
      cfg.num_flows  <= (FLOW_W+1)'(NUM_FLOWS);
      cfg.batch      <= BATCH_W'(MAX_BATCH);
      cfg.tx_ring_size <= RING_W'(10);
      cfg.rx_ring_size <= RING_W'(4);
      cfg.poll_threshold <= 16'd256;
      conn_id_q      <= '0;
      conn_tuple_q   <= '0;
      cm_wr_valid    <= 1'b0;
      cm_wr_cmd      <= '0;
      cm_query_id    <= '0;
      query_pend     <= '0;
      conn_status_q  <= '0;
      conn_dest_q    <= '0;
    end else begin
      cm_wr_valid <= 1'b0;
      query_pend  <= {query_pend[0], 1'b0};
      if (query_pend[1]) begin
        conn_status_q <= {1'b1, cm_query_hit, 51'd0, cm_query_tuple.lb, cm_query_tuple.src_flow};
        conn_dest_q   <= {16'd0, cm_query_tuple.dest.port, cm_query_tuple.dest.ip};
      end
      if (mmio_wr_valid) begin
        unique case (mmio_wr_addr)
          8'h00: cfg.enable <= mmio_wr_data[0];
          8'h01: cfg.num_flows <= (mmio_wr_data == 0) ? (FLOW_W+1)'(1) :
                                  (mmio_wr_data > NUM_FLOWS) ? (FLOW_W+1)'(NUM_FLOWS) :
                                  mmio_wr_data[FLOW_W:0];
          8'h02: cfg.batch <= (mmio_wr_data == 0) ? BATCH_W'(1) :
                              (mmio_wr_data > MAX_BATCH) ? BATCH_W'(MAX_BATCH) :
                              mmio_wr_data[BATCH_W-1:0];
          8'h03: cfg.tx_ring_size <= clamp_ring(mmio_wr_data);
          8'h04: cfg.rx_ring_size <= clamp_ring(mmio_wr_data);
          8'h05: cfg.tx_base      <= mmio_wr_data[ADDR_W-1:0];
          8'h06: cfg.tx_free_base <= mmio_wr_data[ADDR_W-1:0];
          8'h07: cfg.rx_base      <= mmio_wr_data[ADDR_W-1:0];
          8'h08: cfg.rx_free_base <= mmio_wr_data[ADDR_W-1:0];
          8'h09: cfg.poll_threshold <= mmio_wr_data[15:0];
          8'h0A: cfg.local_addr   <= '{ip: mmio_wr_data[31:0], port: mmio_wr_data[47:32]};
          8'h10: conn_id_q        <= mmio_wr_data[CONN_ID_W-1:0];
          8'h11: conn_tuple_q     <= unpack_tuple(mmio_wr_data);
          8'h12: begin
            cm_wr_valid <= 1'b1;
            cm_wr_cmd   <= '{op: cm_op_e'(mmio_wr_data[0]), conn_id: conn_id_q, tuple: conn_tuple_q};
          end
          8'h13: begin
            cm_query_id   <= mmio_wr_data[CONN_ID_W-1:0];
            query_pend    <= 2'b01;
            conn_status_q <= '0;
          end
          default: ;
        endcase
      end
    end
  end

  // MMIO reads
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mmio_rd_rsp_valid <= 1'b0;
      mmio_rd_rsp_data  <= '0;
    end else begin
      mmio_rd_rsp_valid <= mmio_rd_valid;
      if (mmio_rd_valid) begin
        mmio_rd_rsp_data <= '0;
        case (mmio_rd_addr)
          8'h00: mmio_rd_rsp_data <= 64'(cfg.enable);
          8'h01: mmio_rd_rsp_data <= 64'(cfg.num_flows);
          8'h02: mmio_rd_rsp_data <= 64'(cfg.batch);
          8'h03: mmio_rd_rsp_data <= 64'(cfg.tx_ring_size);
          8'h04: mmio_rd_rsp_data <= 64'(cfg.rx_ring_size);
          8'h05: mmio_rd_rsp_data <= 64'(cfg.tx_base);
          8'h06: mmio_rd_rsp_data <= 64'(cfg.tx_free_base);
          8'h07: mmio_rd_rsp_data <= 64'(cfg.rx_base);
          8'h08: mmio_rd_rsp_data <= 64'(cfg.rx_free_base);
          8'h09: mmio_rd_rsp_data <= 64'(cfg.poll_threshold);
          8'h0A: mmio_rd_rsp_data <= {16'd0, cfg.local_addr.port, cfg.local_addr.ip};
          8'h10: mmio_rd_rsp_data <= 64'(conn_id_q);
          8'h11: mmio_rd_rsp_data <= pack_tuple(conn_tuple_q);
          8'h13: mmio_rd_rsp_data <= 64'(cm_query_id);
          8'h14: mmio_rd_rsp_data <= conn_status_q;
          8'h15: mmio_rd_rsp_data <= conn_dest_q;
          default:
            if (mmio_rd_addr[7:5] == 3'b001 && int'(mmio_rd_addr[4:0]) < NUM_EVENTS)
              mmio_rd_rsp_data <= 64'(counters[mmio_rd_addr[2:0]]);
        endcase
      end
    end
  end
endmodule
