// Transport layer: a UDP/IPv4 framing of serialized RPCs (the paper's "version of the UDP/IP
// protocol"; the exact header choices here are this design's own).
//
// Transmit: each serialized RPC becomes one frame of IPv4 header (version 4, IHL 5, total length
// 92, incrementing id, DF set, TTL 64, protocol 17, header checksum), UDP header (ports from the
// local and destination addresses, length 72, checksum 0, which IPv4 allows) and the 64-byte
// payload.
// Receive: a frame is accepted when version, IHL and protocol are right, the header checksum
// verifies, and destination IP and UDP port are the NIC's own; otherwise it is dropped and
// reported on ev_drop. Accepted payloads go to the RPC unit.
// Each direction has one output register (valid/ready); a new beat is taken when the register is
// empty or being emptied, so each direction passes one frame per cycle with one cycle of latency.
module transport
  import dagger_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  net_addr_t  local_addr,
  // from the RPC unit
  input  logic       tx_in_valid,
  output logic       tx_in_ready,
  input  ser_pkt_t   tx_in_pkt,
  // to the network
  output logic       tx_out_valid,
  input  logic       tx_out_ready,
  output net_frame_t tx_out_frame,
  // from the network
  input  logic       rx_in_valid,
  output logic       rx_in_ready,
  input  net_frame_t rx_in_frame,
  // to the RPC unit
  output logic       rx_out_valid,
  input  logic       rx_out_ready,
  output rpc_obj_t   rx_out_payload,
  // events
  output logic       ev_tx,
  output logic       ev_rx,
  output logic       ev_drop
);
  // ------------------------------------------------------------ transmit
  logic [15:0] ip_id;
  net_frame_t  f;
  always_comb begin
    f.ip = '{version: 4'd4, ihl: 4'd5, tos: 8'd0, total_len: IP_TOTAL_LEN, id: ip_id,
             flags_frag: 16'h4000, ttl: 8'd64, proto: IP_PROTO_UDP, csum: 16'd0,
             src: local_addr.ip, dst: tx_in_pkt.dst.ip};
    f.ip.csum = ~ip_sum(f.ip);
    f.udp = '{src_port: local_addr.port, dst_port: tx_in_pkt.dst.port, len: UDP_LEN, csum: 16'd0};
    f.payload = tx_in_pkt.payload;
  end

  assign tx_in_ready = !tx_out_valid || tx_out_ready;
  wire tx_fire = tx_in_valid && tx_in_ready;
  assign ev_tx = tx_fire;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tx_out_valid <= 1'b0;
      ip_id        <= '0;
    end else begin
      if (tx_in_ready) tx_out_valid <= tx_in_valid;
      if (tx_fire) ip_id <= ip_id + 1'b1;
    end
    if (tx_fire) tx_out_frame <= f;
  end

  // ------------------------------------------------------------ receive
  wire good = (rx_in_frame.ip.version == 4'd4) && (rx_in_frame.ip.ihl == 4'd5) &&
              (rx_in_frame.ip.proto == IP_PROTO_UDP) && (ip_sum(rx_in_frame.ip) == 16'hFFFF) &&
              (rx_in_frame.ip.dst == local_addr.ip) && (rx_in_frame.udp.dst_port == local_addr.port);

  assign rx_in_ready = !rx_out_valid || rx_out_ready;
  wire rx_fire = rx_in_valid && rx_in_ready;
  assign ev_rx   = rx_fire && good;
  assign ev_drop = rx_fire && !good;

  always_ff @(posedge clk) begin
    if (!rst_n) rx_out_valid <= 1'b0;
    else if (rx_in_ready) rx_out_valid <= rx_in_valid && good;
    if (rx_fire) rx_out_payload <= rx_in_frame.payload;
  end
endmodule
