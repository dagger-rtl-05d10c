// Shared types and constants of the Dagger NIC.
//
// Everything that crosses a module boundary is defined here: the 64-byte RPC object exchanged
// with the host, the connection tuple held by the connection manager, the CCI-P style
// request/response records used to reach host memory, the IPv4/UDP frame used on the network,
// and the soft-configuration record. The RPC object is exactly one cache line, as in the paper
// (RPCs are at least 64 bytes and the memory interconnect moves one line per transaction). The
// header layout, the tag layout and the register map are this design's own choices.
package dagger_pkg;

  localparam int LINE_W    = 512;          // one 64-byte cache line
  localparam int ADDR_W    = 32;           // host line address (64-byte granules)
  localparam int TAG_W     = 16;           // CCI-P request tag (mdata)
  localparam int FLOW_W    = 9;            // up to 512 NIC flows
  localparam int CONN_ID_W = 32;
  localparam int ARG_BYTES = 48;           // argument bytes in one RPC line
  localparam int RING_W    = 7;            // ring sizes up to 64 entries
  localparam int RING_MAX  = 64;
  localparam int BATCH_W   = 3;            // batch sizes up to 4
  localparam int CNT_W     = 32;

  // ---------------------------------------------------------------- RPC object
  typedef enum logic [7:0] {
    RPC_REQUEST  = 8'd0,
    RPC_RESPONSE = 8'd1
  } rpc_type_e;

  typedef struct packed {
    logic [7:0]            ctl;      // [0]: phase bit flipped by the writer on every ring lap
    rpc_type_e             rtype;    // request or response
    logic [15:0]           fn_id;    // remote procedure number
    logic [CONN_ID_W-1:0]  conn_id;  // connection the RPC belongs to
    logic [31:0]           rpc_id;   // caller's id, echoed by the response
    logic [15:0]           arg_len;  // valid argument bytes, 0..48
    logic [15:0]           rsvd;
  } rpc_hdr_t;                       // 128 bits

  typedef struct packed {
    rpc_hdr_t                 hdr;
    logic [ARG_BYTES*8-1:0]   args;  // byte 0 is args[383:376]
  } rpc_obj_t;                       // 512 bits

  // ---------------------------------------------------------------- connections
  typedef enum logic [1:0] {
    LB_ROUND_ROBIN = 2'd0,           // dynamic uniform steering
    LB_STATIC      = 2'd1,           // flow taken from the connection tuple
    LB_OBJECT      = 2'd2            // hash of the key (object-level affinity)
  } lb_e;

  typedef struct packed {
    logic [31:0] ip;
    logic [15:0] port;
  } net_addr_t;

  typedef struct packed {
    logic [FLOW_W-1:0] src_flow;
    net_addr_t         dest;
    lb_e               lb;
  } conn_tuple_t;

  typedef enum logic {
    CM_CLOSE = 1'b0,
    CM_OPEN  = 1'b1
  } cm_op_e;

  typedef struct packed {
    cm_op_e               op;
    logic [CONN_ID_W-1:0] conn_id;
    conn_tuple_t          tuple;
  } cm_cmd_t;

  // ---------------------------------------------------------------- CCI-P records
  localparam int NIC_W = 3;          // NIC index in a read tag: up to 8 NICs on one FPGA
  localparam int SEQ_W = 3;          // poll sequence number: up to 8 polls per flow in flight
  typedef enum logic {
    TAG_SRC_RX = 1'b0,               // poll of a TX buffer by rx_fsm
    TAG_SRC_TX = 1'b1                // poll of an RX free buffer by ccip_transmitter
  } tag_src_e;

  typedef struct packed {
    logic [NIC_W-1:0]  nic;          // filled by ccip_arbiter
    tag_src_e          src;
    logic [SEQ_W-1:0]  seq;          // rx_fsm: which of a flow's polls in flight this is
    logic [FLOW_W-1:0] flow;
  } ccip_tag_t;                      // 16 bits

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              cached;       // 1: read through the host-coherent cache, 0: direct LLC read
    ccip_tag_t         tag;
  } ccip_rd_req_t;

  typedef struct packed {
    ccip_tag_t         tag;
    logic [LINE_W-1:0] data;
  } ccip_rd_rsp_t;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [LINE_W-1:0] data;
  } ccip_wr_req_t;

  // ---------------------------------------------------------------- network
  typedef struct packed {
    net_addr_t dst;
    rpc_obj_t  payload;
  } ser_pkt_t;                       // serializer -> transport

  typedef struct packed {
    logic [3:0]  version;
    logic [3:0]  ihl;
    logic [7:0]  tos;
    logic [15:0] total_len;
    logic [15:0] id;
    logic [15:0] flags_frag;
    logic [7:0]  ttl;
    logic [7:0]  proto;
    logic [15:0] csum;
    logic [31:0] src;
    logic [31:0] dst;
  } ipv4_hdr_t;                      // 160 bits

  typedef struct packed {
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [15:0] len;
    logic [15:0] csum;
  } udp_hdr_t;

  typedef struct packed {
    ipv4_hdr_t ip;
    udp_hdr_t  udp;
    rpc_obj_t  payload;
  } net_frame_t;                     // 736 bits, one frame per beat

  localparam logic [7:0]  IP_PROTO_UDP = 8'd17;
  localparam logic [15:0] UDP_LEN      = 16'd72;   // 8 + 64
  localparam logic [15:0] IP_TOTAL_LEN = 16'd92;   // 20 + 8 + 64

  // One's-complement sum of the ten 16-bit words of an IPv4 header.
  function automatic logic [15:0] ip_sum(input ipv4_hdr_t h);
    logic [159:0] w;
    logic [19:0]  s;
    w = h;
    s = '0;
    for (int i = 0; i < 10; i++) s = s + 20'(w[i*16 +: 16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return s[15:0];
  endfunction

  // ---------------------------------------------------------------- soft configuration
  typedef struct packed {
    logic              enable;
    logic [FLOW_W:0]   num_flows;     // active flows, 1..NUM_FLOWS
    logic [BATCH_W-1:0] batch;        // CCI-P batch size, 1..MAX_BATCH
    logic [RING_W-1:0] tx_ring_size;  // entries per flow in the host TX buffer
    logic [RING_W-1:0] rx_ring_size;  // entries per flow in the host RX buffer
    logic [ADDR_W-1:0] tx_base;
    logic [ADDR_W-1:0] tx_free_base;
    logic [ADDR_W-1:0] rx_base;
    logic [ADDR_W-1:0] rx_free_base;
    logic [15:0]       poll_threshold; // RPCs per load window above which the LLC is polled directly
    net_addr_t         local_addr;
  } nic_cfg_t;

  // Packet monitor event numbers
  localparam int EV_HOST_RPC_IN   = 0;   // RPC fetched from a host TX buffer
  localparam int EV_HOST_RPC_OUT  = 1;   // RPC written into a host RX buffer
  localparam int EV_NET_TX        = 2;   // frame sent
  localparam int EV_NET_RX        = 3;   // frame accepted
  localparam int EV_NET_DROP      = 4;   // frame rejected by the transport
  localparam int EV_CONN_MISS     = 5;   // RPC dropped: connection not cached
  localparam int EV_TX_STALL      = 6;   // incoming RPC held: no free slot or flow FIFO full
  localparam int EV_POLL_SWITCH   = 7;   // polling mode changed
  localparam int NUM_EVENTS       = 8;

endpackage
