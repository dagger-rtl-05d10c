// Load balancer of the RPC unit: picks the NIC flow (host RX ring) for an incoming RPC.
//
// Responses are steered to src_flow of their connection, so they reach the flow that issued the
// request, as the paper requires. Requests use the scheme stored in their connection tuple:
//   LB_ROUND_ROBIN  dynamic uniform steering: flows 0..num_flows-1 in turn;
//   LB_STATIC       static balancing: src_flow from the connection tuple;
//   LB_OBJECT       object-level affinity (the paper's MICA balancer): a hash of the first
//                   KEY_BYTES argument bytes, so one key always lands in one flow.
// The paper names the schemes but not the hash. Here h = (k_hi ^ k_lo) * 0x9E3779B1, h ^= h >> 16,
// and the flow is (h[15:0] * num_flows) >> 16, a multiply-shift reduction into 0..num_flows-1.
// A src_flow outside the active range is replaced by flow 0.
// Timing: flow is combinational from the inputs; the round-robin pointer advances on the edge
// where fire is high for a request using LB_ROUND_ROBIN.
module load_balancer
  import dagger_pkg::*;
#(
  parameter int KEY_BYTES = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fire,
  input  rpc_hdr_t          hdr,
  input  logic [ARG_BYTES*8-1:0] args,
  input  logic [FLOW_W-1:0] src_flow,
  input  lb_e               lb,
  input  logic [FLOW_W:0]   num_flows,
  output logic [FLOW_W-1:0] flow
);
  logic [FLOW_W-1:0] rr;

  function automatic logic [31:0] key_hash(input logic [KEY_BYTES*8-1:0] key);
    logic [63:0] k;
    logic [31:0] h;
    k = 64'(key);
    h = k[63:32] ^ k[31:0];
    h = h * 32'h9E37_79B1;
    h = h ^ (h >> 16);
    return h;
  endfunction

  logic [31:0]       h;
  logic [15+FLOW_W+1:0] prod;
  logic [FLOW_W-1:0] stat;
  assign h    = key_hash(args[ARG_BYTES*8-1 -: KEY_BYTES*8]);
  assign prod = h[15:0] * num_flows;
  assign stat = (32'(src_flow) < 32'(num_flows)) ? src_flow : '0;

  always_comb begin
    if (hdr.rtype == RPC_RESPONSE) flow = stat;
    else begin
      unique case (lb)
        LB_STATIC: flow = stat;
        LB_OBJECT: flow = prod[16 +: FLOW_W];
        default:   flow = rr;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rr <= '0;
    else if (fire && hdr.rtype != RPC_RESPONSE && lb != LB_STATIC && lb != LB_OBJECT)
      rr <= (32'(rr) + 1 >= 32'(num_flows)) ? '0 : rr + 1'b1;
  end
endmodule
