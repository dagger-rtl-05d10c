// Connection Manager (CM): direct-mapped connection cache with one write and three read ports.
//
// A connection id (c_id) maps to the tuple <src_flow, dest_addr, load_balancer>. As the paper
// describes, the tuple is split into three tables indexed by the log2(N) low bits of the c_id, so
// that the outgoing RPC flow (port A: destination address), the incoming RPC flow (port B:
// src_flow and load balancer) and the CM's own command path (port C: whole tuple) can all read in
// the same cycle while the CM writes. This design adds a fourth table holding a valid bit and the
// upper c_id bits (the tag) so that a lookup of a connection that is not cached reports a miss.
//
// Timing: every read port is registered; the result for the address presented in cycle t is valid
// in cycle t+1 (read-before-write when t also writes the same entry). Open/close writes take
// effect at the end of the cycle they are presented in. After reset the valid bits are cleared by
// a sweep of N_ENTRIES cycles, during which busy is high and writes are ignored.
module connection_manager
  import dagger_pkg::*;
#(
  parameter int N_ENTRIES = 65536
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 busy,
  // write port (open/close)
  input  logic                 wr_valid,
  input  cm_cmd_t              wr_cmd,
  // port A: outgoing flow
  input  logic [CONN_ID_W-1:0] a_conn_id,
  output logic                 a_hit,
  output net_addr_t            a_dest,
  // port B: incoming flow
  input  logic [CONN_ID_W-1:0] b_conn_id,
  output logic                 b_hit,
  output logic [FLOW_W-1:0]    b_src_flow,
  output lb_e                  b_lb,
  // port C: connection manager queries
  input  logic [CONN_ID_W-1:0] c_conn_id,
  output logic                 c_hit,
  output conn_tuple_t          c_tuple
);
  localparam int IDX_W = $clog2(N_ENTRIES);
  localparam int TG_W  = CONN_ID_W - IDX_W;

  typedef struct packed {
    logic            valid;
    logic [TG_W-1:0] tag;
  } tagv_t;

  tagv_t             tag_mem  [N_ENTRIES];
  net_addr_t         dest_mem [N_ENTRIES];
  logic [FLOW_W-1:0] flow_mem [N_ENTRIES];
  lb_e               lb_mem   [N_ENTRIES];

  logic [IDX_W:0]    init_cnt;
  assign busy = !init_cnt[IDX_W];

  function automatic logic [IDX_W-1:0] idx(input logic [CONN_ID_W-1:0] c);
    return c[IDX_W-1:0];
  endfunction
  function automatic logic [TG_W-1:0] tg(input logic [CONN_ID_W-1:0] c);
    return c[CONN_ID_W-1:IDX_W];
  endfunction

  // write port, shared by the init sweep
  logic             we;
  logic [IDX_W-1:0] widx;
  tagv_t            wtag;
  always_comb begin
    if (busy) begin
      we   = 1'b1;
      widx = init_cnt[IDX_W-1:0];
      wtag = '0;
    end else begin
      we   = wr_valid;
      widx = idx(wr_cmd.conn_id);
      wtag = '{valid: (wr_cmd.op == CM_OPEN), tag: tg(wr_cmd.conn_id)};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) init_cnt <= '0;
    else if (busy) init_cnt <= init_cnt + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (we) tag_mem[widx] <= wtag;
    if (!busy && wr_valid && wr_cmd.op == CM_OPEN) begin
      dest_mem[widx] <= wr_cmd.tuple.dest;
      flow_mem[widx] <= wr_cmd.tuple.src_flow;
      lb_mem[widx]   <= wr_cmd.tuple.lb;
    end
  end

  // registered reads
  tagv_t            a_tag_q, b_tag_q, c_tag_q;
  logic [TG_W-1:0]  a_want_q, b_want_q, c_want_q;
  always_ff @(posedge clk) begin
    a_tag_q    <= tag_mem[idx(a_conn_id)];
    a_dest     <= dest_mem[idx(a_conn_id)];
    a_want_q   <= tg(a_conn_id);
    b_tag_q    <= tag_mem[idx(b_conn_id)];
    b_src_flow <= flow_mem[idx(b_conn_id)];
    b_lb       <= lb_mem[idx(b_conn_id)];
    b_want_q   <= tg(b_conn_id);
    c_tag_q    <= tag_mem[idx(c_conn_id)];
    c_tuple    <= '{src_flow: flow_mem[idx(c_conn_id)], dest: dest_mem[idx(c_conn_id)],
                    lb: lb_mem[idx(c_conn_id)]};
    c_want_q   <= tg(c_conn_id);
  end

  assign a_hit = !busy && a_tag_q.valid && (a_tag_q.tag == a_want_q);
  assign b_hit = !busy && b_tag_q.valid && (b_tag_q.tag == b_want_q);
  assign c_hit = !busy && c_tag_q.valid && (c_tag_q.tag == c_want_q);
endmodule
