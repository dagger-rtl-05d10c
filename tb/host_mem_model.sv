// Behavioural model of host memory as seen through CCI-P (not synthesizable, testbench only).
//
// Holds LINES cache lines. Read requests are accepted while fewer than MAX_OUT reads are in
// flight (the paper's 128 outstanding CCI-P requests) and answered RD_LAT cycles later with the
// line's contents at answer time, so a poll sees every write that landed before it returns.
// Writes are applied on acceptance. With STALL_PCT > 0 the request channels randomly refuse
// requests to exercise back-pressure. Counts cached (HCC) and direct (LLC) reads separately.
//
// It also plays the host software's side of the rings, through two functions a testbench calls
// between clock edges:
//   produce(): the client thread writes an RPC object into its flow's TX ring, setting the
//     phase bit, if the NIC has freed enough entries (the NIC's bookkeeping line at
//     tx_free_base + flow holds its cumulative freed count in bits [31:16]);
//   consume(): the thread polls the head of its flow's RX ring; when the phase bit shows a new
//     object it takes it and publishes its cumulative consumed count in bits [15:0] of the
//     line at rx_free_base + flow, which the NIC polls for ring credit.
// Ring state is kept per ring address, so several NICs can share one model.
module host_mem_model
  import dagger_pkg::*;
#(
  parameter int LINES     = 4096,
  parameter int RD_LAT    = 80,
  parameter int MAX_OUT   = 128,
  parameter int STALL_PCT = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rd_req_valid,
  output logic         rd_req_ready,
  input  ccip_rd_req_t rd_req,
  output logic         rd_rsp_valid,
  output ccip_rd_rsp_t rd_rsp,
  input  logic         wr_req_valid,
  output logic         wr_req_ready,
  input  ccip_wr_req_t wr_req
);
  logic [LINE_W-1:0] mem [LINES];
  longint unsigned   now;
  int                n_cached, n_direct, n_writes, max_seen;
  typedef struct { longint unsigned due; ccip_rd_req_t req; } pend_t;
  pend_t q [$];
  logic  stall_rd, stall_wr;

  // host-side ring state, keyed by the address of the flow's ring
  int unsigned h_head [int unsigned];
  bit          h_phase [int unsigned];
  int unsigned h_count [int unsigned];

  function automatic void ring_init(int unsigned key);
    if (!h_head.exists(key)) begin h_head[key] = 0; h_phase[key] = 1'b1; h_count[key] = 0; end
  endfunction

  function automatic bit produce(int unsigned tx_base, int unsigned tx_free_base, int unsigned ring,
                                 int unsigned flow, rpc_obj_t obj);
    int unsigned key = tx_base + flow * ring;
    int unsigned nfreed;
    ring_init(key);
    nfreed = int'(mem[(tx_free_base + flow) % LINES][31:16]);
    if (((h_count[key] - nfreed) & 16'hffff) >= ring) return 1'b0;
    obj.hdr.ctl[0] = h_phase[key];
    mem[(key + h_head[key]) % LINES] = obj;
    h_count[key]++;
    h_head[key]++;
    if (h_head[key] == ring) begin h_head[key] = 0; h_phase[key] = !h_phase[key]; end
    return 1'b1;
  endfunction

  function automatic bit consume(int unsigned rx_base, int unsigned rx_free_base, int unsigned ring,
                                 int unsigned flow, output rpc_obj_t obj);
    int unsigned key = rx_base + flow * ring;
    ring_init(key);
    obj = mem[(key + h_head[key]) % LINES];
    if (obj.hdr.ctl[0] != h_phase[key]) return 1'b0;
    h_count[key]++;
    h_head[key]++;
    if (h_head[key] == ring) begin h_head[key] = 0; h_phase[key] = !h_phase[key]; end
    mem[(rx_free_base + flow) % LINES] = LINE_W'(h_count[key] & 16'hffff);
    return 1'b1;
  endfunction

  initial begin
    for (int i = 0; i < LINES; i++) mem[i] = '0;
    n_cached = 0; n_direct = 0; n_writes = 0; max_seen = 0; now = 0;
  end

  assign rd_req_ready = rst_n && (q.size() < MAX_OUT) && !stall_rd;
  assign wr_req_ready = rst_n && !stall_wr;

  always @(posedge clk) begin
    now <= now + 1;
    stall_rd <= (STALL_PCT > 0) && ($urandom_range(99) < STALL_PCT);
    stall_wr <= (STALL_PCT > 0) && ($urandom_range(99) < STALL_PCT);
    rd_rsp_valid <= 1'b0;
    if (!rst_n) begin
      q.delete();
    end else begin
      if (q.size() > 0 && q[0].due <= now) begin
        rd_rsp_valid <= 1'b1;
        rd_rsp.tag   <= q[0].req.tag;
        rd_rsp.data  <= mem[q[0].req.addr % LINES];
        void'(q.pop_front());
      end
      if (rd_req_valid && rd_req_ready) begin
        q.push_back('{due: now + RD_LAT, req: rd_req});
        if (rd_req.cached) n_cached++; else n_direct++;
        if (q.size() > max_seen) max_seen = q.size();
      end
      if (wr_req_valid && wr_req_ready) begin
        mem[wr_req.addr % LINES] = wr_req.data;
        n_writes++;
      end
    end
  end
endmodule
