// End-to-end testbench for dagger_fpga at its default size: two NICs of 64 flows with 65536-entry
// connection caches behind one CCI-P arbiter, joined by the top-of-rack switch, and one host
// memory (400 ns read latency) holding the rings of both. NIC 0 serves a client program, NIC 1 a
// server program; both are played by this testbench through the host memory model.
//
// Set-up goes through MMIO only: ring bases and sizes, local addresses, a low load threshold for
// the polling mode switch, and the connections (opened on both NICs with mirrored destinations,
// and each of the three load-balancing schemes at the server). The client writes requests into
// the TX rings of its flows 0..7; the server takes each request from whichever RX ring the NIC
// chose, and answers on the same flow with its first argument word incremented; the client checks
// every answer arrives on the flow the connection belongs to. The traffic runs in phases: heavy
// load, a phase where the client stops reading its RX rings (ring credit runs out and the TX path
// stalls), light load, and a drain. A few requests use a connection the client NIC does not
// know (a miss), one whose destination the switch does not know (a drop), and one addressed to
// the client NIC itself (a loop through the switch that competes with the server's answers).
//
// Each mechanism is counted and a failure is counted for any that never happened: batching,
// credit polls, TX stalls, poll-mode switches in both directions, connection misses, switch
// drops, switch and arbiter contention, and each load-balancing scheme. The packet-monitor
// counters are read back over MMIO and compared with the testbench's own counts, and the round
// trip of a lone RPC is measured in cycles.
module dagger_fpga_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 200000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %0t %s", $time, m); end
  endtask
  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  endtask
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("watchdog expired");
    finish_tb();
  end
  localparam int NN = 2, NF = 64, CF = 8, NCONN = 48;
  localparam logic [15:0] PORT = 16'd5000;
  localparam logic [31:0] MISS_ID = 32'h0000_7777, DROP_ID = 32'h0000_8888, SELF_ID = 32'h0000_9999;

  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready;
  ccip_rd_req_t rd_req;
  ccip_rd_rsp_t rd_rsp;
  ccip_wr_req_t wr_req;
  logic mmio_wr_valid, mmio_rd_valid, mmio_rd_rsp_valid;
  logic [11:0] mmio_wr_addr, mmio_rd_addr;
  logic [63:0] mmio_wr_data, mmio_rd_rsp_data;
  logic [31:0] switch_ip [NN];
  logic poll_direct [NN];
  logic [NUM_EVENTS-1:0] nic_events [NN];
  logic sw_drop, sw_contend;

  dagger_fpga dut (.*);
  host_mem_model #(.LINES(4096), .RD_LAT(80)) u_mem (.*);

  // host memory map per NIC (in cache lines)
  function automatic int unsigned tx_base(int n);      return 32'h000 + 32'h800 * n; endfunction
  function automatic int unsigned tx_free_base(int n); return 32'h300 + 32'h800 * n; endfunction
  function automatic int unsigned rx_base(int n);      return 32'h400 + 32'h800 * n; endfunction
  function automatic int unsigned rx_free_base(int n); return 32'h600 + 32'h800 * n; endfunction
  function automatic logic [31:0] nic_ip(int n);       return 32'h0a00_0001 + 32'(n); endfunction

  // ---------------------------------------------------------------- MMIO
  task automatic mmio_wr(int n, logic [7:0] r, logic [63:0] d);
    @(negedge clk); mmio_wr_valid = 1; mmio_wr_addr = {4'(n), r}; mmio_wr_data = d;
    @(negedge clk); mmio_wr_valid = 0;
  endtask
  task automatic mmio_rd(int n, logic [7:0] r, output logic [63:0] d);
    @(negedge clk); mmio_rd_valid = 1; mmio_rd_addr = {4'(n), r};
    @(negedge clk); mmio_rd_valid = 0;
    d = mmio_rd_rsp_data;
  endtask
  task automatic open_conn(int n, logic [31:0] id, int flow, lb_e lb, logic [31:0] ip);
    mmio_wr(n, 8'h10, 64'(id));
    mmio_wr(n, 8'h11, {PORT, ip, 5'd0, 2'(lb), 9'(flow)});
    mmio_wr(n, 8'h12, 64'd1);
  endtask

  // ---------------------------------------------------------------- bookkeeping
  typedef struct { logic [31:0] conn; int flow; logic [31:0] arg; longint t0; } req_t;
  req_t        outst [logic [31:0]];      // client requests in flight, by rpc id
  rpc_obj_t    srv_pend [NF][$];          // server answers waiting for TX ring room
  rpc_obj_t    cli_pend [CF][$];          // client requests waiting for TX ring room
  int          conn_lb [logic [31:0]];
  logic [31:0] next_id = 1;
  longint      cyc = 0;
  int n_req = 0, n_rsp = 0, n_srv = 0, n_self = 0, n_lost_exp = 0;
  int n_lb [3];
  int n_batch = 0, n_credit_poll = 0, n_stall = 0, n_to_direct = 0, n_to_cached = 0;
  int n_miss = 0, n_sw_drop = 0, n_sw_contend = 0, n_arb_contend = 0, n_net_rx1 = 0;
  longint lone_rtt = -1;
  logic pd_q [NN];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int n = 0; n < NN; n++) begin
        if (pd_q[n] != poll_direct[n]) begin
          if (poll_direct[n]) n_to_direct++; else n_to_cached++;
        end
        pd_q[n] <= poll_direct[n];
        if (nic_events[n][EV_TX_STALL]) n_stall++;
        if (nic_events[n][EV_CONN_MISS]) n_miss++;
      end
      if (nic_events[1][EV_NET_RX]) n_net_rx1++;
      if (sw_drop) n_sw_drop++;
      if (sw_contend) n_sw_contend++;
      if (rd_req_valid && rd_req_ready && rd_req.tag.src == TAG_SRC_TX) n_credit_poll++;
      if (dut.u_arb.n_rd_req_valid[0] && dut.u_arb.n_rd_req_valid[1]) n_arb_contend++;
      if (dut.g_nic[0].u_nic.u_txp.u_tx.grant_valid && dut.g_nic[0].u_nic.u_txp.u_tx.grant_ready) n_batch++;
      if (dut.g_nic[1].u_nic.u_txp.u_tx.grant_valid && dut.g_nic[1].u_nic.u_txp.u_tx.grant_ready) n_batch++;
    end
  end

  // client: issue one request over connection id, from the flow that owns the connection
  task automatic client_issue(logic [31:0] id);
    rpc_obj_t o = '0;
    int f = (id == MISS_ID || id == DROP_ID || id == SELF_ID) ? $urandom_range(CF - 1) : int'(id % CF);
    o.hdr.rtype = RPC_REQUEST;
    o.hdr.fn_id = 16'h0001;
    o.hdr.conn_id = id;
    o.hdr.rpc_id = next_id;
    o.hdr.arg_len = 16'd8;
    o.args[383 -: 64] = {$urandom, $urandom};
    if (id == MISS_ID || id == DROP_ID) n_lost_exp++;
    else if (id != SELF_ID) outst[next_id] = '{conn: id, flow: f, arg: o.args[383 -: 32], t0: cyc};
    next_id++;
    n_req++;
    cli_pend[f].push_back(o);
  endtask

  // one cycle of host software on both sides
  task automatic host_step(bit client_reads, bit light);
    rpc_obj_t o;
    // client TX rings
    for (int f = 0; f < CF; f++)
      if (cli_pend[f].size() != 0 &&
          u_mem.produce(tx_base(0), tx_free_base(0), 10, f, cli_pend[f][0])) begin
        if (outst.exists(cli_pend[f][0].hdr.rpc_id)) outst[cli_pend[f][0].hdr.rpc_id].t0 = cyc;
        void'(cli_pend[f].pop_front());
      end
    // client RX rings
    if (client_reads)
      for (int f = 0; f < NF; f++)
        while (u_mem.consume(rx_base(0), rx_free_base(0), 4, f, o)) begin
          if (o.hdr.rtype == RPC_REQUEST) begin
            check(o.hdr.conn_id == SELF_ID && f == 0, "request looped back to the client on flow 0");
            n_self++;
          end else begin
            check(outst.exists(o.hdr.rpc_id), "answer matches a request in flight");
            if (outst.exists(o.hdr.rpc_id)) begin
              check(f == outst[o.hdr.rpc_id].flow, "answer on the requesting flow");
              check(o.hdr.conn_id == outst[o.hdr.rpc_id].conn, "answer on the same connection");
              check(o.args[383 -: 32] == outst[o.hdr.rpc_id].arg + 1, "answer computed by the server");
              if (light && lone_rtt < 0 && outst.size() == 1) lone_rtt = cyc - outst[o.hdr.rpc_id].t0;
              outst.delete(o.hdr.rpc_id);
            end
            n_rsp++;
          end
        end
    // server RX rings: answer each request on the flow it arrived on
    for (int f = 0; f < NF; f++) begin
      while (u_mem.consume(rx_base(1), rx_free_base(1), 4, f, o)) begin
        int lb;
        check(o.hdr.rtype == RPC_REQUEST && conn_lb.exists(o.hdr.conn_id), "server got a known request");
        lb = conn_lb.exists(o.hdr.conn_id) ? conn_lb[o.hdr.conn_id] : 0;
        if (lb == LB_STATIC) check(f == int'(o.hdr.conn_id % NF), "static scheme keeps the connection's flow");
        n_lb[lb]++;
        n_srv++;
        o.hdr.rtype = RPC_RESPONSE;
        o.args[383 -: 32] = o.args[383 -: 32] + 1;
        srv_pend[f].push_back(o);
      end
      if (srv_pend[f].size() != 0 && u_mem.produce(tx_base(1), tx_free_base(1), 10, f, srv_pend[f][0]))
        void'(srv_pend[f].pop_front());
    end
  endtask

  function automatic logic [31:0] pick_conn();
    int r = $urandom_range(199);
    if (r == 0) return MISS_ID;
    if (r == 1) return DROP_ID;
    if (r < 6) return SELF_ID;
    return 32'(1 + $urandom_range(NCONN - 1));
  endfunction

  initial begin
    logic [63:0] d;
    mmio_wr_valid = 0; mmio_rd_valid = 0; mmio_wr_addr = 0; mmio_rd_addr = 0; mmio_wr_data = 0;
    foreach (switch_ip[n]) switch_ip[n] = nic_ip(n);
    foreach (n_lb[i]) n_lb[i] = 0;
    foreach (pd_q[n]) pd_q[n] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // the connection caches clear their valid bits after reset
    wait (!dut.g_nic[0].u_nic.u_cm.busy && !dut.g_nic[1].u_nic.u_cm.busy);
    for (int n = 0; n < NN; n++) begin
      mmio_wr(n, 8'h05, tx_base(n));
      mmio_wr(n, 8'h06, tx_free_base(n));
      mmio_wr(n, 8'h07, rx_base(n));
      mmio_wr(n, 8'h08, rx_free_base(n));
      mmio_wr(n, 8'h09, 64'd48);                          // load threshold per window
      mmio_wr(n, 8'h0A, {16'd0, PORT, nic_ip(n)});
      mmio_rd(n, 8'h01, d);
      check(d == 64'(NF), "64 flows active by default");
      mmio_rd(n, 8'h02, d);
      check(d == 64'd4, "batch of 4 by default");
    end
    for (int c = 1; c <= NCONN; c++) begin
      conn_lb[32'(c)] = c % 3;
      open_conn(0, 32'(c), c % CF, LB_STATIC, nic_ip(1));
      open_conn(1, 32'(c), c % NF, lb_e'(c % 3), nic_ip(0));
    end
    open_conn(0, DROP_ID, 0, LB_STATIC, 32'hc0a8_0001);
    open_conn(0, SELF_ID, 0, LB_STATIC, nic_ip(0));
    // check one connection through the query registers
    mmio_wr(1, 8'h13, 64'd5);
    repeat (3) @(negedge clk);
    mmio_rd(1, 8'h14, d);
    check(d[63] && d[62] && d[8:0] == 9'd5 && d[10:9] == 2'd2, "connection query");
    for (int n = 0; n < NN; n++) mmio_wr(n, 8'h00, 64'd1);

    // phase 1: heavy load
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      if ($urandom_range(9) == 0) client_issue(pick_conn());
      host_step(1, 0);
    end
    // phase 2: the client stops reading its RX rings while requests continue on flow 0
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (c < 1500 && cli_pend[0].size() < 4) client_issue(32'(8));
      host_step(0, 0);
    end
    // phase 3: light load; software lowers the batch size to 1, as the paper's soft configuration
    // allows, so that lone RPCs do not wait for a batch to fill
    for (int n = 0; n < NN; n++) mmio_wr(n, 8'h02, 64'd1);
    for (int c = 0; c < 8000; c++) begin
      @(negedge clk);
      if (c % 400 == 0 && outst.size() == 0) client_issue(32'(1 + $urandom_range(NCONN - 1)));
      host_step(1, 1);
    end
    // drain
    for (int c = 0; c < 20000 && (outst.size() != 0 || c < 500); c++) begin
      @(negedge clk);
      host_step(1, 1);
    end
    check(outst.size() == 0, $sformatf("every request answered (%0d left)", outst.size()));
    check(n_rsp + n_self + n_lost_exp == n_req, "requests = answers + loops + expected losses");
    // counters read over MMIO
    mmio_rd(1, 8'(8'h20 + EV_NET_RX), d);
    check(d == 64'(n_net_rx1), "NIC 1 network-receive counter");
    mmio_rd(1, 8'(8'h20 + EV_HOST_RPC_IN), d);
    check(d == 64'(n_srv), "NIC 1 host-RPC counter equals server answers sent");
    mmio_rd(0, 8'(8'h20 + EV_CONN_MISS), d);
    check(d != 0, "NIC 0 miss counter");
    $display("requests %0d answers %0d loops %0d lost %0d; lone round trip %0d cycles",
             n_req, n_rsp, n_self, n_lost_exp, lone_rtt);
    $display("batches %0d credit polls %0d stalls %0d to-direct %0d to-cached %0d misses %0d",
             n_batch, n_credit_poll, n_stall, n_to_direct, n_to_cached, n_miss);
    $display("switch drops %0d switch contention %0d arbiter contention %0d lb rr/static/object %0d/%0d/%0d",
             n_sw_drop, n_sw_contend, n_arb_contend, n_lb[0], n_lb[1], n_lb[2]);
    check(n_batch > 0, "batching happened");
    check(n_credit_poll > 0, "ring credit polls happened");
    check(n_stall > 0, "TX path stall happened");
    check(n_to_direct > 0, "switch to direct polling happened");
    check(n_to_cached > 0, "switch back to cached polling happened");
    check(n_miss > 0, "connection miss happened");
    check(n_sw_drop > 0, "switch drop happened");
    check(n_sw_contend > 0, "switch contention happened");
    check(n_arb_contend > 0, "arbiter contention happened");
    check(n_self > 0, "loop through the switch happened");
    for (int i = 0; i < 3; i++) check(n_lb[i] > 0, $sformatf("load-balancing scheme %0d used", i));
    // a lone RPC waits for two TX-ring polls (each flow is polled once per round over 64 flows,
    // 80 cycles per read) and up to two ring-credit reads, plus the pipelines: allow 2000 cycles
    check(lone_rtt > 0 && lone_rtt < 2000, $sformatf("lone round trip %0d cycles", lone_rtt));
    finish_tb();
  end
endmodule
