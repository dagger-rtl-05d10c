// Self-checking testbench for rpc_unit with a 256-entry connection manager. Connections are
// opened with random destinations, flows and load-balancing schemes. Outgoing RPCs (some on
// connections never opened) must leave as packets addressed to their connection's destination,
// in order, with misses dropped; incoming payloads (some malformed, some unknown) must reach the
// flow the connection's scheme picks (round-robin, static, or key hash), with bad and unknown
// ones dropped. Both outputs apply random back-pressure.
module rpc_unit_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 60000;
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
  localparam int NF = 16;
  logic [FLOW_W:0] num_flows;
  logic host_valid, host_ready, net_tx_valid, net_tx_ready, net_rx_valid, net_rx_ready, nic_rx_valid, nic_rx_ready;
  rpc_obj_t host_rpc, net_rx_payload, nic_rx_rpc;
  ser_pkt_t net_tx_pkt;
  logic [FLOW_W-1:0] nic_rx_flow;
  logic [CONN_ID_W-1:0] cm_a_conn_id, cm_b_conn_id, cm_c_conn_id;
  logic cm_a_hit, cm_b_hit, cm_c_hit, ev_miss, ev_bad, busy, cm_wr_valid;
  net_addr_t cm_a_dest;
  logic [FLOW_W-1:0] cm_b_src_flow;
  lb_e cm_b_lb;
  conn_tuple_t cm_c_tuple;
  cm_cmd_t cm_wr_cmd;

  rpc_unit dut (.*);
  connection_manager #(.N_ENTRIES(256)) u_cm (
    .clk, .rst_n, .busy, .wr_valid(cm_wr_valid), .wr_cmd(cm_wr_cmd),
    .a_conn_id(cm_a_conn_id), .a_hit(cm_a_hit), .a_dest(cm_a_dest),
    .b_conn_id(cm_b_conn_id), .b_hit(cm_b_hit), .b_src_flow(cm_b_src_flow), .b_lb(cm_b_lb),
    .c_conn_id(cm_c_conn_id), .c_hit(cm_c_hit), .c_tuple(cm_c_tuple));

  conn_tuple_t conns [logic [31:0]];
  logic [31:0] ids [$];
  logic [31:0] txq [$];           // rpc ids expected on net_tx
  logic [31:0] rxq [$];           // rpc ids expected on nic_rx
  int n_tx = 0, n_rx = 0, n_tx_miss = 0, n_rx_drop = 0, rr = 0;
  int n_lb [3];
  bit used_idx [256];
  logic [31:0] next_id = 1;

  function automatic int ref_hash(logic [63:0] k, int nf);
    logic [31:0] h;
    h = k[63:32] ^ k[31:0];
    h = h * 32'h9E37_79B1;
    h = h ^ (h >> 16);
    return int'((longint'(h[15:0]) * nf) >> 16);
  endfunction

  function automatic logic [31:0] pick_id(bit known);
    logic [31:0] id;
    if (known) return ids[$urandom_range(ids.size() - 1)];
    do id = $urandom; while (conns.exists(id) || conns.exists({id[31:8] ^ 24'h1, id[7:0]}));
    // an id whose table entry holds a different connection, or no connection: a miss
    return id;
  endfunction

  task automatic new_host();
    bit known = $urandom_range(99) < 85;
    host_rpc = '0;
    host_rpc.hdr.conn_id = pick_id(known);
    host_rpc.hdr.rpc_id = next_id++;
    host_rpc.hdr.rtype = RPC_REQUEST;
    host_rpc.hdr.arg_len = 16'($urandom_range(48));
    host_rpc.hdr.ctl = 8'h01;
    for (int b = 0; b < int'(host_rpc.hdr.arg_len); b++) host_rpc.args[(47-b)*8 +: 8] = 8'($urandom);
  endtask

  task automatic new_net();
    int kind = $urandom_range(9);
    net_rx_payload = '0;
    net_rx_payload.hdr.conn_id = pick_id(kind != 0);
    net_rx_payload.hdr.rpc_id = next_id++;
    net_rx_payload.hdr.rtype = ($urandom_range(4) == 0) ? RPC_RESPONSE : RPC_REQUEST;
    net_rx_payload.hdr.arg_len = 16'd16;
    net_rx_payload.args[383 -: 128] = {$urandom, $urandom, $urandom, $urandom};
    if (kind == 1) net_rx_payload.args[0 +: 8] = 8'h5a;   // non-zero padding: malformed
  endtask

  initial begin
    bit hacc = 0, nacc = 0, txf, rxf;
    num_flows = NF; host_valid = 0; net_rx_valid = 0; net_tx_ready = 0; nic_rx_ready = 0;
    cm_wr_valid = 0; cm_wr_cmd = '0; cm_c_conn_id = 0;
    foreach (n_lb[i]) n_lb[i] = 0;
    foreach (used_idx[i]) used_idx[i] = 0;
    new_host(); new_net();
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (!busy);
    for (int i = 0; i < 60; i++) begin
      logic [31:0] id;
      conn_tuple_t t;
      do id = $urandom; while (used_idx[id[7:0]]);
      used_idx[id[7:0]] = 1;
      t = '{src_flow: FLOW_W'($urandom_range(NF - 1)), dest: '{ip: $urandom, port: 16'($urandom)},
            lb: lb_e'(i % 3)};
      @(negedge clk); cm_wr_valid = 1; cm_wr_cmd = '{op: CM_OPEN, conn_id: id, tuple: t};
      conns[id] = t; ids.push_back(id);
    end
    @(negedge clk); cm_wr_valid = 0;
    new_host(); new_net();
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      if (!host_valid || hacc) begin
        host_valid = (c < 5500) && $urandom_range(1);
        new_host();
      end
      if (!net_rx_valid || nacc) begin
        net_rx_valid = (c < 5500) && $urandom_range(1);
        new_net();
      end
      net_tx_ready = $urandom_range(99) < 70;
      nic_rx_ready = $urandom_range(99) < 70;
      #1;
      hacc = host_valid && host_ready;
      nacc = net_rx_valid && net_rx_ready;
      txf = net_tx_valid && net_tx_ready;
      rxf = nic_rx_valid && nic_rx_ready;
      if (hacc) begin
        if (conns.exists(host_rpc.hdr.conn_id)) txq.push_back(host_rpc.hdr.rpc_id); else n_tx_miss++;
      end
      if (nacc) begin
        if (conns.exists(net_rx_payload.hdr.conn_id) && net_rx_payload.args[7:0] == 0)
          rxq.push_back(net_rx_payload.hdr.rpc_id);
        else n_rx_drop++;
      end
      if (txf) begin
        conn_tuple_t t;
        check(txq.size() != 0 && net_tx_pkt.payload.hdr.rpc_id == txq[0], "outgoing order, misses dropped");
        if (txq.size() != 0) void'(txq.pop_front());
        t = conns[net_tx_pkt.payload.hdr.conn_id];
        check(net_tx_pkt.dst == t.dest, "packet carries its connection's destination");
        check(net_tx_pkt.payload.hdr.ctl == 0, "control byte cleared on the wire");
        n_tx++;
      end
      if (rxf) begin
        conn_tuple_t t;
        int e;
        check(rxq.size() != 0 && nic_rx_rpc.hdr.rpc_id == rxq[0], "incoming order, drops removed");
        if (rxq.size() != 0) void'(rxq.pop_front());
        t = conns[nic_rx_rpc.hdr.conn_id];
        if (nic_rx_rpc.hdr.rtype == RPC_RESPONSE || t.lb == LB_STATIC) e = int'(t.src_flow);
        else if (t.lb == LB_OBJECT) e = ref_hash(nic_rx_rpc.args[383 -: 64], NF);
        else begin e = rr; rr = (rr + 1) % NF; end
        check(int'(nic_rx_flow) == e, $sformatf("flow for scheme %0d: exp %0d got %0d", t.lb, e, nic_rx_flow));
        if (nic_rx_rpc.hdr.rtype == RPC_REQUEST) n_lb[t.lb]++;
        n_rx++;
      end
      @(posedge clk);
    end
    check(n_tx > 500 && n_rx > 500, $sformatf("traffic tx %0d rx %0d", n_tx, n_rx));
    check(txq.size() == 0 && rxq.size() == 0, "nothing lost");
    check(n_tx_miss > 0 && n_rx_drop > 0, "misses and bad payloads exercised");
    check(n_lb[0] > 0 && n_lb[1] > 0 && n_lb[2] > 0, "all three load-balancing schemes used");
    finish_tb();
  end
endmodule
