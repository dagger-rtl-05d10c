// Self-checking testbench for one dagger_nic (8 flows, 256-entry connection cache) with its
// network port looped back to itself and the host memory model behind its CCI-P port. The host
// program is both client and server: requests on a connection addressed to the NIC's own IP come
// back in as requests, are answered by the server side on the flow the NIC chose, and the answers
// come back in once more and must reach the client flow that owns the connection. On the loop,
// some frames get a broken IPv4 checksum and must be dropped and counted. Checks the answers, the
// packet-monitor counters read over MMIO, and that misses, drops and batching happened.
module dagger_nic_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 100000;
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
  localparam int NF = 8, NCONN = 24;
  localparam logic [31:0] MY_IP = 32'h0a00_0005;
  localparam logic [15:0] PORT = 16'd4000;
  localparam logic [31:0] MISS_ID = 32'h0000_7777;
  localparam int unsigned TXB = 32'h000, TXF = 32'h100, RXB = 32'h200, RXF = 32'h300;

  logic mmio_wr_valid, mmio_rd_valid, mmio_rd_rsp_valid;
  logic [7:0] mmio_wr_addr, mmio_rd_addr;
  logic [63:0] mmio_wr_data, mmio_rd_rsp_data;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready;
  ccip_rd_req_t rd_req;
  ccip_rd_rsp_t rd_rsp;
  ccip_wr_req_t wr_req;
  logic net_tx_valid, net_tx_ready, net_rx_valid, net_rx_ready, poll_direct;
  net_frame_t net_tx_frame, net_rx_frame;
  logic [NUM_EVENTS-1:0] events;

  dagger_nic #(.NUM_FLOWS(NF), .N_CONN(256), .MAX_BATCH(4)) dut (.*);
  host_mem_model #(.LINES(1024), .RD_LAT(40)) u_mem (.*);

  // network loop with occasional corruption (decided at the negative edge)
  bit corrupt;
  always_comb begin
    net_rx_valid = net_tx_valid;
    net_tx_ready = net_rx_ready;
    net_rx_frame = net_tx_frame;
    if (corrupt) net_rx_frame.ip.csum = net_tx_frame.ip.csum ^ 16'h0040;
  end

  task automatic mmio_wr(logic [7:0] r, logic [63:0] d);
    @(negedge clk); mmio_wr_valid = 1; mmio_wr_addr = r; mmio_wr_data = d;
    @(negedge clk); mmio_wr_valid = 0;
  endtask
  task automatic mmio_rd(logic [7:0] r, output logic [63:0] d);
    @(negedge clk); mmio_rd_valid = 1; mmio_rd_addr = r;
    @(negedge clk); mmio_rd_valid = 0;
    d = mmio_rd_rsp_data;
  endtask

  typedef struct { int flow; logic [31:0] arg; } req_t;
  req_t outst [logic [31:0]];
  rpc_obj_t pend [NF][$];
  logic [31:0] next_id = 1;
  int n_req = 0, n_rsp = 0, n_srv = 0, n_lost = 0, n_corrupt = 0, n_ev [NUM_EVENTS];

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NUM_EVENTS; i++) if (events[i]) n_ev[i]++;
    if (corrupt && net_tx_valid && net_rx_ready) n_corrupt++;
  end

  task automatic host_step();
    rpc_obj_t o;
    for (int f = 0; f < NF; f++) begin
      while (u_mem.consume(RXB, RXF, 4, f, o)) begin
        if (o.hdr.rtype == RPC_REQUEST) begin
          // server side: answer on this flow
          n_srv++;
          o.hdr.rtype = RPC_RESPONSE;
          o.args[383 -: 32] = o.args[383 -: 32] ^ 32'hffff_ffff;
          pend[f].push_back(o);
        end else begin
          check(outst.exists(o.hdr.rpc_id), "answer matches a request");
          if (outst.exists(o.hdr.rpc_id)) begin
            check(outst[o.hdr.rpc_id].flow == f, "answer on the owning flow");
            check(o.args[383 -: 32] == ~outst[o.hdr.rpc_id].arg, "answer computed by the server side");
            outst.delete(o.hdr.rpc_id);
          end
          n_rsp++;
        end
      end
      if (pend[f].size() != 0 && u_mem.produce(TXB, TXF, 10, f, pend[f][0])) void'(pend[f].pop_front());
    end
  endtask

  initial begin
    logic [63:0] d;
    mmio_wr_valid = 0; mmio_rd_valid = 0; mmio_wr_addr = 0; mmio_rd_addr = 0; mmio_wr_data = 0;
    corrupt = 0;
    foreach (n_ev[i]) n_ev[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (!dut.u_cm.busy);
    mmio_wr(8'h05, TXB); mmio_wr(8'h06, TXF); mmio_wr(8'h07, RXB); mmio_wr(8'h08, RXF);
    mmio_wr(8'h0A, {16'd0, PORT, MY_IP});
    for (int c = 1; c <= NCONN; c++) begin
      mmio_wr(8'h10, 64'(c));
      mmio_wr(8'h11, {PORT, MY_IP, 5'd0, 2'(c % 3), 9'(c % NF)});
      mmio_wr(8'h12, 64'd1);
    end
    mmio_wr(8'h00, 1);
    for (int c = 0; c < 12000; c++) begin
      @(negedge clk);
      corrupt = ($urandom_range(29) == 0);
      if (c == 8000) begin
        // lower the batch size so the last partial batches drain
        mmio_wr(8'h02, 1);
      end
      if (c < 7000 && $urandom_range(11) == 0) begin
        automatic rpc_obj_t o = '0;
        automatic logic [31:0] id = ($urandom_range(49) == 0) ? MISS_ID : 32'(1 + $urandom_range(NCONN - 1));
        automatic int f = int'(id % NF);
        o.hdr.rtype = RPC_REQUEST; o.hdr.conn_id = id; o.hdr.rpc_id = next_id; o.hdr.arg_len = 16'd4;
        o.args[383 -: 32] = $urandom;
        if (id != MISS_ID && pend[f].size() < 16) begin
          outst[next_id] = '{flow: int'(id % NF) % NF, arg: o.args[383 -: 32]};
          pend[f].push_back(o); n_req++;
        end else if (id == MISS_ID) begin
          pend[f].push_back(o); n_lost++;
        end
        next_id++;
      end
      host_step();
    end
    // with corruption some requests or answers are lost; everything else must have arrived
    check(n_corrupt > 0 && n_ev[EV_NET_DROP] == n_corrupt, $sformatf("corrupt frames dropped %0d/%0d", n_ev[EV_NET_DROP], n_corrupt));
    check(n_rsp + outst.size() == n_req, "answers plus losses equal requests");
    check(outst.size() <= n_corrupt, $sformatf("only corrupted RPCs missing (%0d)", outst.size()));
    check(n_rsp > 300, $sformatf("answers %0d", n_rsp));
    check(n_ev[EV_CONN_MISS] > 0, "connection misses");
    mmio_rd(8'(8'h20 + EV_NET_TX), d);
    check(d == 64'(n_ev[EV_NET_TX]), "network-transmit counter");
    mmio_rd(8'(8'h20 + EV_HOST_RPC_OUT), d);
    check(d == 64'(n_srv + n_rsp), "host-RPC-out counter equals objects delivered to the host");
    mmio_rd(8'(8'h20 + EV_NET_DROP), d);
    check(d == 64'(n_corrupt), "drop counter");
    finish_tb();
  end
endmodule
