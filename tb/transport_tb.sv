// Self-checking testbench for transport, with its transmit side looped to its receive side.
// Each frame built is compared with fields and a header checksum computed here; good frames must
// come back out as the original payload, in order; frames corrupted on the way (checksum, address,
// port, protocol) must be dropped and counted. Random stalls on both outputs exercise the
// handshakes.
module transport_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 40000;
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
  net_addr_t local_addr;
  logic tx_in_valid, tx_in_ready, tx_out_valid, tx_out_ready;
  ser_pkt_t tx_in_pkt;
  net_frame_t tx_out_frame, rx_in_frame;
  logic rx_in_valid, rx_in_ready, rx_out_valid, rx_out_ready;
  rpc_obj_t rx_out_payload;
  logic ev_tx, ev_rx, ev_drop;
  transport dut (.*);

  // independent checksum: 16-bit one's-complement sum over the 10 header words
  function automatic logic [15:0] csum(ipv4_hdr_t h);
    logic [159:0] w;
    int unsigned s;
    w = h; w[79:64] = 16'h0;
    s = 0;
    for (int i = 0; i < 10; i++) begin
      s += w[159 - 16*i -: 16];
      s = (s & 32'hffff) + (s >> 16);
    end
    return ~16'(s);
  endfunction

  rpc_obj_t sent [$], expect_rx [$];
  int n_drop_exp = 0, n_drop = 0, n_rx = 0, n_tx = 0;
  logic [15:0] exp_id = 0;
  int corrupt;
  bit txf, lpf, rxf;

  always @(posedge clk) begin
    if (ev_drop) n_drop++;
    if (ev_rx) n_rx++;
    if (ev_tx) n_tx++;
  end

  // loop: tx_out -> (maybe corrupt) -> rx_in
  always_comb begin
    rx_in_valid  = tx_out_valid;
    tx_out_ready = rx_in_ready;
    rx_in_frame  = tx_out_frame;
    case (corrupt)
      1: rx_in_frame.ip.csum     = tx_out_frame.ip.csum ^ 16'h0100;
      2: rx_in_frame.ip.dst      = tx_out_frame.ip.dst ^ 32'h1;
      3: rx_in_frame.udp.dst_port = tx_out_frame.udp.dst_port + 1'b1;
      4: begin rx_in_frame.ip.proto = 8'd6; rx_in_frame.ip.csum = csum(rx_in_frame.ip); end
      default: ;
    endcase
  end

  initial begin
    int produced = 0;
    local_addr = '{ip: 32'h0a00_0007, port: 16'd9000};
    tx_in_valid = 0; tx_in_pkt = '0; rx_out_ready = 0; corrupt = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      corrupt = ($urandom_range(4) == 0) ? $urandom_range(1, 4) : 0;
      // new input when the last one was taken
      if (!(tx_in_valid && !tx_in_ready)) begin
        tx_in_valid = (produced < 1500) && $urandom_range(1);
        for (int w = 0; w < $bits(rpc_obj_t) / 32; w++) tx_in_pkt.payload[w*32 +: 32] = $urandom;
        // destination is this same node so that the loop accepts it
        tx_in_pkt.dst = local_addr;
      end
      rx_out_ready = ($urandom_range(3) != 0);
      #1;
      if (tx_out_valid) begin
        check(tx_out_frame.ip.version == 4 && tx_out_frame.ip.ihl == 5 && tx_out_frame.ip.ttl == 64
              && tx_out_frame.ip.proto == 17 && tx_out_frame.ip.total_len == 92
              && tx_out_frame.ip.flags_frag == 16'h4000, "IPv4 fields");
        check(tx_out_frame.ip.csum == csum(tx_out_frame.ip), "IPv4 header checksum");
        check(tx_out_frame.ip.src == local_addr.ip && tx_out_frame.udp.src_port == local_addr.port,
              "source address");
        check(tx_out_frame.udp.len == 72 && tx_out_frame.udp.csum == 0, "UDP fields");
      end
      txf = tx_in_valid && tx_in_ready;
      lpf = tx_out_valid && rx_in_ready;
      rxf = rx_out_valid && rx_out_ready;
      @(posedge clk);
      if (txf) begin
        sent.push_back(tx_in_pkt.payload); produced++;
      end
      if (lpf) begin
        automatic rpc_obj_t p = sent.pop_front();
        check(tx_out_frame.payload == p, "payload carried");
        check(tx_out_frame.ip.id == exp_id, "IP id increments");
        exp_id++;
        if (corrupt != 0) n_drop_exp++; else expect_rx.push_back(p);
      end
      if (rxf) begin
        check(expect_rx.size() != 0 && rx_out_payload == expect_rx.pop_front(), "received payload in order");
      end
    end
    check(n_drop == n_drop_exp && n_drop > 50, $sformatf("drops %0d expected %0d", n_drop, n_drop_exp));
    check(n_tx == 1500, "all sent");
    check(n_rx + n_drop == n_tx, "every frame received or dropped");
    finish_tb();
  end
endmodule
