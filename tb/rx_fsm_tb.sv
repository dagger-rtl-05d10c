// Self-checking testbench for rx_fsm with four flows, behind a host memory model with the paper's
// 400 ns (80-cycle) read latency and the default bound of 128 polls in flight. The host writes RPC objects into the flows' 10-entry TX rings as fast as the
// NIC frees entries (heavy load), then only now and then (light load). Every object must come out
// once, in order per flow, tagged with its flow; the phase bit must be cleared only by the
// consumer's view, not lost; the load monitor must switch polling to direct reads under heavy
// load and back to cached reads under light load; the RPC output applies random back-pressure.
// A last phase keeps one flow's ring full and checks that the flow alone reaches the paper's
// single-core rate of one RPC per 16 cycles.
module rx_fsm_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 70000;
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
  localparam int NF = 4;
  nic_cfg_t cfg;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready;
  ccip_rd_req_t rd_req;
  ccip_rd_rsp_t rd_rsp;
  ccip_wr_req_t wr_req;
  logic rpc_valid, rpc_ready, poll_direct, ev_rpc, ev_mode_switch;
  rpc_obj_t rpc;
  logic [FLOW_W-1:0] rpc_flow;

  rx_fsm #(.NUM_FLOWS(NF), .OUT_DEPTH(128), .LOAD_WINDOW(256)) dut (.*);
  host_mem_model #(.LINES(1024), .RD_LAT(80)) u_mem (.*);

  logic [31:0] expq [NF][$];
  int n_in = 0, n_out = 0, n_switch = 0, n_to_direct = 0, n_to_cached = 0;
  logic [31:0] next_id = 1;
  bit took;

  always @(posedge clk) if (rst_n && ev_mode_switch) begin
    n_switch++;
    if (poll_direct) n_to_direct++; else n_to_cached++;
  end

  initial begin
    cfg = '0;
    cfg.enable = 1; cfg.num_flows = NF; cfg.batch = 4; cfg.tx_ring_size = 10; cfg.rx_ring_size = 4;
    cfg.tx_base = 32'h100; cfg.tx_free_base = 32'h200; cfg.poll_threshold = 40;
    rpc_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 12000; c++) begin
      @(negedge clk);
      // heavy load for 4000 cycles, light load after
      if (c < 4000 ? 1 : ($urandom_range(99) == 0)) begin
        automatic int f = $urandom_range(NF - 1);
        automatic rpc_obj_t o = '0;
        o.hdr.rpc_id = next_id;
        o.hdr.fn_id = 16'(f);
        o.args[31:0] = $urandom;
        if (u_mem.produce(cfg.tx_base, cfg.tx_free_base, cfg.tx_ring_size, f, o)) begin
          expq[f].push_back(next_id); next_id++; n_in++;
        end
      end
      rpc_ready = ($urandom_range(99) < 80);
      #1;
      took = rpc_valid && rpc_ready;
      if (took) begin
        check(int'(rpc_flow) < NF && expq[rpc_flow].size() != 0 && expq[rpc_flow][0] == rpc.hdr.rpc_id,
              $sformatf("object order on flow %0d", rpc_flow));
        check(rpc.hdr.fn_id == 16'(rpc_flow), "object came from its flow's ring");
        if (int'(rpc_flow) < NF && expq[rpc_flow].size() != 0) void'(expq[rpc_flow].pop_front());
        n_out++;
      end
      if (rd_req_valid) check(rd_req.cached == !poll_direct, "read type follows polling mode");
      @(posedge clk);
    end
    // throughput of one busy flow: keep flow 0's ring full with no back-pressure. The paper's
    // single-core rate, 12.4 Mrps at 200 MHz, is one RPC every 16 cycles; with one poll in flight a
    // flow could not beat one RPC per read latency (80 cycles).
    begin
      automatic int f0 = 0, c0 = 0;
      rpc_ready = 1;
      for (int c = 0; c < 3000; c++) begin
        @(negedge clk);
        begin
          automatic rpc_obj_t o = '0;
          o.hdr.rpc_id = next_id;
          if (u_mem.produce(cfg.tx_base, cfg.tx_free_base, cfg.tx_ring_size, 0, o)) begin
            expq[0].push_back(next_id); next_id++; n_in++;
          end
        end
        #1;
        if (rpc_valid) begin
          check(rpc_flow == '0 && expq[0].size() != 0 && expq[0][0] == rpc.hdr.rpc_id, "order on busy flow");
          if (expq[0].size() != 0) void'(expq[0].pop_front());
          n_out++;
          if (c >= 1000) f0++;
        end
        if (c >= 1000) c0++;
        @(posedge clk);
      end
      $display("busy flow: %0d RPCs in %0d cycles", f0, c0);
      check(f0 * 16 >= c0, $sformatf("one flow reaches 1 RPC per 16 cycles: %0d in %0d", f0, c0));
      repeat (400) begin
        @(negedge clk); #1;
        if (rpc_valid) begin void'(expq[0].pop_front()); n_out++; end
        @(posedge clk);
      end
    end
    check(n_in > 400, $sformatf("enough traffic: %0d", n_in));
    check(n_in == n_out, $sformatf("all delivered %0d/%0d", n_out, n_in));
    check(n_to_direct > 0, "switched to direct polling under load");
    check(n_to_cached > 0, "switched back to cached polling at low load");
    check(u_mem.n_direct > 0 && u_mem.n_cached > 0, "both read types used");
    check(u_mem.n_writes == n_in, "one bookkeeping write per RPC");
    finish_tb();
  end
endmodule
