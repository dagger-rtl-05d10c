// Self-checking testbench for tx_path with eight flows, behind the host memory model. RPCs for
// random flows arrive from the RPC unit; the host consumes its 4-entry RX rings, pausing in some
// phases. Checks: every accepted RPC reaches its own flow's ring in order; the input controller
// stalls (back-pressure) when a flow FIFO is full; ring credit polls happen; objects are written
// in whole batches; at full rate the path sustains close to one RPC per cycle while rings drain.
module tx_path_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 80000;
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
  localparam int NF = 8;
  nic_cfg_t cfg;
  logic in_valid, in_ready;
  rpc_obj_t in_rpc;
  logic [FLOW_W-1:0] in_flow;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready;
  ccip_rd_req_t rd_req;
  ccip_rd_rsp_t rd_rsp;
  ccip_wr_req_t wr_req;
  logic ev_rpc_out, ev_stall, ev_credit_poll;

  tx_path #(.NUM_FLOWS(NF), .MAX_BATCH(4)) dut (.*);
  host_mem_model #(.LINES(1024), .RD_LAT(20)) u_mem (.*);

  logic [31:0] expq [NF][$];
  int n_in = 0, n_host = 0, n_stall = 0, n_poll = 0, n_out = 0;
  logic [31:0] next_id = 1;

  always @(posedge clk) if (rst_n) begin
    if (ev_stall) n_stall++;
    if (ev_credit_poll) n_poll++;
    if (ev_rpc_out) n_out++;
  end

  task automatic new_rpc();
    in_flow = FLOW_W'($urandom_range(NF - 1));
    in_rpc = '0;
    in_rpc.hdr.rpc_id = next_id;
    in_rpc.hdr.fn_id = 16'(in_flow);
  endtask

  initial begin
    bit acc = 0;
    cfg = '0;
    cfg.enable = 1; cfg.num_flows = NF; cfg.batch = 4; cfg.tx_ring_size = 10; cfg.rx_ring_size = 4;
    cfg.rx_base = 32'h100; cfg.rx_free_base = 32'h200;
    in_valid = 0; new_rpc();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      if (!in_valid || acc) begin
        in_valid = (c < 18000) && ($urandom_range(99) < 70);
        new_rpc();
      end
      if ((c / 1500) % 3 != 2) begin
        for (int f = 0; f < NF; f++) begin
          rpc_obj_t o;
          if (u_mem.consume(cfg.rx_base, cfg.rx_free_base, cfg.rx_ring_size, f, o)) begin
            check(expq[f].size() != 0 && o.hdr.rpc_id == expq[f][0] && o.hdr.fn_id == 16'(f),
                  $sformatf("flow %0d order at host", f));
            if (expq[f].size() != 0) void'(expq[f].pop_front());
            n_host++;
          end
        end
      end
      #1;
      acc = in_valid && in_ready;
      if (acc) begin expq[in_flow].push_back(next_id); next_id++; n_in++; end
      @(posedge clk);
    end
    // whatever remains is a partial batch (fewer than 4 in a flow)
    for (int f = 0; f < NF; f++) check(expq[f].size() < 4, $sformatf("only a partial batch left on flow %0d", f));
    check(n_out % 4 == 0, "objects written in whole batches");
    check(n_in > 5000, $sformatf("traffic %0d", n_in));
    check(n_stall > 0, "input controller stalled on a full flow FIFO");
    check(n_poll > 0, "credit polls");
    finish_tb();
  end
endmodule
