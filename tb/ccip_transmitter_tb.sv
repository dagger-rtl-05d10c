// Self-checking testbench for ccip_transmitter with four flows. The flow FIFOs, request buffer
// and flow scheduler around it are modelled here (queues of slot ids, an array of objects with
// one cycle of read latency, and a scheduler granting any flow with a full batch and credit), and
// host memory is the behavioural model, whose consumer empties the 4-entry RX rings slowly in
// some phases so that ring credit runs out. Checks: each object lands in its own flow's RX ring
// in order (found by the host's phase-bit poll), the writes of one grant form one batch of
// `batch` lines of the granted flow, every slot is returned once after its write, no ring ever
// holds more than its size, and credit polls of the RX free buffer happen.
module ccip_transmitter_tb;
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
  localparam int NF = 4, E = 32;
  nic_cfg_t cfg;
  logic grant_valid, grant_ready;
  logic [1:0] grant_flow, pop_flow;
  logic [NF-1:0] credit_ok;
  logic [3:0] count [NF];
  logic pop, rd_en, ret_valid;
  logic [4:0] pop_slot, rd_slot, ret_slot;
  rpc_obj_t rd_data;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_req_valid, wr_req_ready;
  ccip_rd_req_t rd_req;
  ccip_rd_rsp_t rd_rsp;
  ccip_wr_req_t wr_req;
  logic ev_rpc_out, ev_credit_poll;

  ccip_transmitter #(.NUM_FLOWS(NF), .ENTRIES(E), .CW(4)) dut (.*);
  host_mem_model #(.LINES(1024), .RD_LAT(20)) u_mem (.*);

  // models of the surrounding blocks
  logic [4:0] fq [NF][$];        // flow FIFOs of slot ids
  logic [4:0] freeq [$];         // free slots
  rpc_obj_t   bufm [E];
  logic [4:0] outstanding [$];   // slots popped, awaiting return, in order
  logic [31:0] expq [NF][$];     // rpc ids expected per flow at the host
  int n_in = 0, n_host = 0, n_poll = 0, n_nocredit = 0, n_batches = 0;
  int batch_left = 0, batch_flow = -1;
  logic [31:0] next_id = 1;

  always @(posedge clk) if (rst_n && ev_credit_poll) n_poll++;

  always_comb begin
    for (int f = 0; f < NF; f++) count[f] = 4'(fq[f].size());
    pop_slot = (fq[pop_flow].size() != 0) ? fq[pop_flow][0] : 5'd0;
    // scheduler model: lowest flow with a full batch and credit
    grant_valid = 1'b0; grant_flow = 0;
    for (int f = NF - 1; f >= 0; f--)
      if (fq[f].size() >= int'(cfg.batch) && credit_ok[f]) begin grant_valid = 1'b1; grant_flow = 2'(f); end
  end
  always_ff @(posedge clk) if (rd_en) rd_data <= bufm[rd_slot];

  initial begin
    bit pop_s = 0, ret_s, wr_s, gr_s;
    logic [1:0] pf, gf;
    logic [4:0] ps, rs;
    ccip_wr_req_t wq;
    cfg = '0;
    cfg.enable = 1; cfg.num_flows = NF; cfg.batch = 4; cfg.tx_ring_size = 10; cfg.rx_ring_size = 4;
    cfg.rx_base = 32'h100; cfg.rx_free_base = 32'h200;
    for (int i = 0; i < E; i++) freeq.push_back(5'(i));
    rd_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 15000; c++) begin
      @(negedge clk);
      // the flow FIFO model pops on the edge just passed
      if (pop_s) begin
        check(fq[pf].size() != 0 && ps == fq[pf][0], "pop of a non-empty FIFO");
        if (fq[pf].size() != 0) outstanding.push_back(fq[pf].pop_front());
      end
      if (c == 7500) cfg.batch = 2;
      // new RPCs into the flow FIFOs (up to 8 per flow)
      if (c < 14000 && freeq.size() != 0 && $urandom_range(99) < 60) begin
        automatic int f = $urandom_range(NF - 1);
        if (fq[f].size() < 8) begin
          automatic logic [4:0] s = freeq.pop_front();
          bufm[s] = '0;
          bufm[s].hdr.rpc_id = next_id;
          bufm[s].hdr.fn_id = 16'(f);
          bufm[s].hdr.ctl = 8'($urandom);
          fq[f].push_back(s); expq[f].push_back(next_id); next_id++; n_in++;
        end
      end
      // host consumer: fast, or stalled in some phases
      if ((c / 1000) % 3 != 1) begin
        for (int f = 0; f < NF; f++) begin
          rpc_obj_t o;
          if ($urandom_range(1) && u_mem.consume(cfg.rx_base, cfg.rx_free_base, cfg.rx_ring_size, f, o)) begin
            check(expq[f].size() != 0 && o.hdr.rpc_id == expq[f][0] && o.hdr.fn_id == 16'(f),
                  $sformatf("flow %0d object order at host", f));
            if (expq[f].size() != 0) void'(expq[f].pop_front());
            n_host++;
          end
        end
      end
      #1;
      pop_s = pop; pf = pop_flow; ps = pop_slot;
      ret_s = ret_valid; rs = ret_slot;
      wr_s = wr_req_valid && wr_req_ready; wq = wr_req;
      gr_s = grant_valid && grant_ready; gf = grant_flow;
      for (int f = 0; f < NF; f++) if (fq[f].size() >= int'(cfg.batch) && !credit_ok[f]) n_nocredit++;
      if (wr_s) begin
        int wf;
        wf = (int'(wq.addr) - 32'h100) / 4;
        check(batch_left > 0 && wf == batch_flow, "write belongs to the current batch's flow");
        batch_left--;
      end
      if (ret_s) begin
        check(outstanding.size() != 0 && rs == outstanding[0] && wr_s, "slot returned in order with its write");
        if (outstanding.size() != 0) freeq.push_back(outstanding.pop_front());
      end
      if (gr_s) begin
        check(batch_left == 0, "previous batch complete before a new grant");
        batch_left = int'(cfg.batch); batch_flow = int'(gf); n_batches++;
      end
      @(posedge clk);
    end
    check(n_in > 500 && n_host == n_in, $sformatf("all objects reached the host %0d/%0d", n_host, n_in));
    check(n_nocredit > 0, "ring credit ran out");
    check(n_poll > 0, "RX free buffer polled for credit");
    check(n_batches > 100, "batches sent");
    finish_tb();
  end
endmodule
