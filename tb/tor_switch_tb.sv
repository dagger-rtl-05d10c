// Self-checking testbench for tor_switch with three ports. Each input sends random frames to the
// three known addresses and sometimes to an unknown one; every frame must leave on the port whose
// address it names, in order per input/output pair, unknown ones must be dropped, and contention
// for one output must occur and be resolved without loss. Outputs apply random back-pressure.
module tor_switch_tb;
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
  localparam int NP = 3;
  logic [31:0] table_ip [NP];
  logic in_valid [NP], in_ready [NP], out_valid [NP], out_ready [NP];
  net_frame_t in_frame [NP], out_frame [NP];
  logic ev_drop, ev_contend;
  tor_switch #(.NUM_PORTS(NP)) dut (.*);

  // per (input, output) expected sequences of frame tags (tag = payload rpc_id)
  logic [31:0] q [NP][NP][$];
  int n_sent = 0, n_recv = 0, n_unknown = 0, n_drop = 0, n_contend = 0;
  bit acc [NP], ofire [NP];
  int seq = 0;
  int n_unknown_cyc = 0;

  always @(posedge clk) if (rst_n) begin
    if (ev_drop) n_drop++;
    if (ev_contend) n_contend++;
  end

  task automatic new_frame(int i);
    int d;
    in_frame[i] = '0;
    d = $urandom_range(NP);  // NP means unknown address
    in_frame[i].ip.dst = (d == NP) ? 32'hc0a8_0099 : table_ip[d];
    in_frame[i].payload.hdr.rpc_id = {8'(i), 24'(seq++)};
    in_frame[i].payload.args[31:0] = 32'(d);
  endtask

  initial begin
    for (int p = 0; p < NP; p++) begin
      table_ip[p] = 32'h0a00_0001 + 32'(p);
      in_valid[p] = 0; out_ready[p] = 0; new_frame(p);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        if (!in_valid[p] || acc[p]) begin
          in_valid[p] = (c < 3500) && ($urandom_range(99) < 70);
          new_frame(p);
        end
        out_ready[p] = ($urandom_range(99) < 75);
      end
      #1;
      begin
        automatic bit any_unk = 0;
        for (int p = 0; p < NP; p++) if (in_valid[p] && in_frame[p].payload.args[31:0] == NP) any_unk = 1;
        if (any_unk) n_unknown_cyc++;
      end
      for (int p = 0; p < NP; p++) begin
        acc[p]   = in_valid[p] && in_ready[p];
        ofire[p] = out_valid[p] && out_ready[p];
        if (acc[p] && in_frame[p].payload.args[31:0] == NP) n_unknown++;
        else if (acc[p]) begin
          q[p][in_frame[p].payload.args[31:0]].push_back(in_frame[p].payload.hdr.rpc_id);
          n_sent++;
        end
        if (ofire[p]) begin
          int src;
          src = int'(out_frame[p].payload.hdr.rpc_id[31:24]);
          check(out_frame[p].ip.dst == table_ip[p], "frame left on the port of its address");
          check(src < NP && q[src][p].size() != 0 && q[src][p][0] == out_frame[p].payload.hdr.rpc_id,
                "order per input/output pair");
          if (src < NP && q[src][p].size() != 0) void'(q[src][p].pop_front());
          n_recv++;
        end
      end
      @(posedge clk);
    end
    check(n_sent == n_recv, $sformatf("all known frames delivered %0d/%0d", n_recv, n_sent));
    check(n_unknown > 0 && n_drop == n_unknown_cyc, "unknown destinations dropped");
    check(n_contend > 0, "output contention happened");
    finish_tb();
  end
endmodule
