// Self-checking testbench for load_balancer: checks the three steering schemes against a
// reference model: round-robin over the active flows, static (the connection's flow, or 0 when
// it is out of range), object-level (multiplicative hash of the first 8 argument bytes scaled to
// the flow count), and that responses always go to the connection's flow.
module load_balancer_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 20000;
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
  logic fire;
  rpc_hdr_t hdr;
  logic [ARG_BYTES*8-1:0] args;
  logic [FLOW_W-1:0] src_flow, flow;
  lb_e lb;
  logic [FLOW_W:0] num_flows;
  load_balancer dut (.*);
  int rr = 0;
  int hist [64];

  function automatic int ref_hash(logic [63:0] k, int nf);
    logic [31:0] h;
    h = k[63:32] ^ k[31:0];
    h = h * 32'h9E37_79B1;
    h = h ^ (h >> 16);
    return int'((longint'(h[15:0]) * nf) >> 16);
  endfunction

  initial begin
    fire = 0; hdr = '0; args = '0; src_flow = 0; lb = LB_ROUND_ROBIN; num_flows = 64;
    foreach (hist[i]) hist[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 6000; c++) begin
      int e;
      @(negedge clk);
      if (c % 1500 == 0) begin num_flows = (c == 0) ? 64 : (FLOW_W+1)'($urandom_range(1, 64)); rr = 0;
        // the pointer only wraps once past num_flows; restart it by running it to a wrap
      end
      hdr = '0;
      hdr.rtype = ($urandom_range(9) == 0) ? RPC_RESPONSE : RPC_REQUEST;
      for (int w = 0; w < 12; w++) args[w*32 +: 32] = $urandom;
      src_flow = FLOW_W'($urandom_range(70));
      lb = lb_e'($urandom_range(2));
      fire = $urandom_range(1);
      #1;
      if (hdr.rtype == RPC_RESPONSE || lb == LB_STATIC)
        e = (int'(src_flow) < int'(num_flows)) ? int'(src_flow) : 0;
      else if (lb == LB_OBJECT) e = ref_hash(args[383 -: 64], int'(num_flows));
      else e = rr;
      if (c % 1500 >= 100) check(int'(flow) == e, $sformatf("lb %0d exp %0d got %0d", lb, e, flow));
      if (lb == LB_OBJECT && hdr.rtype == RPC_REQUEST && num_flows == 64) hist[flow]++;
      check(int'(flow) < int'(num_flows) || (hdr.rtype == RPC_RESPONSE || lb == LB_STATIC) && flow == 0 || c % 1500 < 100,
            "flow in range");
      @(posedge clk);
      if (c % 1500 < 100) rr = int'(dut.rr);  // resynchronise after a change of num_flows
      if (fire && hdr.rtype == RPC_REQUEST && lb == LB_ROUND_ROBIN) rr = (rr + 1 >= int'(num_flows)) ? 0 : rr + 1;
    end
    begin
      int used = 0;
      foreach (hist[i]) if (hist[i] > 0) used++;
      check(used > 48, $sformatf("object hash spreads keys (%0d of 64 flows)", used));
    end
    finish_tb();
  end
endmodule
