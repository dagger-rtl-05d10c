// Self-checking testbench for flow_scheduler (8 flows): random FIFO counts, credits, batch size
// and active-flow count; the grant must be the first eligible flow at or after the round-robin
// pointer, which a reference model advances past each accepted grant.
module flow_scheduler_tb;
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
  localparam int NF = 8;
  logic [3:0] count [NF];
  logic [NF-1:0] credit_ok;
  logic [BATCH_W-1:0] batch;
  logic [FLOW_W:0] num_flows;
  logic enable, grant_valid, grant_ready;
  logic [2:0] grant_flow;
  flow_scheduler #(.NUM_FLOWS(NF), .CW(4)) dut (.*);
  int rr = 0;
  int grants [NF];

  initial begin
    foreach (count[i]) count[i] = 0;
    credit_ok = 0; batch = 4; num_flows = NF; enable = 0; grant_ready = 0;
    foreach (grants[i]) grants[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      int exp_f;
      bit exp_v;
      @(negedge clk);
      foreach (count[i]) count[i] = 4'($urandom_range(8));
      credit_ok   = NF'($urandom) | NF'($urandom);
      batch       = (c % 500 < 250) ? 3'd4 : BATCH_W'($urandom_range(4));
      num_flows   = (c % 1000 < 500) ? (FLOW_W+1)'(NF) : (FLOW_W+1)'($urandom_range(1, NF));
      enable      = ($urandom_range(9) != 0);
      grant_ready = $urandom_range(1);
      exp_v = 0; exp_f = 0;
      for (int k = NF - 1; k >= 0; k--) begin
        automatic int f = (rr + k) % NF;
        if (enable && f < int'(num_flows) && credit_ok[f] && batch != 0 && count[f] >= 4'(batch)) begin
          exp_v = 1; exp_f = f;
        end
      end
      #1;
      check(grant_valid == exp_v, "grant_valid");
      if (exp_v) check(int'(grant_flow) == exp_f, $sformatf("grant flow exp %0d got %0d", exp_f, grant_flow));
      @(posedge clk);
      if (exp_v && grant_ready) begin rr = (exp_f + 1) % NF; grants[exp_f]++; end
    end
    for (int f = 0; f < NF; f++) check(grants[f] > 0, "every flow was served");
    finish_tb();
  end
endmodule
