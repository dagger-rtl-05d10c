// Self-checking testbench for flow_fifos (8 flows of depth 4): random pushes and pops on
// different flows in the same cycle, against one queue model per flow; per-flow counts and FIFO
// order are checked, and every flow is filled to its depth at least once.
module flow_fifos_tb;
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
  localparam int NF = 8, D = 4;
  logic push, pop;
  logic [2:0] push_flow, pop_flow;
  logic [7:0] push_slot, pop_slot;
  logic [2:0] count [NF];
  flow_fifos #(.NUM_FLOWS(NF), .DEPTH(D), .SW(8)) dut (.*);
  logic [7:0] model [NF][$];
  bit was_full [NF];

  initial begin
    push = 0; pop = 0; push_flow = 0; pop_flow = 0; push_slot = 0;
    foreach (was_full[i]) was_full[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      push_flow = 3'($urandom); push_slot = 8'($urandom);
      push = (model[push_flow].size() < D) && ($urandom_range(99) < 60);
      pop_flow = 3'($urandom);
      pop = (model[pop_flow].size() > 0) && ($urandom_range(99) < 45);
      #1;
      for (int f = 0; f < NF; f++) begin
        check(count[f] == 3'(model[f].size()), $sformatf("count flow %0d", f));
        if (model[f].size() == D) was_full[f] = 1;
      end
      if (pop) check(pop_slot == model[pop_flow][0], "pop order");
      @(posedge clk);
      if (pop) void'(model[pop_flow].pop_front());
      if (push) model[push_flow].push_back(push_slot);
    end
    for (int f = 0; f < NF; f++) check(was_full[f], "each flow reached full");
    finish_tb();
  end
endmodule
