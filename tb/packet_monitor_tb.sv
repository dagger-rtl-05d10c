// Self-checking testbench for packet_monitor: random event pulses are counted independently and
// compared with every counter; clear is checked to zero them.
module packet_monitor_tb;
  import dagger_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %0t %s", $time, m); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic clear;
  logic [NUM_EVENTS-1:0] events;
  logic [CNT_W-1:0] counters [NUM_EVENTS];
  packet_monitor dut (.*);
  int expct [NUM_EVENTS];

  initial begin
    clear = 0; events = 0;
    foreach (expct[i]) expct[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      events = NUM_EVENTS'($urandom);
      for (int i = 0; i < NUM_EVENTS; i++) if (events[i]) expct[i]++;
    end
    @(negedge clk) events = 0;
    @(negedge clk);
    for (int i = 0; i < NUM_EVENTS; i++) check(counters[i] == CNT_W'(expct[i]), $sformatf("counter %0d", i));
    clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < NUM_EVENTS; i++) check(counters[i] == 0, "cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
