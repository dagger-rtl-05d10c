// Self-checking testbench for free_slot_fifo (16 slots): checks the initial fill with every slot
// number exactly once, then returns and takes slots at random against a queue model.
module free_slot_fifo_tb;
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
  localparam int E = 16;
  logic out_valid, out_ready, in_valid;
  logic [3:0] out_slot, in_slot;
  logic [4:0] count;
  free_slot_fifo #(.ENTRIES(E)) dut (.*);
  logic [3:0] model [$];
  logic [3:0] held [$];
  bit seen [E];
  bit pop_s;

  initial begin
    out_ready = 0; in_valid = 0; in_slot = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid, "empty while filling");
    repeat (E) @(negedge clk);
    check(out_valid && count == 5'(E), "full after E cycles");
    // take everything
    foreach (seen[i]) seen[i] = 0;
    for (int i = 0; i < E; i++) begin
      check(out_valid, "valid while draining");
      check(out_slot == 4'(i), "initial order 0..E-1");
      seen[out_slot] = 1; held.push_back(out_slot);
      out_ready = 1; @(negedge clk); out_ready = 0;
    end
    check(!out_valid && count == 0, "empty after draining");
    // random traffic
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      out_ready = $urandom_range(1);
      in_valid  = (held.size() != 0) && $urandom_range(1);
      if (in_valid) begin
        automatic int k = $urandom_range(held.size() - 1);
        in_slot = held[k]; held.delete(k);
      end
      #1;
      check(count == 5'(model.size()), "count");
      check(out_valid == (model.size() != 0), "valid");
      if (out_valid) check(out_slot == model[0], "order");
      pop_s = out_valid && out_ready;
      @(posedge clk);
      if (pop_s) held.push_back(model.pop_front());
      if (in_valid) model.push_back(in_slot);
    end
    finish_tb();
  end
endmodule
