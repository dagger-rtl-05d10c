// Self-checking testbench for sync_fifo: random pushes and pops against a queue model, with
// full/empty flags, occupancy and data order checked every cycle.
module sync_fifo_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %0t %s", $time, m); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data, out_data;
  logic [3:0] count;
  sync_fifo #(.WIDTH(8), .DEPTH(8)) dut (.*);

  logic [7:0] model [$];
  int full_seen = 0;
  bit pop_s, push_s;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(99) < (cyc < 2000 ? 70 : 30));
      out_ready = ($urandom_range(99) < (cyc < 2000 ? 30 : 70));
      in_data   = 8'($urandom);
      #1;
      check(count == model.size(), "count matches model");
      check(out_valid == (model.size() != 0), "out_valid = not empty");
      check(in_ready == (model.size() != 8), "in_ready = not full");
      if (out_valid && model.size() != 0) check(out_data == model[0], "data order");
      if (!in_ready) full_seen++;
      pop_s  = out_valid && out_ready;
      push_s = in_valid && in_ready;
      @(posedge clk);
      if (pop_s) void'(model.pop_front());
      if (push_s) model.push_back(in_data);
    end
    check(full_seen > 0, "FIFO became full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
