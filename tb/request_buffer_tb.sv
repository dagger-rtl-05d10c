// Self-checking testbench for request_buffer: writes random RPC objects to random slots, reads
// them back with one cycle of latency, and checks that rd_data holds while rd_en is low and that
// a write and a read of different slots in one cycle do not disturb each other.
module request_buffer_tb;
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
  localparam int E = 256;
  logic wr_en, rd_en;
  logic [7:0] wr_slot, rd_slot;
  rpc_obj_t wr_data, rd_data;
  request_buffer #(.ENTRIES(E)) dut (.*);
  rpc_obj_t model [E];
  bit       has   [E];

  function automatic rpc_obj_t rnd_obj();
    rpc_obj_t o;
    for (int w = 0; w < $bits(rpc_obj_t) / 32; w++) o[w*32 +: 32] = $urandom;
    return o;
  endfunction

  initial begin
    wr_en = 0; rd_en = 0; wr_slot = 0; rd_slot = 0; wr_data = '0;
    foreach (has[i]) has[i] = 0;
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      logic [7:0] rs;
      bit rde;
      @(negedge clk);
      wr_en = $urandom_range(1); wr_slot = 8'($urandom); wr_data = rnd_obj();
      rde = $urandom_range(1);
      do rs = 8'($urandom); while (wr_en && rs == wr_slot);
      rd_en = rde; rd_slot = rs;
      @(posedge clk);
      if (wr_en) begin model[wr_slot] = wr_data; has[wr_slot] = 1; end
      #1;
      if (rde && has[rs]) check(rd_data == model[rs], $sformatf("read slot %0d", rs));
      if (rde) begin
        rpc_obj_t held;
        held = rd_data;
        @(negedge clk); rd_en = 0; wr_en = 1; wr_slot = rs; wr_data = rnd_obj(); rd_slot = rs ^ 8'h01;
        @(posedge clk); model[rs] = wr_data; #1;
        check(rd_data == held, "rd_data holds while rd_en is low");
        @(negedge clk); wr_en = 0;
        @(posedge clk); #1;
        check(rd_data == held, "rd_data still held a cycle later");
      end
    end
    finish_tb();
  end
endmodule
