// Self-checking testbench for serializer: random objects with random argument lengths (some
// over the 48-byte limit); checks that the destination is attached, the header is kept with its
// control byte cleared, bytes up to arg_len pass and the rest are zero, and err for long ones.
module serializer_tb;
  import dagger_pkg::*;
  localparam int WATCHDOG = 10000;
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
  rpc_obj_t rpc;
  net_addr_t dest;
  ser_pkt_t pkt;
  logic err;
  serializer dut (.*);
  initial begin
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      int len;
      for (int w = 0; w < $bits(rpc_obj_t) / 32; w++) rpc[w*32 +: 32] = $urandom;
      len = ($urandom_range(9) == 0) ? $urandom_range(49, 300) : $urandom_range(0, 48);
      rpc.hdr.arg_len = 16'(len);
      dest = '{ip: $urandom, port: 16'($urandom)};
      #1;
      check(pkt.dst == dest, "dest attached");
      check(err == (len > 48), "err");
      check(pkt.payload.hdr.ctl == 0, "ctl cleared");
      check(pkt.payload.hdr.arg_len == 16'(len > 48 ? 48 : len), "arg_len clamped");
      check(pkt.payload.hdr.conn_id == rpc.hdr.conn_id && pkt.payload.hdr.rpc_id == rpc.hdr.rpc_id
            && pkt.payload.hdr.fn_id == rpc.hdr.fn_id && pkt.payload.hdr.rtype == rpc.hdr.rtype, "header kept");
      for (int b = 0; b < 48; b++)
        check(pkt.payload.args[(47-b)*8 +: 8] == ((b < len) ? rpc.args[(47-b)*8 +: 8] : 8'h00),
              $sformatf("byte %0d", b));
      @(negedge clk);
    end
    finish_tb();
  end
endmodule
