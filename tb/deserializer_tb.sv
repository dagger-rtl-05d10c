// Self-checking testbench for deserializer: well-formed payloads (zero padding) must be
// accepted with the object and connection id passed on; payloads with a non-zero padding byte,
// an over-long arg_len or an unknown type must be rejected.
module deserializer_tb;
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
  rpc_obj_t payload, rpc;
  logic [CONN_ID_W-1:0] conn_id;
  logic ok;
  deserializer dut (.*);
  int n_bad = 0;
  initial begin
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int len, kind;
      bit exp_ok;
      for (int w = 0; w < $bits(rpc_obj_t) / 32; w++) payload[w*32 +: 32] = $urandom;
      len = $urandom_range(0, 48);
      payload.hdr.arg_len = 16'(len);
      payload.hdr.rtype = rpc_type_e'($urandom_range(1));
      for (int b = len; b < 48; b++) payload.args[(47-b)*8 +: 8] = 8'h00;
      kind = $urandom_range(5);
      exp_ok = 1;
      if (kind == 1 && len < 48) begin
        payload.args[(47-$urandom_range(len, 47))*8 +: 8] = 8'($urandom_range(1, 255)); exp_ok = 0;
      end else if (kind == 2) begin
        payload.hdr.arg_len = 16'($urandom_range(49, 65535)); exp_ok = 0;
      end else if (kind == 3) begin
        payload.hdr.rtype = rpc_type_e'($urandom_range(2, 255)); exp_ok = 0;
      end
      if (!exp_ok) n_bad++;
      #1;
      check(ok == exp_ok, $sformatf("ok kind %0d", kind));
      check(conn_id == payload.hdr.conn_id, "conn_id");
      check(rpc.hdr.ctl == 0 && rpc.args == payload.args && rpc.hdr.rpc_id == payload.hdr.rpc_id, "object passed");
      @(negedge clk);
    end
    check(n_bad > 100, "malformed payloads exercised");
    finish_tb();
  end
endmodule
