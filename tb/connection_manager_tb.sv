// Self-checking testbench for connection_manager (256 entries): waits for the valid-bit sweep,
// opens random connections, reads them on all three ports in the same cycle with one-cycle
// latency, checks that a different c_id mapping to the same entry misses (tag check), that an
// overwrite replaces the entry, and that closing makes lookups miss.
module connection_manager_tb;
  import dagger_pkg::*;
  localparam int N = 256;
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

  logic busy, wr_valid;
  cm_cmd_t wr_cmd;
  logic [31:0] a_conn_id, b_conn_id, c_conn_id;
  logic a_hit, b_hit, c_hit;
  net_addr_t a_dest;
  logic [FLOW_W-1:0] b_src_flow;
  lb_e b_lb;
  conn_tuple_t c_tuple;
  connection_manager #(.N_ENTRIES(N)) dut (.*);

  conn_tuple_t model [int];
  int ids [$];

  task automatic write(input cm_op_e op, input logic [31:0] id, input conn_tuple_t t);
    @(negedge clk); wr_valid = 1; wr_cmd = '{op: op, conn_id: id, tuple: t};
    @(negedge clk); wr_valid = 0;
  endtask

  task automatic lookup(input logic [31:0] id, input bit expect_hit, input conn_tuple_t t);
    @(negedge clk); a_conn_id = id; b_conn_id = id; c_conn_id = id;
    @(negedge clk);
    check(a_hit == expect_hit && b_hit == expect_hit && c_hit == expect_hit,
          $sformatf("hit on three ports for %h", id));
    if (expect_hit) begin
      check(a_dest == t.dest, "port A dest");
      check(b_src_flow == t.src_flow && b_lb == t.lb, "port B flow/lb");
      check(c_tuple == t, "port C tuple");
    end
  endtask

  initial begin
    wr_valid = 0; wr_cmd = '0; a_conn_id = 0; b_conn_id = 0; c_conn_id = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(busy, "busy during sweep");
    wait (!busy);
    // the sweep takes exactly N cycles
    for (int i = 0; i < 40; i++) begin
      logic [31:0] id;
      conn_tuple_t t;
      do id = $urandom; while (model.exists(int'(id[7:0])));
      t = '{src_flow: FLOW_W'($urandom), dest: '{ip: $urandom, port: 16'($urandom)}, lb: lb_e'($urandom_range(2))};
      model[int'(id[7:0])] = t;
      ids.push_back(int'(id));
      write(CM_OPEN, id, t);
    end
    foreach (ids[i]) lookup(ids[i], 1, model[ids[i] & 255]);
    // same index, other tag: miss
    lookup(ids[0] ^ 32'h0001_0000, 0, '0);
    // concurrent different addresses on the three ports
    @(negedge clk); a_conn_id = ids[1]; b_conn_id = ids[2]; c_conn_id = ids[3];
    @(negedge clk);
    check(a_hit && a_dest == model[ids[1] & 255].dest, "A independent");
    check(b_hit && b_src_flow == model[ids[2] & 255].src_flow, "B independent");
    check(c_hit && c_tuple == model[ids[3] & 255], "C independent");
    // overwrite with a new c_id at the same index
    begin
      conn_tuple_t t2;
      t2 = '{src_flow: 9'd5, dest: '{ip: 32'h0a000005, port: 16'd99}, lb: LB_STATIC};
      write(CM_OPEN, ids[4] ^ 32'h00ff_0000, t2);
      lookup(ids[4] ^ 32'h00ff_0000, 1, t2);
      lookup(ids[4], 0, '0);
    end
    // close
    write(CM_CLOSE, ids[5], '0);
    lookup(ids[5], 0, '0);
    lookup(ids[6], 1, model[ids[6] & 255]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
