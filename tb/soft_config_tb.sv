// Self-checking testbench for soft_config: checks reset values, register writes and read-back
// with one cycle of read latency, clamping of out-of-range values, the connection-manager open
// and close commands, the connection query (answered here by a small lookup model) and the
// packet-monitor counter window.
module soft_config_tb;
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
  logic mmio_wr_valid, mmio_rd_valid, mmio_rd_rsp_valid;
  logic [7:0] mmio_wr_addr, mmio_rd_addr;
  logic [63:0] mmio_wr_data, mmio_rd_rsp_data;
  nic_cfg_t cfg;
  logic cm_wr_valid;
  cm_cmd_t cm_wr_cmd;
  logic [CONN_ID_W-1:0] cm_query_id;
  logic cm_query_hit;
  conn_tuple_t cm_query_tuple;
  logic [CNT_W-1:0] counters [NUM_EVENTS];
  soft_config #(.NUM_FLOWS(64), .MAX_BATCH(4)) dut (.*);

  // lookup model: odd ids hit, with a tuple derived from the id
  always_comb begin
    cm_query_hit   = cm_query_id[0];
    cm_query_tuple = '{src_flow: cm_query_id[8:0], dest: '{ip: ~cm_query_id, port: cm_query_id[31:16]},
                       lb: lb_e'(cm_query_id[10:9] % 3)};
  end

  int n_cmd = 0;
  cm_cmd_t last_cmd;
  always @(posedge clk) if (rst_n && cm_wr_valid) begin n_cmd++; last_cmd = cm_wr_cmd; end

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); mmio_wr_valid = 1; mmio_wr_addr = a; mmio_wr_data = d;
    @(negedge clk); mmio_wr_valid = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); mmio_rd_valid = 1; mmio_rd_addr = a;
    @(negedge clk); mmio_rd_valid = 0;
    check(mmio_rd_rsp_valid, "read response one cycle after the request");
    d = mmio_rd_rsp_data;
  endtask
  task automatic rd_check(input logic [7:0] a, input logic [63:0] e, input string m);
    logic [63:0] d;
    rd(a, d);
    check(d == e, $sformatf("%s: exp %h got %h", m, e, d));
  endtask

  initial begin
    logic [63:0] d;
    mmio_wr_valid = 0; mmio_rd_valid = 0; mmio_wr_addr = 0; mmio_rd_addr = 0; mmio_wr_data = 0;
    foreach (counters[i]) counters[i] = CNT_W'(32'h100 * i + 7);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // reset values
    rd_check(8'h00, 0, "enable resets to 0");
    rd_check(8'h01, 64, "num_flows resets to 64");
    rd_check(8'h02, 4, "batch resets to 4");
    rd_check(8'h03, 10, "tx ring resets to 10");
    rd_check(8'h04, 4, "rx ring resets to 4");
    check(cfg.enable == 0 && cfg.num_flows == 64 && cfg.batch == 4, "cfg reset");
    // plain registers
    for (int i = 0; i < 20; i++) begin
      automatic logic [31:0] v = $urandom;
      automatic logic [7:0] a = 8'(5 + i % 4);
      wr(a, {32'hdead_beef, v});
      rd_check(a, 64'(v), "base register");
    end
    check(cfg.tx_base != 0 || cfg.rx_free_base != 0, "bases reach cfg");
    wr(8'h09, 64'h1234); rd_check(8'h09, 64'h1234, "poll threshold");
    check(cfg.poll_threshold == 16'h1234, "threshold in cfg");
    wr(8'h0A, 64'h0000_1f90_0a00_0001);
    check(cfg.local_addr.ip == 32'h0a00_0001 && cfg.local_addr.port == 16'h1f90, "local address");
    // clamps
    wr(8'h01, 0);     rd_check(8'h01, 1, "num_flows 0 -> 1");
    wr(8'h01, 1000);  rd_check(8'h01, 64, "num_flows clamp to 64");
    wr(8'h01, 17);    rd_check(8'h01, 17, "num_flows 17");
    wr(8'h02, 9);     rd_check(8'h02, 4, "batch clamp to 4");
    wr(8'h02, 0);     rd_check(8'h02, 1, "batch 0 -> 1");
    wr(8'h02, 2);     rd_check(8'h02, 2, "batch 2");
    wr(8'h03, 500);   rd_check(8'h03, 64, "ring clamp to 64");
    wr(8'h04, 0);     rd_check(8'h04, 1, "ring 0 -> 1");
    wr(8'h00, 1);     check(cfg.enable, "enable");
    // connection open / close
    wr(8'h10, 64'h0000_0000_cafe_0042);
    wr(8'h11, {16'd7000, 32'h0a00_0002, 5'd0, 2'd2, 9'd33});
    rd_check(8'h11, {16'd7000, 32'h0a00_0002, 5'd0, 2'd2, 9'd33}, "tuple read-back");
    wr(8'h12, 1);
    @(negedge clk);
    check(n_cmd == 1, "one CM command");
    check(last_cmd.op == CM_OPEN && last_cmd.conn_id == 32'hcafe_0042 && last_cmd.tuple.src_flow == 33
          && last_cmd.tuple.lb == LB_OBJECT && last_cmd.tuple.dest.ip == 32'h0a00_0002
          && last_cmd.tuple.dest.port == 7000, "open command contents");
    wr(8'h12, 0);
    @(negedge clk);
    check(n_cmd == 2 && last_cmd.op == CM_CLOSE, "close command");
    // query
    for (int i = 0; i < 8; i++) begin
      automatic logic [31:0] id = $urandom;
      wr(8'h13, 64'(id));
      repeat (2) @(negedge clk);
      rd(8'h14, d);
      check(d[63] && d[62] == id[0] && d[8:0] == id[8:0] && d[10:9] == 2'(id[10:9] % 3), "query status");
      rd_check(8'h15, {16'd0, id[31:16], ~id}, "query dest");
    end
    // counters
    for (int i = 0; i < NUM_EVENTS; i++) rd_check(8'(8'h20 + i), 64'(32'h100 * i + 7), "counter read");
    rd_check(8'h3f, 0, "unmapped reads 0");
    finish_tb();
  end
endmodule
