// Self-checking testbench for ccip_arbiter with two NICs and a host that stalls at random. Every
// read and write request must reach the host once, unchanged except for the NIC number stamped in
// the read tag; when both NICs wait, grants must alternate; read responses must return only to
// the NIC named in the tag; MMIO accesses must reach only the addressed NIC.
module ccip_arbiter_tb;
  import dagger_pkg::*;
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
  localparam int NN = 2;
  logic h_rd_req_valid, h_rd_req_ready, h_rd_rsp_valid, h_wr_req_valid, h_wr_req_ready;
  ccip_rd_req_t h_rd_req;
  ccip_rd_rsp_t h_rd_rsp, n_rd_rsp;
  ccip_wr_req_t h_wr_req;
  logic h_mmio_wr_valid, h_mmio_rd_valid, h_mmio_rd_rsp_valid;
  logic [11:0] h_mmio_wr_addr, h_mmio_rd_addr;
  logic [63:0] h_mmio_wr_data, h_mmio_rd_rsp_data;
  logic n_rd_req_valid [NN], n_rd_req_ready [NN], n_rd_rsp_valid [NN];
  ccip_rd_req_t n_rd_req [NN];
  logic n_wr_req_valid [NN], n_wr_req_ready [NN];
  ccip_wr_req_t n_wr_req [NN];
  logic n_mmio_wr_valid [NN], n_mmio_rd_valid [NN], n_mmio_rd_rsp_valid [NN];
  logic [7:0] n_mmio_wr_addr, n_mmio_rd_addr;
  logic [63:0] n_mmio_wr_data;
  logic [63:0] n_mmio_rd_rsp_data [NN];
  ccip_arbiter #(.NUM_NICS(NN)) dut (.*);

  ccip_rd_req_t rq [NN][$];
  ccip_wr_req_t wq [NN][$];
  int last_rd = -1, both_rd = 0, alt_ok = 0, n_rd = 0, n_wr = 0;
  bit rf [NN], wf [NN], hrf, hwf;

  // NICs answer MMIO reads one cycle later with their number
  always_ff @(posedge clk)
    for (int i = 0; i < NN; i++) begin
      n_mmio_rd_rsp_valid[i] <= rst_n && n_mmio_rd_valid[i];
      n_mmio_rd_rsp_data[i]  <= 64'(32'h1000 * (i + 1)) | 64'(n_mmio_rd_addr);
    end

  initial begin
    h_rd_req_ready = 0; h_wr_req_ready = 0; h_rd_rsp_valid = 0; h_rd_rsp = '0;
    h_mmio_wr_valid = 0; h_mmio_rd_valid = 0; h_mmio_wr_addr = 0; h_mmio_rd_addr = 0; h_mmio_wr_data = 0;
    for (int i = 0; i < NN; i++) begin
      n_rd_req_valid[i] = 0; n_wr_req_valid[i] = 0; n_rd_req[i] = '0; n_wr_req[i] = '0; rf[i] = 0; wf[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      for (int i = 0; i < NN; i++) begin
        if (!n_rd_req_valid[i] || rf[i]) begin
          n_rd_req_valid[i] = $urandom_range(99) < 70;
          n_rd_req[i] = '{addr: $urandom, cached: 1'($urandom), tag: '{nic: NIC_W'($urandom), src: tag_src_e'($urandom_range(1)),
                          seq: '0, flow: FLOW_W'($urandom)}};
        end
        if (!n_wr_req_valid[i] || wf[i]) begin
          n_wr_req_valid[i] = $urandom_range(99) < 60;
          n_wr_req[i].addr = $urandom; n_wr_req[i].data = {16{$urandom}};
        end
      end
      h_rd_req_ready = $urandom_range(99) < 70;
      h_wr_req_ready = $urandom_range(99) < 70;
      h_rd_rsp_valid = $urandom_range(1);
      h_rd_rsp.tag = '{nic: NIC_W'($urandom_range(NN - 1)), src: TAG_SRC_RX, seq: '0, flow: FLOW_W'($urandom)};
      h_rd_rsp.data = {16{$urandom}};
      h_mmio_wr_valid = $urandom_range(1);
      h_mmio_wr_addr = {4'($urandom_range(NN - 1)), 8'($urandom)};
      h_mmio_rd_valid = (c % 4 == 0);
      h_mmio_rd_addr = {4'($urandom_range(NN - 1)), 8'($urandom)};
      #1;
      for (int i = 0; i < NN; i++) begin
        rf[i] = n_rd_req_valid[i] && n_rd_req_ready[i];
        wf[i] = n_wr_req_valid[i] && n_wr_req_ready[i];
        if (rf[i]) rq[i].push_back(n_rd_req[i]);
        if (wf[i]) wq[i].push_back(n_wr_req[i]);
        check(n_rd_rsp_valid[i] == (h_rd_rsp_valid && h_rd_rsp.tag.nic == NIC_W'(i)), "read response routed by tag");
        check(n_mmio_wr_valid[i] == (h_mmio_wr_valid && h_mmio_wr_addr[11:8] == 4'(i)), "MMIO write routed");
        check(n_mmio_rd_valid[i] == (h_mmio_rd_valid && h_mmio_rd_addr[11:8] == 4'(i)), "MMIO read routed");
      end
      check(n_rd_rsp == h_rd_rsp && n_mmio_wr_addr == h_mmio_wr_addr[7:0], "broadcast fields");
      check(rf[0] + rf[1] <= 1 && wf[0] + wf[1] <= 1, "one grant per cycle");
      hrf = h_rd_req_valid && h_rd_req_ready;
      hwf = h_wr_req_valid && h_wr_req_ready;
      if (n_rd_req_valid[0] || n_rd_req_valid[1]) check(h_rd_req_valid, "read request forwarded when any NIC asks");
      if (hrf) begin
        automatic int w = rf[0] ? 0 : 1;
        ccip_rd_req_t e;
        check(rf[w], "host read fire matches a NIC grant");
        e = n_rd_req[w]; e.tag.nic = NIC_W'(w);
        check(h_rd_req == e, "read request passed with NIC stamped");
        if (n_rd_req_valid[0] && n_rd_req_valid[1]) begin
          both_rd++;
          if (last_rd != w) alt_ok++;
        end
        last_rd = w; n_rd++;
      end
      if (hwf) begin
        automatic int w = wf[0] ? 0 : 1;
        check(wf[w] && h_wr_req == n_wr_req[w], "write request passed");
        n_wr++;
      end
      if (h_mmio_rd_rsp_valid) check(h_mmio_rd_rsp_data[15:12] != 0, "MMIO read response returned");
      @(posedge clk);
    end
    check(both_rd > 100 && alt_ok == both_rd, $sformatf("round-robin alternation %0d/%0d", alt_ok, both_rd));
    check(n_rd > 500 && n_wr > 500, "traffic flowed");
    finish_tb();
  end
endmodule
