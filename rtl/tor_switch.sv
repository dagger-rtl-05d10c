// Model of the top-of-rack switch that connects the NIC instances on one FPGA.
//
// The paper's switch forwards frames with a pre-defined static switching table. Here the table
// is an input (table_ip[p] is the IPv4 address reached through port p) and each frame goes to
// the port whose address equals its IPv4 destination; frames to unknown addresses are dropped
// (ev_drop). Switching on the IP address rather than a MAC address is this design's choice, as its
// frames carry no Ethernet header. Each output has one register; when several inputs want the
// same output in a cycle, the output takes them round-robin and the others wait (their ready is
// low). Each output thus passes one frame per cycle, with one cycle of latency.
module tor_switch
  import dagger_pkg::*;
#(
  parameter int NUM_PORTS = 2,
  localparam int PW       = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] table_ip  [NUM_PORTS],
  input  logic        in_valid  [NUM_PORTS],
  output logic        in_ready  [NUM_PORTS],
  input  net_frame_t  in_frame  [NUM_PORTS],
  output logic        out_valid [NUM_PORTS],
  input  logic        out_ready [NUM_PORTS],
  output net_frame_t  out_frame [NUM_PORTS],
  output logic        ev_drop,
  output logic        ev_contend
);
  logic [PW-1:0] dst   [NUM_PORTS];
  logic          known [NUM_PORTS];
  logic [PW-1:0] last  [NUM_PORTS];
  logic          win_v [NUM_PORTS];
  logic [PW-1:0] win   [NUM_PORTS];
  logic          take  [NUM_PORTS];
  logic [PW:0]   nreq  [NUM_PORTS];

  // destination lookup
  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      known[i] = 1'b0;
      dst[i]   = '0;
      for (int p = NUM_PORTS - 1; p >= 0; p--)
        if (in_frame[i].ip.dst == table_ip[p]) begin
          known[i] = 1'b1;
          dst[i]   = PW'(p);
        end
    end
  end

  // per-output round-robin
  always_comb begin
    ev_contend = 1'b0;
    for (int o = 0; o < NUM_PORTS; o++) begin
      win_v[o] = 1'b0;
      win[o]   = '0;
      nreq[o]  = '0;
      for (int k = NUM_PORTS; k >= 1; k--) begin
        if (in_valid[(int'(last[o]) + k) % NUM_PORTS] && known[(int'(last[o]) + k) % NUM_PORTS]
            && dst[(int'(last[o]) + k) % NUM_PORTS] == PW'(o)) begin
          win_v[o] = 1'b1;
          win[o]   = PW'((int'(last[o]) + k) % NUM_PORTS);
          nreq[o]  = nreq[o] + 1'b1;
        end
      end
      if (nreq[o] > 1) ev_contend = 1'b1;
      take[o] = win_v[o] && (!out_valid[o] || out_ready[o]);
    end
  end

  always_comb begin
    ev_drop = 1'b0;
    for (int i = 0; i < NUM_PORTS; i++) begin
      in_ready[i] = !known[i] || (take[dst[i]] && win[dst[i]] == PW'(i));
      if (in_valid[i] && !known[i]) ev_drop = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      if (!rst_n) begin
        out_valid[o] <= 1'b0;
        last[o]      <= PW'(NUM_PORTS - 1);
      end else begin
        if (take[o]) begin
          out_valid[o] <= 1'b1;
          last[o]      <= win[o];
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
      if (take[o]) out_frame[o] <= in_frame[win[o]];
    end
  end
endmodule
