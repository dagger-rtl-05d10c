// Serializer of the RPC unit: turns an RPC object read from the host into a network payload.
//
// The paper's implementation supports RPCs whose arguments are contiguous in the object, so
// serialization keeps the header and the first arg_len argument bytes and attaches the
// destination credentials from the connection manager. This block clears the host-side control
// byte (the ring phase bit has no meaning on the wire), clamps arg_len to the 48 bytes one line
// can carry (flagging err when it had to), and zeroes every argument byte beyond arg_len so no
// stale host data leaves the NIC. Purely combinational.
module serializer
  import dagger_pkg::*;
(
  input  rpc_obj_t  rpc,
  input  net_addr_t dest,
  output ser_pkt_t  pkt,
  output logic      err
);
  logic [15:0] len;
  always_comb begin
    err = (rpc.hdr.arg_len > 16'(ARG_BYTES));
    len = err ? 16'(ARG_BYTES) : rpc.hdr.arg_len;
    pkt.dst     = dest;
    pkt.payload = rpc;
    pkt.payload.hdr.ctl     = '0;
    pkt.payload.hdr.arg_len = len;
    for (int b = 0; b < ARG_BYTES; b++)
      if (16'(b) >= len) pkt.payload.args[(ARG_BYTES-1-b)*8 +: 8] = 8'h00;
  end
endmodule
