// Deserializer of the RPC unit: checks a received payload and restores the RPC object.
//
// The wire format is the serializer's: header plus contiguous arguments. The payload is accepted
// (ok high) when its type is a request or a response, its arg_len fits in one line and every byte
// beyond arg_len is zero. The object handed on has its control byte cleared (the CCI-P transmitter
// sets the ring phase bit when it writes the object to host memory). The connection id is brought
// out for the connection-manager lookup. Purely combinational.
module deserializer
  import dagger_pkg::*;
(
  input  rpc_obj_t             payload,
  output rpc_obj_t             rpc,
  output logic [CONN_ID_W-1:0] conn_id,
  output logic                 ok
);
  logic pad_ok;
  always_comb begin
    pad_ok = 1'b1;
    for (int b = 0; b < ARG_BYTES; b++)
      if (16'(b) >= payload.hdr.arg_len && payload.args[(ARG_BYTES-1-b)*8 +: 8] != 8'h00)
        pad_ok = 1'b0;
    ok = pad_ok && (payload.hdr.arg_len <= 16'(ARG_BYTES)) &&
         (payload.hdr.rtype == RPC_REQUEST || payload.hdr.rtype == RPC_RESPONSE);
    rpc = payload;
    rpc.hdr.ctl = '0;
    conn_id = payload.hdr.conn_id;
  end
endmodule
