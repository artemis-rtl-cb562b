// b_to_tcu: the binary-to-stochastic block of a near-subarray compute unit.
//
// It receives an operand in sign-magnitude form (magnitude 0..SC_LEN) and
// produces the SC_LEN-bit stream written into a tile's computational row,
// plus the sign for the sign-bit column. Following the published structure
// it holds a TCU decoder and a bit-position correlation encoder behind a 2:1
// selector: the first operand of a multiply leaves through the encoder, the
// second through the decoder only. Combinational.
module b_to_tcu #(
  parameter int unsigned SC_LEN = artemis_pkg::SC_LEN,
  parameter int unsigned MAG_W  = $clog2(SC_LEN + 1)
) (
  input  logic              sign_in,
  input  logic [MAG_W-1:0]  mag,
  input  logic              first_op,   // 1: first operand (BP-encoded)
  output logic [SC_LEN-1:0] stream,
  output logic              sign_out
);
  logic [SC_LEN-1:0] tcu, bp;

  b_to_tcu_decoder #(.SC_LEN(SC_LEN), .MAG_W(MAG_W)) u_dec (.mag(mag), .tcu(tcu));
  bp_encoder       #(.SC_LEN(SC_LEN), .MAG_W(MAG_W)) u_bp  (.mag(mag), .stream(bp));

  assign stream   = first_op ? bp : tcu;
  assign sign_out = sign_in;
endmodule
