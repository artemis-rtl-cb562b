// b_to_tcu_decoder: binary to transition-coded unary (TCU) decoder.
//
// A TCU number is a stochastic stream whose 1s are all grouped at one end.
// This decoder turns a binary magnitude m (0..SC_LEN) into a SC_LEN-bit stream
// with bits 0..m-1 set and the rest clear; magnitudes above SC_LEN saturate
// to all ones. It is used for the second operand of a stochastic multiply.
// Purely combinational. The TCU idea and the 128-bit length follow the
// published design; putting the 1s at the low-index end is this RTL's choice.
module b_to_tcu_decoder #(
  parameter int unsigned SC_LEN = artemis_pkg::SC_LEN,
  parameter int unsigned MAG_W  = $clog2(SC_LEN + 1)
) (
  input  logic [MAG_W-1:0]  mag,
  output logic [SC_LEN-1:0] tcu
);
  always_comb begin
    for (int unsigned i = 0; i < SC_LEN; i++)
      tcu[i] = (MAG_W'(i) < mag);
  end
endmodule
