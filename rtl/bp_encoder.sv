// bp_encoder: bit-position correlation encoder for the first operand of a
// deterministic stochastic multiply.
//
// The second operand is a TCU stream (its first b bits set). For the AND of
// the two streams to carry a*b/SC_LEN ones, the 1s of the first operand must
// be spread evenly over the bit positions, so that any prefix of the stream
// holds its fair share of them. This encoder sets bit i to
//   floor((i+1)*m/SC_LEN) - floor(i*m/SC_LEN),
// so every prefix of length b contains exactly floor(b*m/SC_LEN) ones and the
// AND with a TCU operand b yields floor(a*b/SC_LEN). The published design
// states only the property; this particular spreading rule is this RTL's
// choice. Combinational; magnitudes above SC_LEN saturate to SC_LEN.
module bp_encoder #(
  parameter int unsigned SC_LEN = artemis_pkg::SC_LEN,
  parameter int unsigned MAG_W  = $clog2(SC_LEN + 1)
) (
  input  logic [MAG_W-1:0]  mag,
  output logic [SC_LEN-1:0] stream
);
  localparam int unsigned PW = 2 * MAG_W + 1;
  logic [MAG_W-1:0] m;
  logic [PW-1:0]    lo, hi;

  always_comb begin
    m = (mag > MAG_W'(SC_LEN)) ? MAG_W'(SC_LEN) : mag;
    for (int unsigned i = 0; i < SC_LEN; i++) begin
      lo = (PW'(i) * PW'(m)) / PW'(SC_LEN);
      hi = (PW'(i + 1) * PW'(m)) / PW'(SC_LEN);
      stream[i] = (hi != lo);
    end
  end
endmodule
