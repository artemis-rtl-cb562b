// priority_encoder: the U_to_B stage of the analog-to-binary converter.
//
// The sense amplifiers, used as comparators against evenly spaced reference
// levels, leave a thermometer (TCU) code on the tile's N bit-lines. This
// encoder returns the position of the highest 1 plus one (0 when no bit is
// set); for a clean thermometer code that is the number of 1s, i.e. the
// binary value of the MOMCAP voltage. Combinational; its result is captured
// by the tile latches one step later.
module priority_encoder #(
  parameter int unsigned N     = artemis_pkg::SC_LEN,
  parameter int unsigned OUT_W = $clog2(N + 1)
) (
  input  logic [N-1:0]     tcu,
  output logic [OUT_W-1:0] bin
);
  always_comb begin
    bin = '0;
    for (int unsigned i = 0; i < N; i++)
      if (tcu[i]) bin = OUT_W'(i + 1);
  end
endmodule
