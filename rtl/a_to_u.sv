// a_to_u: behavioural model of the analog-to-TCU conversion of a tile.
//
// With B1 closed the MOMCAP is shared onto the tile's bit-lines, and each of
// the N sense amplifiers, precharged to its own level from a voltage divider
// (selected through the MUX 'sel' path), acts as a comparator. Comparator k
// (k = 1..N) outputs 1 when the MOMCAP charge reaches k*FULL/N, so the
// outputs form a thermometer code read by the priority encoder. Analog in
// reality; here combinational. The even spacing of the levels is this
// model's choice; the published text gives only the mechanism.
module a_to_u #(
  parameter int unsigned N     = artemis_pkg::SC_LEN,
  parameter int unsigned FULL  = artemis_pkg::MAX_ACC * artemis_pkg::SC_LEN,
  parameter int unsigned CHG_W = $clog2(FULL + 1)
) (
  input  logic             b1,
  input  logic [CHG_W-1:0] level,
  output logic [N-1:0]     tcu
);
  // comparator k fires when level >= k*FULL/N, i.e. level >= ceil(k*FULL/N)
  for (genvar k = 1; k <= N; k++) begin : g_cmp
    localparam int unsigned TH = (k * FULL + N - 1) / N;
    assign tcu[k-1] = b1 && (level >= CHG_W'(TH));
  end
endmodule
