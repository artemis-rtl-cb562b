// momcap: behavioural model of the metal-on-metal accumulation capacitor
// built from metal layers M4-M7 above each DRAM tile.
//
// This is an analog part; the model keeps its charge as an integer in units
// of one bit-line's contribution. Each K1 pulse adds the number of bit-lines
// holding 1 (0..SC_LEN), i.e. one stochastic product, as one linear voltage
// step. The published capacitor (8 pF) holds MAX_ACC = 20 such steps before
// saturating; the model clamps the charge at MAX_ACC*SC_LEN and counts the
// steps so the bank controller can convert before saturation. Discharge
// (after conversion) empties it. Charge is added on the clock edge where k1
// is high; discharge has priority.
module momcap #(
  parameter int unsigned SC_LEN  = artemis_pkg::SC_LEN,
  parameter int unsigned MAX_ACC = artemis_pkg::MAX_ACC,
  parameter int unsigned ONES_W  = $clog2(SC_LEN + 1),
  parameter int unsigned CHG_W   = $clog2(MAX_ACC * SC_LEN + 1),
  parameter int unsigned CNT_W   = $clog2(MAX_ACC + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              k1,         // S_to_A switch closed: add charge
  input  logic [ONES_W-1:0] ones,       // bit-lines at '1'
  input  logic              discharge,
  output logic [CHG_W-1:0]  level,
  output logic [CNT_W-1:0]  n_acc,
  output logic              full
);
  localparam int unsigned FULL = MAX_ACC * SC_LEN;
  logic [CHG_W:0] sum;

  assign sum  = {1'b0, level} + (CHG_W + 1)'(ones);
  assign full = (n_acc >= CNT_W'(MAX_ACC));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level <= '0;
      n_acc <= '0;
    end else if (discharge) begin
      level <= '0;
      n_acc <= '0;
    end else if (k1) begin
      level <= (sum > (CHG_W + 1)'(FULL)) ? CHG_W'(FULL) : sum[CHG_W-1:0];
      if (!full) n_acc <= n_acc + 1'b1;
    end
  end
endmodule
