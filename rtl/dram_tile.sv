// dram_tile: behavioural model of one ARTEMIS DRAM tile (256 columns) with
// its in-array compute additions.
//
// What it models, in the order a MAC uses it:
//  * Two computational rows (row #1, row #2). Operands arrive as 128-bit
//    stochastic streams, two per row (columns 0..127 = half 0, 128..255 =
//    half 1). Diodes between the rows make the pair compute a bitwise AND;
//    'mul' stores row1 & row2 into row #1 and leaves it on the sense
//    amplifiers (S/As), so one step multiplies two operand pairs.
//  * S_to_A: on 'k1' each half's bit-lines charge a MOMCAP in proportion to
//    the number of 1s. Half 0 charges this tile's own MOMCAP; half 1 is sent
//    (nb_ones_out/nb_k1_out) to the MOMCAP of the partner tile in the
//    neighbouring, non-operating subarray. When this tile's subarray is the
//    non-operating one ('on' low), its MOMCAP instead takes the partner's
//    charge (nb_ones_in/nb_k1_in).
//  * A_to_U: 'b1' shares the MOMCAP onto the bit-lines and the S/As, used as
//    comparators, produce a thermometer code.
//  * U_to_B: 'iso' passes that code through the priority encoder; 'l1'
//    captures the binary partial sum in the tile latch. The controller raises
//    b1, iso and l1 in the same cycle. 'discharge' empties the MOMCAP.
//  * The tile latches form a shift chain towards the near-subarray compute
//    unit: 'shift' loads the latch from latch_in (the next tile's latch).
// Every control is sampled on the rising clock edge; one edge per step. The
// DRAM cells, diodes, S/As and MOMCAP are analog, hence a behavioural model;
// the 254 ordinary storage rows of the tile are not modelled. Which half
// feeds which MOMCAP and the one-step-per-cycle timing are this model's
// choices; the structure follows the published tile.
module dram_tile
#(
  parameter int unsigned ROW_BITS = artemis_pkg::ROW_BITS,
  parameter int unsigned SC_LEN   = artemis_pkg::SC_LEN,
  parameter int unsigned MAX_ACC  = artemis_pkg::MAX_ACC,
  parameter int unsigned ONES_W   = $clog2(SC_LEN + 1),
  parameter int unsigned LAT_W    = artemis_pkg::DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // computational-row write (one half row per cycle)
  input  logic              wr_en,
  input  logic              wr_row,     // 0: row #1, 1: row #2
  input  logic              wr_half,
  input  logic [SC_LEN-1:0] wr_data,
  // multiply / accumulate
  input  logic              mul,
  input  logic              k1,         // already gated by the sign controller
  input  logic              on,         // this tile's subarray operates
  output logic [ONES_W-1:0] nb_ones_out,
  output logic              nb_k1_out,
  input  logic [ONES_W-1:0] nb_ones_in,
  input  logic              nb_k1_in,
  // analog-to-binary conversion
  input  logic              b1,
  input  logic              iso,
  input  logic              l1,
  input  logic              discharge,
  // latch row shift chain
  input  logic              shift,
  input  logic [LAT_W-1:0]  latch_in,
  output logic [LAT_W-1:0]  latch_out,
  // observation
  output logic [$clog2(MAX_ACC*SC_LEN+1)-1:0] cap_level
);
  localparam int unsigned CHG_W = $clog2(MAX_ACC * SC_LEN + 1);
  localparam int unsigned PE_W  = $clog2(SC_LEN + 1);

  logic [ROW_BITS-1:0] row1, row2;
  logic [SC_LEN-1:0]   cmp;
  logic [ONES_W-1:0]   ones0, ones1, cap_ones;
  logic                cap_k1;
  logic [PE_W-1:0]     pe_bin;
  logic [LAT_W-1:0]    latch;

  // computational rows and diode AND (the S/As read row #1)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row1 <= '0;
      row2 <= '0;
    end else if (mul) begin
      row1 <= row1 & row2;
    end else if (wr_en) begin
      if (!wr_row) row1[wr_half*SC_LEN +: SC_LEN] <= wr_data;
      else         row2[wr_half*SC_LEN +: SC_LEN] <= wr_data;
    end
  end

  // S_to_A: charge proportional to the number of 1s per half
  assign ones0 = ONES_W'($countones(row1[SC_LEN-1:0]));
  assign ones1 = ONES_W'($countones(row1[ROW_BITS-1:SC_LEN]));

  assign nb_ones_out = ones1;
  assign nb_k1_out   = k1 && on;
  assign cap_ones    = on ? ones0 : nb_ones_in;
  assign cap_k1      = on ? k1 : nb_k1_in;

  momcap #(.SC_LEN(SC_LEN), .MAX_ACC(MAX_ACC)) u_cap (
    .clk, .rst_n,
    .k1(cap_k1), .ones(cap_ones), .discharge,
    .level(cap_level), .n_acc(), .full()
  );

  a_to_u #(.N(SC_LEN), .FULL(MAX_ACC * SC_LEN), .CHG_W(CHG_W)) u_atou (
    .b1(b1), .level(cap_level), .tcu(cmp)
  );

  priority_encoder #(.N(SC_LEN)) u_pe (
    .tcu(iso ? cmp : '0), .bin(pe_bin)
  );

  // tile latches: capture the conversion result or shift towards the NSC
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     latch <= '0;
    else if (l1)    latch <= LAT_W'(pe_bin);
    else if (shift) latch <= latch_in;
  end
  assign latch_out = latch;

endmodule
