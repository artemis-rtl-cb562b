// nsc: near-subarray compute unit, one per subarray.
//
// Holds
//  * an 8-bit adder/subtractor with an accumulator that reduces the tiles'
//    binary partial sums as they arrive from the latch chain (sub_valid;
//    subtracted when sub_neg, i.e. in the negative pass), and adds the
//    accumulator of the next NSC in the chain (next_valid) so that the bank's
//    result gathers in the first NSC;
//  * a softmax unit (comparator, ln and exp LUTs);
//  * a B_to_TCU block that turns incoming binary operands into the stochastic
//    streams written into the tiles' computational rows.
// Tile partial sums are unsigned (0..255); the accumulator is signed 8-bit
// and saturates. acc_clr has priority over sub_valid, which has priority over
// next_valid. All updates happen on the rising edge; acc is registered.
// The unit's contents and the 8-bit width follow the published NSC;
// saturation and the priority order are this RTL's choices.
module nsc
#(
  parameter int unsigned ACC_W  = artemis_pkg::DATA_W,
  parameter int unsigned SC_LEN = artemis_pkg::SC_LEN,
  parameter int unsigned MAG_W  = $clog2(SC_LEN + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // partial-sum reduction
  input  logic                    acc_clr,
  input  logic                    sub_valid,
  input  logic [ACC_W-1:0]        sub_in,     // unsigned, from the latch chain
  input  logic                    sub_neg,
  input  logic                    next_valid,
  input  logic signed [ACC_W-1:0] next_in,    // accumulator of the next NSC
  output logic signed [ACC_W-1:0] acc,        // to the previous NSC
  // softmax
  input  artemis_pkg::sm_op_e                  sm_op,
  input  logic                    sm_valid,
  input  logic signed [ACC_W-1:0] sm_y,
  input  logic                    lut_we,
  input  logic                    lut_sel,
  input  logic [ACC_W-1:0]        lut_addr,
  input  logic [ACC_W-1:0]        lut_data,
  output logic signed [ACC_W-1:0] sm_out,
  output logic                    sm_out_valid,
  output logic signed [ACC_W-1:0] sm_ymax,
  // B_to_TCU
  input  logic                    bt_sign,
  input  logic [MAG_W-1:0]        bt_mag,
  input  logic                    bt_first,
  output logic [SC_LEN-1:0]       bt_stream,
  output logic                    bt_sign_out
);
  localparam logic signed [ACC_W+1:0] SMAX = (ACC_W+2)'(2 ** (ACC_W - 1) - 1);
  localparam logic signed [ACC_W+1:0] SMIN = -(ACC_W+2)'(2 ** (ACC_W - 1));

  logic signed [ACC_W+1:0] a, b, r;

  // the single adder/subtractor
  always_comb begin
    a = (ACC_W+2)'(acc);
    if (sub_valid) b = (ACC_W+2)'({1'b0, sub_in});
    else           b = (ACC_W+2)'(next_in);
    r = (sub_valid && sub_neg) ? a - b : a + b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      acc <= '0;
    else if (acc_clr)                acc <= '0;
    else if (sub_valid || next_valid) begin
      if (r > SMAX)      acc <= SMAX[ACC_W-1:0];
      else if (r < SMIN) acc <= SMIN[ACC_W-1:0];
      else               acc <= r[ACC_W-1:0];
    end
  end

  softmax_unit #(.DATA_W(ACC_W)) u_sm (
    .clk, .rst_n,
    .op(sm_op), .valid(sm_valid), .y(sm_y),
    .lut_we, .lut_sel, .lut_addr, .lut_data,
    .out(sm_out), .out_valid(sm_out_valid), .ymax(sm_ymax), .sum(), .lnsum()
  );

  b_to_tcu #(.SC_LEN(SC_LEN), .MAG_W(MAG_W)) u_bt (
    .sign_in(bt_sign), .mag(bt_mag), .first_op(bt_first),
    .stream(bt_stream), .sign_out(bt_sign_out)
  );
endmodule
