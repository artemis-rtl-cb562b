// bank: one ARTEMIS HBM bank, SUBARRAYS subarrays of TILES tiles each.
//
// Structure
//  * Every subarray has TILES dram_tile models, a sign_column and an NSC.
//    The tiles' latches form a chain (tile TILES-1 -> ... -> tile 0) that
//    ends in the subarray's NSC; the NSCs form a chain whose head, NSC 1
//    (index 0 here), holds the bank result.
//  * Open bit-line arrays: subarrays 2k and 2k+1 are partners and only one of
//    each pair operates at a time ('odd_on' picks the odd ones). An operating
//    tile multiplies two operand pairs per step; one product charges its own
//    MOMCAP and the other the MOMCAP of the same-numbered tile in the partner
//    subarray, so a tile takes 2*MAX_ACC MACs between conversions.
//  * One bank_controller drives all tiles, sign columns and NSCs with the same
//    control lines, so every operating subarray does TILES*2 MACs per
//    CMD_MUL (64 with the default 32 tiles).
// Operand loading: while the controller is idle (ld_ready), ld_valid writes
// one operand. Its binary sign-magnitude value passes through the B_to_TCU
// block of the addressed subarray's NSC (encoder for first operands, decoder
// only for second operands) and the 128-bit stream is written into half
// ld_half of computational row ld_row of tile ld_tile; the sign goes into that
// subarray's sign column. A row holds operands of a single sign.
// Softmax: sm_* drives the softmax units of all NSCs; the bank reports the
// one in NSC 1. With sm_use_result, the bank result is fed to it in place of
// sm_y, so the running maximum (step 1) can follow the matrix product.
// LUT writes go to every NSC.
// The organisation and the flow follow the published bank; the partner
// pairing, the load path timing and the ports are this RTL's choices.
module bank
#(
  parameter int unsigned TILES     = artemis_pkg::TILES,
  parameter int unsigned SUBARRAYS = artemis_pkg::SUBARRAYS,
  parameter int unsigned SC_LEN    = artemis_pkg::SC_LEN,
  parameter int unsigned MAX_ACC   = artemis_pkg::MAX_ACC,
  parameter int unsigned DATA_W    = artemis_pkg::DATA_W,
  parameter int unsigned SA_W      = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  parameter int unsigned T_W       = (TILES > 1) ? $clog2(TILES) : 1,
  parameter int unsigned MAG_W     = $clog2(SC_LEN + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     odd_on,
  // commands
  input  artemis_pkg::bank_cmd_e                cmd,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  // operand load
  input  logic                     ld_valid,
  output logic                     ld_ready,
  input  logic [SA_W-1:0]          ld_sub,
  input  logic [T_W-1:0]           ld_tile,
  input  logic                     ld_row,
  input  logic                     ld_half,
  input  logic                     ld_sign,
  input  logic [MAG_W-1:0]         ld_mag,
  input  logic                     ld_first,
  // result
  output logic signed [DATA_W-1:0] result,
  output logic                     done,
  // softmax / LUTs
  input  artemis_pkg::sm_op_e                   sm_op,
  input  logic                     sm_valid,
  input  logic signed [DATA_W-1:0] sm_y,
  input  logic                     sm_use_result,
  input  logic                     lut_we,
  input  logic                     lut_sel,
  input  logic [DATA_W-1:0]        lut_addr,
  input  logic [DATA_W-1:0]        lut_data,
  output logic signed [DATA_W-1:0] sm_out,
  output logic                     sm_out_valid,
  output logic signed [DATA_W-1:0] sm_ymax,
  // event counters
  output logic [15:0]              n_auto_flush,
  output logic [15:0]              n_stall
);
  localparam int unsigned ONES_W = $clog2(SC_LEN + 1);

  logic mul, k1, b1, iso, l1, discharge, shift, pass_neg;
  logic acc_clr, sub_valid, red_en;
  logic [SA_W-1:0] red_idx;

  bank_controller #(.TILES(TILES), .SUBARRAYS(SUBARRAYS), .MAX_ACC(MAX_ACC), .SA_W(SA_W)) u_ctrl (
    .clk, .rst_n, .cmd, .cmd_valid, .cmd_ready,
    .mul, .k1, .b1, .iso, .l1, .discharge, .shift, .pass_neg,
    .acc_clr, .sub_valid, .red_en, .red_idx, .done,
    .n_auto_flush, .n_stall
  );

  assign ld_ready = cmd_ready && !cmd_valid;

  logic signed [DATA_W-1:0] acc      [SUBARRAYS];
  logic [ONES_W-1:0]        nb_ones  [SUBARRAYS][TILES];
  logic                     nb_k1    [SUBARRAYS][TILES];
  logic [DATA_W-1:0]        lat      [SUBARRAYS][TILES];
  logic [SC_LEN-1:0]        stream   [SUBARRAYS];
  logic                     sm_out_s [SUBARRAYS];
  logic signed [DATA_W-1:0] sm_o     [SUBARRAYS];
  logic signed [DATA_W-1:0] sm_m     [SUBARRAYS];

  for (genvar s = 0; s < SUBARRAYS; s++) begin : g_sub
    localparam int unsigned P = (SUBARRAYS > 1) ? (s ^ 1) % SUBARRAYS : s;
    logic on, k1_g, wr_sub, bt_sign;

    assign on     = ((s % 2) == 1) == odd_on;
    assign wr_sub = ld_valid && ld_ready && (ld_sub == SA_W'(s));

    sign_column u_sign (
      .clk, .rst_n,
      .wr_en(wr_sub), .wr_row(ld_row), .wr_sign(bt_sign),
      .pass_neg, .k1_in(k1 && on), .k1_out(k1_g), .prod_neg()
    );

    for (genvar t = 0; t < TILES; t++) begin : g_tile
      dram_tile #(.ROW_BITS(2 * SC_LEN), .SC_LEN(SC_LEN), .MAX_ACC(MAX_ACC), .LAT_W(DATA_W)) u_tile (
        .clk, .rst_n,
        .wr_en(wr_sub && (ld_tile == T_W'(t))), .wr_row(ld_row), .wr_half(ld_half),
        .wr_data(stream[s]),
        .mul(mul && on), .k1(k1_g), .on,
        .nb_ones_out(nb_ones[s][t]), .nb_k1_out(nb_k1[s][t]),
        .nb_ones_in(nb_ones[P][t]),  .nb_k1_in(nb_k1[P][t] && (P != s)),
        .b1, .iso, .l1, .discharge,
        .shift, .latch_in((t == TILES - 1) ? '0 : lat[s][(t + 1) % TILES]), .latch_out(lat[s][t]),
        .cap_level()
      );
    end

    nsc #(.ACC_W(DATA_W), .SC_LEN(SC_LEN), .MAG_W(MAG_W)) u_nsc (
      .clk, .rst_n,
      .acc_clr, .sub_valid, .sub_in(lat[s][0]), .sub_neg(pass_neg),
      .next_valid(red_en && (red_idx == SA_W'(s)) && (s + 1 < SUBARRAYS)),
      .next_in(acc[(s + 1) % SUBARRAYS]),
      .acc(acc[s]),
      .sm_op, .sm_valid, .sm_y(sm_use_result ? acc[s] : sm_y),
      .lut_we, .lut_sel, .lut_addr, .lut_data,
      .sm_out(sm_o[s]), .sm_out_valid(sm_out_s[s]), .sm_ymax(sm_m[s]),
      .bt_sign(ld_sign), .bt_mag(ld_mag), .bt_first(ld_first),
      .bt_stream(stream[s]), .bt_sign_out(bt_sign)
    );
  end

  assign result       = acc[0];
  assign sm_out       = sm_o[0];
  assign sm_out_valid = sm_out_s[0];
  assign sm_ymax      = sm_m[0];

  // a load must not coincide with a running command
  always_ff @(posedge clk) begin
    if (ld_valid)
      assert (cmd_ready) else $error("bank: operand load while the bank controller is busy");
  end
endmodule
