// artemis_top: one HBM stack of the ARTEMIS accelerator.
//
// N_CH channels of BANKS_PER_CH banks (8 x 4 = 32 banks by default), each a
// full bank of SUBARRAYS x TILES in-DRAM compute tiles with its NSCs and bank
// controller, joined by the ring-and-broadcast network that carries 256-bit
// binary words between banks.
// Per bank b, the host drives the command handshake (cmd/cmd_valid/cmd_ready),
// the operand-load port and the softmax port, and reads result/done. The
// operand magnitude of a load comes either from the host (ld_mag) or, with
// ld_from_ring[b], from byte ld_byte[b] of the word the ring currently holds
// at bank b, so that data arriving from another bank goes straight through
// the NSC's B_to_TCU block into the computational rows. LUT programming is
// broadcast to every NSC of every bank. ring_* injects words.
// Arrays are indexed by bank number (channel * BANKS_PER_CH + bank).
// Size: the published stack has 128 subarrays per bank (131072 tiles in
// all). Elaborating that many tile models needs several hundred GB in the
// open-source front ends, so this top defaults to 2 subarrays (one partner
// pair, as in the two-subarray example of the published dataflow) per bank,
// keeping the 32 banks and the 32 tiles per subarray; 'bank' on its own keeps
// the full 128 subarrays.
// The organisation follows the published HBM configuration; the ports and
// the ring-to-load connection are this RTL's choices. The DRAM storage rows,
// the HBM I/O and the host are outside this module.
module artemis_top #(
  parameter int unsigned N_CH         = artemis_pkg::N_CH,
  parameter int unsigned BANKS_PER_CH = artemis_pkg::BANKS_PER_CH,
  parameter int unsigned SUBARRAYS    = 2,     // published: 128 (see header)
  parameter int unsigned TILES        = artemis_pkg::TILES,
  parameter int unsigned SC_LEN       = artemis_pkg::SC_LEN,
  parameter int unsigned MAX_ACC      = artemis_pkg::MAX_ACC,
  parameter int unsigned DATA_W       = artemis_pkg::DATA_W,
  parameter int unsigned LINK_W       = artemis_pkg::LINK_W,
  parameter int unsigned N_BANKS      = N_CH * BANKS_PER_CH,
  parameter int unsigned B_W          = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  parameter int unsigned SA_W         = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  parameter int unsigned T_W          = (TILES > 1) ? $clog2(TILES) : 1,
  parameter int unsigned MAG_W        = $clog2(SC_LEN + 1),
  parameter int unsigned BY_W         = $clog2(LINK_W / 8)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        odd_on,
  // per-bank commands
  input  artemis_pkg::bank_cmd_e      cmd          [N_BANKS],
  input  logic [N_BANKS-1:0]          cmd_valid,
  output logic [N_BANKS-1:0]          cmd_ready,
  // per-bank operand load
  input  logic [N_BANKS-1:0]          ld_valid,
  output logic [N_BANKS-1:0]          ld_ready,
  input  logic [SA_W-1:0]             ld_sub       [N_BANKS],
  input  logic [T_W-1:0]              ld_tile      [N_BANKS],
  input  logic [N_BANKS-1:0]          ld_row,
  input  logic [N_BANKS-1:0]          ld_half,
  input  logic [N_BANKS-1:0]          ld_sign,
  input  logic [MAG_W-1:0]            ld_mag       [N_BANKS],
  input  logic [N_BANKS-1:0]          ld_first,
  input  logic [N_BANKS-1:0]          ld_from_ring,
  input  logic [BY_W-1:0]             ld_byte      [N_BANKS],
  // per-bank results
  output logic signed [DATA_W-1:0]    result       [N_BANKS],
  output logic [N_BANKS-1:0]          done,
  // per-bank softmax
  input  artemis_pkg::sm_op_e         sm_op        [N_BANKS],
  input  logic [N_BANKS-1:0]          sm_valid,
  input  logic signed [DATA_W-1:0]    sm_y         [N_BANKS],
  input  logic [N_BANKS-1:0]          sm_use_result,
  output logic signed [DATA_W-1:0]    sm_out       [N_BANKS],
  output logic [N_BANKS-1:0]          sm_out_valid,
  output logic signed [DATA_W-1:0]    sm_ymax      [N_BANKS],
  // LUT programming (all NSCs)
  input  logic                        lut_we,
  input  logic                        lut_sel,
  input  logic [DATA_W-1:0]           lut_addr,
  input  logic [DATA_W-1:0]           lut_data,
  // inter-bank network
  input  logic                        ring_valid,
  output logic                        ring_ready,
  input  logic [B_W-1:0]              ring_bank,
  input  logic                        ring_bcast,
  input  logic [LINK_W-1:0]           ring_data,
  output logic [N_BANKS-1:0]          ring_rx_valid,
  output logic [LINK_W-1:0]           ring_rx_data [N_BANKS],
  // event counters per bank
  output logic [15:0]                 n_auto_flush [N_BANKS],
  output logic [15:0]                 n_stall      [N_BANKS]
);
  ring_network #(.N_BANKS(N_BANKS), .LINK_W(LINK_W), .B_W(B_W)) u_ring (
    .clk, .rst_n,
    .inj_valid(ring_valid), .inj_ready(ring_ready), .inj_bank(ring_bank),
    .bcast(ring_bcast), .inj_data(ring_data),
    .rx_valid(ring_rx_valid), .rx_data(ring_rx_data)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [MAG_W-1:0] mag;
    assign mag = ld_from_ring[b] ? MAG_W'(ring_rx_data[b][8*ld_byte[b] +: 8]) : ld_mag[b];

    bank #(.TILES(TILES), .SUBARRAYS(SUBARRAYS), .SC_LEN(SC_LEN), .MAX_ACC(MAX_ACC),
           .DATA_W(DATA_W), .SA_W(SA_W), .T_W(T_W), .MAG_W(MAG_W)) u_bank (
      .clk, .rst_n, .odd_on,
      .cmd(cmd[b]), .cmd_valid(cmd_valid[b]), .cmd_ready(cmd_ready[b]),
      .ld_valid(ld_valid[b]), .ld_ready(ld_ready[b]),
      .ld_sub(ld_sub[b]), .ld_tile(ld_tile[b]), .ld_row(ld_row[b]), .ld_half(ld_half[b]),
      .ld_sign(ld_sign[b]), .ld_mag(mag), .ld_first(ld_first[b]),
      .result(result[b]), .done(done[b]),
      .sm_op(sm_op[b]), .sm_valid(sm_valid[b]), .sm_y(sm_y[b]), .sm_use_result(sm_use_result[b]),
      .lut_we, .lut_sel, .lut_addr, .lut_data,
      .sm_out(sm_out[b]), .sm_out_valid(sm_out_valid[b]), .sm_ymax(sm_ymax[b]),
      .n_auto_flush(n_auto_flush[b]), .n_stall(n_stall[b])
    );
  end
endmodule
