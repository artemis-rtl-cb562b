// tb_artemis_top_full: one complete dot-product operation on the stack at
// its default size (8 channels x 4 banks, every bank with its default
// subarrays and 32 tiles). In all 32 banks at once, the testbench loads random
// signed operands into every tile of subarray 0 (both halves, first operand
// in row #2, second in row #1), issues START, one MUL step in the positive
// pass, NEG, the same rows again in the negative pass, and FINISH, and then
// compares each bank's result with a reference: the sum over the products
// of the step's sign, with conversion per capacitor and the partner
// subarray's capacitors charged by the half-1 products. A watchdog stops a
// hung run.
module tb_artemis_top_full;
  import artemis_pkg::*;
  import tb_ref_pkg::*;
  localparam int NB = N_CH * BANKS_PER_CH, T = TILES;
  logic clk = 0, rst_n = 0;
  bank_cmd_e cmd [NB];
  logic [NB-1:0] cmd_valid = '0, cmd_ready, ld_valid = '0, ld_ready;
  logic [0:0] ld_sub [NB];
  logic [4:0] ld_tile [NB];
  logic [NB-1:0] ld_row = '0, ld_half = '0, ld_sign = '0, ld_first = '0, ld_from_ring = '0;
  logic [7:0] ld_mag [NB];
  logic [4:0] ld_byte [NB];
  logic signed [7:0] result [NB], sm_y [NB], sm_out [NB], sm_ymax [NB];
  logic [NB-1:0] done, sm_valid = '0, sm_use = '0, sm_out_valid;
  sm_op_e sm_op [NB];
  logic ring_ready;
  logic [NB-1:0] ring_rx_valid;
  logic [255:0] ring_rx_data [NB];
  logic [15:0] n_auto [NB], n_stall [NB];
  int checks = 0, failures = 0;
  int a_op [NB][T][2], b_op [NB][T][2];
  bit s1 [NB], s2 [NB];

  artemis_top dut (
    .clk, .rst_n, .odd_on(1'b0),
    .cmd, .cmd_valid, .cmd_ready, .ld_valid, .ld_ready, .ld_sub, .ld_tile, .ld_row, .ld_half,
    .ld_sign, .ld_mag, .ld_first, .ld_from_ring, .ld_byte,
    .result, .done, .sm_op, .sm_valid, .sm_y, .sm_use_result(sm_use),
    .sm_out, .sm_out_valid, .sm_ymax,
    .lut_we(1'b0), .lut_sel(1'b0), .lut_addr(8'd0), .lut_data(8'd0),
    .ring_valid(1'b0), .ring_ready, .ring_bank(5'd0), .ring_bcast(1'b0), .ring_data(256'd0),
    .ring_rx_valid, .ring_rx_data, .n_auto_flush(n_auto), .n_stall);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic all_cmd(input bank_cmd_e c);
    @(negedge clk);
    for (int b = 0; b < NB; b++) begin cmd[b] = c; cmd_valid[b] = 1; end
    while (cmd_ready != '1) @(negedge clk);
    @(negedge clk);
    cmd_valid = '0;
    for (int b = 0; b < NB; b++) cmd[b] = CMD_NOP;
    while (cmd_ready != '1) @(negedge clk);
  endtask

  initial begin
    for (int b = 0; b < NB; b++) begin
      cmd[b] = CMD_NOP; sm_op[b] = SM_IDLE; sm_y[b] = 0; ld_sub[b] = 0; ld_tile[b] = 0;
      ld_mag[b] = 0; ld_byte[b] = 0;
      s1[b] = 1'($urandom); s2[b] = 1'($urandom);
      for (int t = 0; t < T; t++)
        for (int h = 0; h < 2; h++) begin
          a_op[b][t][h] = $urandom_range(0, 100); b_op[b][t][h] = $urandom_range(0, 100);
        end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    all_cmd(CMD_START);
    for (int t = 0; t < T; t++)
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        for (int b = 0; b < NB; b++) begin
          ld_valid[b] = 1; ld_tile[b] = 5'(t); ld_row[b] = k[1]; ld_half[b] = k[0];
          ld_first[b] = !k[1]; ld_sign[b] = k[1] ? s2[b] : s1[b];
          ld_mag[b] = 8'(k[1] ? b_op[b][t][k[0]] : a_op[b][t][k[0]]);
        end
      end
    @(negedge clk); ld_valid = '0;
    all_cmd(CMD_MUL);
    all_cmd(CMD_NEG);
    all_cmd(CMD_MUL);
    @(negedge clk);
    for (int b = 0; b < NB; b++) begin cmd[b] = CMD_FINISH; cmd_valid[b] = 1; end
    while (done == '0) begin
      @(negedge clk);
      if (cmd_ready == '1) begin cmd_valid = '0; for (int b = 0; b < NB; b++) cmd[b] = CMD_NOP; end
    end
    cmd_valid = '0;
    for (int b = 0; b < NB; b++) begin
      int want, sub0, sub1;
      sub0 = 0; sub1 = 0;
      // only the pass matching the product sign charges; each capacitor
      // holds one product and is converted on its own
      for (int t = 0; t < T; t++) begin
        sub0 += conv(prod(a_op[b][t][0], b_op[b][t][0]));
        sub1 += conv(prod(a_op[b][t][1], b_op[b][t][1]));
      end
      if (s1[b] ^ s2[b]) want = sat8(sat8(-sub0) - sub1);
      else want = sat8(sat8(sub0) + sub1);
      checks++;
      if (int'(result[b]) != want) begin
        failures++; $display("bank %0d: result %0d, reference %0d", b, result[b], want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
